// Testbench of clustering_isolated (OVERFLOW = 0 and 1 instances): random SPs with
// random hitmaps and EE words, random output holds. The reference finds the clusters of
// each SP with a flood fill and computes floor(4*sum/npix) in absolute quarter pixels.
// Checks for every output word (any order inside an event): type bit, overflow flag, sensor and position;
// EE words pass with their identifier. With single-cluster SPs and no hold, one SP is
// taken per cycle.
module tb_clustering_isolated;
  import velo_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic in_valid = 1'b0, out_hold = 1'b0;
  logic [SP_W-1:0] in_data = '0;
  logic [1:0] in_hold, out_valid, sync_err, err_loss;
  logic [SP_W-1:0] out_data [2];
  logic [5:0] fifo_max [2];
  for (genvar g = 0; g < 2; g++) begin : g_dut
    clustering_isolated #(.OVERFLOW(g[0]), .FIFO_DEPTH(32)) dut (.clk, .rst, .in_valid,
      .in_data, .in_hold(in_hold[g]), .out_valid(out_valid[g]), .out_data(out_data[g]),
      .out_hold, .sync_err(sync_err[g]), .fifo_max(fifo_max[g]), .err_loss(err_loss[g]));
  end
  int checks = 0, failures = 0, n_two = 0, taken = 0;
  logic [SP_W-1:0] exp_q [2][$];
  bit hold_en = 1'b0;

  always @(negedge clk) out_hold = hold_en ? ($urandom_range(2) == 0) : 1'b0;

  always @(posedge clk) if (!rst) begin
    if (in_valid && in_hold == 2'b00) taken++;
    for (int g = 0; g < 2; g++) if (out_valid[g] && !out_hold) begin
      logic [SP_W-1:0] w, e;
      w = out_data[g];
      checks++;
      if (exp_q[g].size() == 0) begin failures++; $display("FAIL %0d: extra word %08h", g, w); end
      else if (is_ee(w)) begin
        e = exp_q[g].pop_front();
        if (w != e) begin failures++; $display("FAIL %0d: got EE %08h expected %08h", g, w, e); end
      end else begin
        // the clusters of one event may leave in any order
        int idx;
        idx = -1;
        foreach (exp_q[g][i]) begin
          if (is_ee(exp_q[g][i])) break;
          if ((w & 32'hE07F_FFFF) == exp_q[g][i]) begin idx = i; break; end
        end
        if (idx < 0) begin failures++; $display("FAIL %0d: unexpected cluster %08h", g, w); end
        else exp_q[g].delete(idx);
      end
    end
    if (sync_err != 2'b00 || err_loss != 2'b00) begin failures++; $display("FAIL: error flag"); end
  end

  task automatic send_sp(input logic [SP_W-1:0] w);
    if (is_ee(w)) begin exp_q[0].push_back(w); exp_q[1].push_back(w); end
    else begin
      sp_t s;
      int comp [8], n;
      s = sp_t'(w);
      foreach (comp[i]) comp[i] = -1;
      n = 0;
      // flood fill, clusters numbered by lowest pixel row
      for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++)
        if (s.hitmap[4*c + r] && comp[4*c + r] < 0) begin
          bit grown;
          comp[4*c + r] = n; grown = 1'b1;
          while (grown) begin
            grown = 1'b0;
            for (int a = 0; a < 8; a++) if (comp[a] == n)
              for (int b = 0; b < 8; b++)
                if (s.hitmap[b] && comp[b] < 0 && (a % 4 - b % 4) <= 1 && (b % 4 - a % 4) <= 1) begin
                  comp[b] = n; grown = 1'b1;
                end
          end
          n++;
        end
      if (n == 2) n_two++;
      for (int k = 0; k < n; k++) begin
        int np, sr, sc, rq, cq;
        np = 0; sr = 0; sc = 0;
        for (int b = 0; b < 8; b++) if (comp[b] == k) begin
          np++; sr += 4*int'(s.row) + b % 4; sc += 2*int'(s.col) + b / 4;
        end
        rq = 4*sr/np; cq = 4*sc/np;
        for (int g = 0; g < 2; g++) begin
          logic [SP_W-1:0] e;
          e = '0;
          e[30] = 1'b1; e[29] = g[0]; e[22] = s.sensor;
          e[21:10] = 12'(cq); e[9:0] = 10'(rq);
          exp_q[g].push_back(e);
        end
      end
    end
    @(negedge clk);
    in_data = w; in_valid = 1'b1;
    #0;
    while (in_hold != 2'b00) @(negedge clk);
  endtask

  function automatic logic [SP_W-1:0] rand_sp(input bit single_run);
    sp_t s;
    s = '0;
    s.iso = 1'b1; s.sensor = 1'($urandom_range(1));
    s.row = 6'($urandom_range(63)); s.col = 9'($urandom_range(383));
    s.hitmap = single_run ? 8'(8'h11 << $urandom_range(3)) : 8'($urandom_range(1, 255));
    return SP_W'(s);
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, c0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // rate: 20 one-cluster SPs, one per cycle
    t0 = taken; c0 = 0;
    for (int i = 0; i < 20; i++) begin send_sp(rand_sp(1'b1)); c0++; end
    @(negedge clk); in_valid = 1'b0;
    for (int e = 0; e < 400; e++) begin
      int n;
      n = $urandom_range(6);
      for (int i = 0; i < n; i++) send_sp(rand_sp(1'b0));
      send_sp(make_ee(EVID_W'(e)));
      if (e == 50) hold_en = 1'b1;
    end
    @(negedge clk); in_valid = 1'b0;
    hold_en = 1'b0;
    repeat (100) @(negedge clk);
    checks++;
    if (exp_q[0].size() + exp_q[1].size() != 0) begin failures++; $display("FAIL: words missing"); end
    checks++;
    if (n_two == 0) begin failures++; $display("FAIL: no SP with two clusters"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the 20 rate-test SPs must be taken in consecutive cycles
  int first_take = -1, cyc = 0, ntake = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (in_valid && in_hold == 2'b00) begin
      ntake++;
      if (first_take < 0) first_take = cyc;
    end
    if (ntake == 20 && first_take > 0) begin
      checks++;
      if (cyc - first_take != 19) begin failures++; $display("FAIL: 20 SPs took %0d cycles", cyc - first_take + 1); end
      first_take = 0;
    end
  end
endmodule
