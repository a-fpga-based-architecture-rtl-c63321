// Testbench of cluster_finder, both orientations: random sparse 12x6 pixel maps are
// copied in. The reference lists the pattern anchors from the two 3x3 patterns written
// as offset tables (mirrored in columns for orientation 1) and cuts the 3x3 window of
// each anchor (rows r..r+2, columns c..c+2 or c-2..c). Checks the candidates in
// ascending pixel address (anchor, window, contained and boundary flags, matrix
// centre, sensor), the EE candidate with the event identifier after them, an EE-only
// output for a matrix that was not allocated, and one candidate per cycle.
module tb_cluster_finder;
  import velo_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic copy = 1'b0, copy_alloc = 1'b0, copy_sensor = 1'b0, out_hold = 1'b0;
  logic [MAT_PIX-1:0] copy_pix = '0;
  logic [SP_ROW_W-1:0] copy_crow = '0;
  logic [SP_COL_W-1:0] copy_ccol = '0;
  logic [EVID_W-1:0] copy_id = '0;
  logic [1:0] busy, out_valid, err_loss;
  logic [CAND_W-1:0] out_data [2];
  for (genvar g = 0; g < 2; g++) begin : g_dut
    cluster_finder #(.ORIENT(g[0]), .FIFO_DEPTH(4)) dut (.clk, .rst, .copy, .copy_alloc,
      .copy_pix, .copy_crow, .copy_ccol, .copy_sensor, .copy_id, .busy(busy[g]),
      .out_valid(out_valid[g]), .out_data(out_data[g]), .out_hold, .err_loss(err_loss[g]));
  end
  int checks = 0, failures = 0, ncand = 0, nout [2];
  cand_t exp_q [2][$];
  bit hold_en = 1'b0;

  // pattern A: anchor on, these off; pattern B: anchor off, (1,0) and (0,1) on, these off
  int a_off [5][2] = '{'{1, -1}, '{0, -1}, '{-1, -1}, '{-1, 0}, '{-1, 1}};
  int b_off [5][2] = '{'{1, -1}, '{0, -1}, '{-1, 0}, '{-1, 1}, '{-1, 2}};

  function automatic bit pix(input logic [MAT_PIX-1:0] m, input int r, input int c);
    if (r < 0 || r >= MAT_ROWS || c < 0 || c >= MAT_COLS) return 1'b0;
    return m[r*MAT_COLS + c];
  endfunction

  task automatic expect_map(input logic [MAT_PIX-1:0] m, input bit alloc, input int g);
    int s;
    s = g ? -1 : 1;
    if (alloc)
      for (int a = 0; a < MAT_PIX; a++) begin
        int r, c, cmin;
        bit ok_a, ok_b;
        r = a / MAT_COLS; c = a % MAT_COLS;
        ok_a = pix(m, r, c);
        ok_b = !pix(m, r, c) && pix(m, r+1, c) && pix(m, r, c+s);
        for (int k = 0; k < 5; k++) begin
          if (pix(m, r + a_off[k][0], c + s*a_off[k][1])) ok_a = 1'b0;
          if (pix(m, r + b_off[k][0], c + s*b_off[k][1])) ok_b = 1'b0;
        end
        if (ok_a || ok_b) begin
          cand_t e;
          bit cont;
          cmin = g ? c - 2 : c;
          e = '0;
          e.sensor = copy_sensor; e.crow = copy_crow; e.ccol = copy_ccol;
          e.arow = 4'(r); e.acol = 3'(c);
          for (int dr = 0; dr < 3; dr++) for (int dc = 0; dc < 3; dc++)
            e.grid[3*dr + dc] = pix(m, r + dr, cmin + dc);
          cont = 1'b1;   // no active pixel outside the window touches one inside
          for (int rr = r - 1; rr <= r + 3; rr++) for (int cc = cmin - 1; cc <= cmin + 3; cc++)
            if ((rr < r || rr > r + 2 || cc < cmin || cc > cmin + 2) && pix(m, rr, cc))
              for (int dr = 0; dr < 3; dr++) for (int dc = 0; dc < 3; dc++)
                if (e.grid[3*dr + dc] && rr - (r + dr) <= 1 && (r + dr) - rr <= 1 &&
                    cc - (cmin + dc) <= 1 && (cmin + dc) - cc <= 1) cont = 1'b0;
          e.contained = cont;
          e.boundary = (r == 0) || (r + 2 >= MAT_ROWS - 1) || (cmin <= 0) || (cmin + 2 >= MAT_COLS - 1);
          exp_q[g].push_back(e);
          ncand++;
        end
      end
    begin
      cand_t e;
      e = '0; e.ee = 1'b1; e.sensor = copy_sensor; e.grid = 9'(copy_id);
      exp_q[g].push_back(e);
    end
  endtask

  always @(negedge clk) out_hold = hold_en ? ($urandom_range(2) == 0) : 1'b0;

  always @(posedge clk) if (!rst)
    for (int g = 0; g < 2; g++) if (out_valid[g] && !out_hold) begin
      cand_t c;
      c = cand_t'(out_data[g]);
      checks++; nout[g]++;
      if (exp_q[g].size() == 0 || exp_q[g][0] != c) begin
        failures++; $display("FAIL orient %0d: got %09h expected %09h", g, out_data[g],
                             exp_q[g].size() ? CAND_W'(exp_q[g][0]) : CAND_W'(0));
      end
      if (exp_q[g].size() != 0) void'(exp_q[g].pop_front());
      if (err_loss[g]) begin failures++; $display("FAIL: loss"); end
    end

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nout[0] = 0; nout[1] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 600; t++) begin
      logic [MAT_PIX-1:0] m;
      bit alloc;
      int dens;
      if (t == 300) hold_en = 1'b1;
      dens = $urandom_range(5, 30);
      for (int i = 0; i < MAT_PIX; i++) m[i] = ($urandom_range(99) < dens);
      alloc = ($urandom_range(9) != 0);
      while (busy != 2'b00) @(negedge clk);
      copy = 1'b1; copy_alloc = alloc; copy_pix = m;
      copy_crow = 6'($urandom); copy_ccol = 9'($urandom); copy_sensor = 1'($urandom);
      copy_id = EVID_W'(t);
      for (int g = 0; g < 2; g++) expect_map(m, alloc, g);
      @(negedge clk);
      copy = 1'b0;
      // rate: with free output, each candidate takes one cycle
      if (t < 300 && alloc) begin
        int n0, cyc;
        n0 = nout[0]; cyc = 0;
        while (busy[0]) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc > (nout[0] - n0) + 3) begin
          failures++; $display("FAIL: %0d cycles for %0d words", cyc, nout[0] - n0);
        end
      end
    end
    hold_en = 1'b0;
    repeat (50) @(negedge clk);
    checks++;
    if (exp_q[0].size() + exp_q[1].size() != 0) begin failures++; $display("FAIL: candidates missing"); end
    $display("%0d candidates", ncand);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
