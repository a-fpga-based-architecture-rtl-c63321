// Testbench of clustering_matrices with 4 matrices (so that the chain overflows often),
// both orientations. Each event holds items on sites four SPs apart: a single SP with
// one pixel, or a 2-pixel cluster across two side-by-side SPs sent on the same line.
// Expected clusters come from pixel centroids floor(4*sum/npix). A one-pixel item may
// leave as a matrix cluster or, after overflow, as an overflow cluster; a 2-SP item
// leaves either as one matrix cluster or as two overflow clusters. Checks each event's
// clusters on both outputs (matrix and overflow streams) against these alternatives,
// the EE words on both outputs, the overflow pulses, and that no error is flagged.
module tb_clustering_matrices;
  import velo_pkg::*;
  localparam int NEV = 150;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic [1:0] in_valid [2], in_hold [2], ovf_pulse [2];
  logic [SP_W-1:0] in_data [2][2];
  logic [1:0] out_valid, ovf_valid, sync_err, err_loss;
  logic [SP_W-1:0] out_data [2], ovf_data [2];
  logic out_hold = 1'b0, ovf_hold = 1'b0;
  for (genvar g = 0; g < 2; g++) begin : g_dut
    clustering_matrices #(.NMAT(4), .ORIENT(g[0])) dut (.clk, .rst, .in_valid(in_valid[g]),
      .in_data(in_data[g]), .in_hold(in_hold[g]), .out_valid(out_valid[g]),
      .out_data(out_data[g]), .out_hold, .ovf_valid(ovf_valid[g]), .ovf_data(ovf_data[g]),
      .ovf_hold, .ovf_pulse(ovf_pulse[g]), .sync_err(sync_err[g]), .err_loss(err_loss[g]));
  end

  int checks = 0, failures = 0, n_ovf_pulse = 0, n_mat = 0, n_ovf = 0, n_alt = 0;
  typedef struct { int ev; int item; int grp; int rowq; int colq; int kind; } exp_t;
  exp_t exp_q [2][$];
  int   ev_items [2][$];
  logic [SP_W-1:0] line_q [2][2][$];
  bit hold_en = 1'b0;

  function automatic exp_t mk(input int ev, input int item, input int grp, input int r,
                              input int c, input int n, input int kind);
    exp_t e;
    e.ev = ev; e.item = item; e.grp = grp; e.rowq = 4*r/n; e.colq = 4*c/n; e.kind = kind;
    return e;
  endfunction

  task automatic build(input int g, input int ev);
    int nitems, item;
    bit used [16][96];
    used = '{default: 1'b0};
    nitems = $urandom_range(1, 9);
    item = 0;
    for (int i = 0; i < nitems; i++) begin
      int a, b, r0, c0, l;
      a = $urandom_range(1, 14); b = $urandom_range(1, 94);
      if (used[a][b]) continue;
      used[a][b] = 1'b1;
      r0 = 4*a + 1; c0 = 4*b + 1; l = $urandom_range(1);
      if ($urandom_range(1)) begin
        sp_t s;
        int bit_i;
        bit_i = $urandom_range(7);
        s = '0; s.sensor = g[0]; s.row = 6'(r0); s.col = 9'(c0); s.hitmap = 8'(1 << bit_i);
        line_q[g][l].push_back(SP_W'(s));
        exp_q[g].push_back(mk(ev, item, 0, 4*r0 + bit_i % 4, 2*c0 + bit_i / 4, 1, 2));
      end else begin
        sp_t s1, s2;
        int pr;
        pr = $urandom_range(3);
        s1 = '0; s1.sensor = g[0]; s1.row = 6'(r0); s1.col = 9'(c0);     s1.hitmap = 8'(1 << (4 + pr));
        s2 = '0; s2.sensor = g[0]; s2.row = 6'(r0); s2.col = 9'(c0 + 1); s2.hitmap = 8'(1 << pr);
        line_q[g][l].push_back(SP_W'(s1));
        line_q[g][l].push_back(SP_W'(s2));
        exp_q[g].push_back(mk(ev, item, 0, 2*(4*r0 + pr), (2*c0 + 1) + (2*c0 + 2), 2, 1));
        exp_q[g].push_back(mk(ev, item, 1, 4*r0 + pr, 2*c0 + 1, 1, 4));
        exp_q[g].push_back(mk(ev, item, 1, 4*r0 + pr, 2*c0 + 2, 1, 4));
      end
      item++;
    end
    ev_items[g].push_back(item);
    for (int l = 0; l < 2; l++) line_q[g][l].push_back(make_ee(EVID_W'(ev)));
  endtask

  // drivers: one per line and instance
  for (genvar g = 0; g < 2; g++) begin : g_drv
    for (genvar l = 0; l < 2; l++) begin : g_line
      initial begin
        in_valid[g][l] = 1'b0; in_data[g][l] = '0;
        @(negedge clk iff !rst);
        forever begin
          while (line_q[g][l].size() == 0) @(negedge clk);
          in_data[g][l] = line_q[g][l][0]; in_valid[g][l] = 1'b1;
          forever begin
            @(posedge clk);
            if (!in_hold[g][l]) break;
          end
          void'(line_q[g][l].pop_front());
          @(negedge clk);
          in_valid[g][l] = 1'b0;
          if ($urandom_range(3) == 0) @(negedge clk);
        end
      end
    end
  end

  always @(negedge clk) begin
    out_hold = hold_en && ($urandom_range(2) == 0);
    ovf_hold = hold_en && ($urandom_range(2) == 0);
  end

  // checker: words are tagged with their stream's event count, since one stream may run
  // ahead of the other by an event
  typedef struct { logic [SP_W-1:0] w; int ev; } tagged_t;
  tagged_t rx_q [2][$];
  logic [SP_W-1:0] pool [2][$];
  int ev_cnt [2][2];
  int rx_ev [2];

  function automatic bit kind_ok(input logic [SP_W-1:0] w, input int kind);
    case (kind)
      1: return !w[30];
      2: return !w[30] || w[29];
      4: return w[30] && w[29];
      default: return 1'b0;
    endcase
  endfunction

  task automatic check_event(input int g);
    exp_t mine [$];
    tagged_t rest [$];
    int nitems;
    nitems = ev_items[g].pop_front();
    foreach (rx_q[g][i]) if (rx_q[g][i].ev == rx_ev[g]) pool[g].push_back(rx_q[g][i].w);
                         else rest.push_back(rx_q[g][i]);
    rx_q[g] = rest;
    while (exp_q[g].size() > 0 && exp_q[g][0].ev == rx_ev[g]) mine.push_back(exp_q[g].pop_front());
    for (int it = 0; it < nitems; it++) begin
      bit ok;
      ok = 1'b0;
      for (int grp = 0; grp < 2 && !ok; grp++) begin
        logic [SP_W-1:0] removed [$];
        bit all, any;
        all = 1'b1; any = 1'b0;
        foreach (mine[i]) if (mine[i].item == it && mine[i].grp == grp) begin
          int idx;
          idx = -1;
          any = 1'b1;
          foreach (pool[g][k]) if (idx < 0 && int'({pool[g][k][9:2], pool[g][k][1:0]}) == mine[i].rowq &&
                                   int'({pool[g][k][21:12], pool[g][k][11:10]}) == mine[i].colq &&
                                   pool[g][k][22] == g[0] && kind_ok(pool[g][k], mine[i].kind)) idx = k;
          if (idx < 0) all = 1'b0;
          else begin removed.push_back(pool[g][idx]); pool[g].delete(idx); end
        end
        if (any && all) begin ok = 1'b1; if (grp == 1) n_alt++; end
        else foreach (removed[i]) pool[g].push_back(removed[i]);
      end
      checks++;
      if (!ok) begin failures++; $display("FAIL orient %0d event %0d item %0d missing", g, rx_ev[g], it); end
    end
    checks++;
    if (pool[g].size() != 0) begin
      failures++; $display("FAIL orient %0d event %0d: %0d extra clusters", g, rx_ev[g], pool[g].size());
    end
    pool[g].delete();
    rx_ev[g]++;
  endtask

  always @(posedge clk) if (!rst) begin
    for (int g = 0; g < 2; g++) begin
      for (int s = 0; s < 2; s++) begin
        logic v, h;
        logic [SP_W-1:0] w;
        tagged_t t;
        v = s ? ovf_valid[g] : out_valid[g];
        h = s ? ovf_hold : out_hold;
        w = s ? ovf_data[g] : out_data[g];
        if (v && !h) begin
          if (is_ee(w)) begin
            checks++;
            if (int'(ee_id(w)) != ev_cnt[g][s] % 32) begin
              failures++; $display("FAIL orient %0d stream %0d: EE %0d out of order", g, s, ee_id(w));
            end
            ev_cnt[g][s]++;
          end else begin
            t.w = w; t.ev = ev_cnt[g][s];
            rx_q[g].push_back(t);
            if (w[30]) n_ovf++; else n_mat++;
          end
        end
      end
      if (ev_cnt[g][0] > rx_ev[g] && ev_cnt[g][1] > rx_ev[g]) check_event(g);
      n_ovf_pulse += int'(ovf_pulse[g][0]) + int'(ovf_pulse[g][1]);
      if (sync_err[g] || err_loss[g]) begin failures++; $display("FAIL: error flag"); end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ev_cnt[g, s]) ev_cnt[g][s] = 0;
    rx_ev[0] = 0; rx_ev[1] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int ev = 0; ev < NEV; ev++) begin
      if (ev == NEV / 2) hold_en = 1'b1;
      build(0, ev);
      build(1, ev);
      while (line_q[0][0].size() + line_q[0][1].size() + line_q[1][0].size() + line_q[1][1].size() > 12)
        @(negedge clk);
    end
    wait (rx_ev[0] == NEV && rx_ev[1] == NEV);
    repeat (10) @(posedge clk);
    $display("matrix clusters %0d overflow clusters %0d split by overflow %0d overflow pulses %0d",
             n_mat, n_ovf, n_alt, n_ovf_pulse);
    checks++;
    if (n_mat == 0 || n_ovf == 0 || n_alt == 0 || n_ovf_pulse == 0) begin
      failures++; $display("FAIL: a path was never used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
