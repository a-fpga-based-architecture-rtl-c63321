// Testbench of isolation_flagger at its default size (MAX_SP 144, blocks of 16).
// Random events of unique SPs in a small area (so that neighbours are frequent) are fed
// LANES per cycle; the reference flags an SP as isolated when no other SP of the event on
// the same sensor lies within one SP row and column. Checks, per event, the multiset of
// SP words leaving on all streams (with the expected isolation bit), one EE word per
// stream with the right identifier, the bypass of events above MAX_SP (all bits 0, bypass
// pulse), and the throughput of 32-SP events (four input words each, two blocks, three
// comparison cycles): at most 6 cycles per event in steady state.
module tb_isolation_flagger;
  import velo_pkg::*;
  localparam int NEV = 300;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic                       in_valid, in_eop, in_hold, bypass_pulse;
  logic [SP_W-1:0]            in_sp [LANES];
  logic [$clog2(LANES+1)-1:0] in_nsp;
  logic [LANES-1:0]           out_valid, out_hold;
  logic [SP_W-1:0]            out_data [LANES];

  isolation_flagger dut (.*);

  int checks = 0, failures = 0, n_bypass = 0, n_iso = 0, n_non = 0;
  logic [SP_W-1:0] exp_ev [$][$];
  bit bp_en = 1'b0;

  task automatic send_event(input int nsp, input bit gaps);
    sp_t sps [$];
    logic [SP_W-1:0] e [$];
    bit used [2][16][32];
    used = '{default: 1'b0};
    while (sps.size() < nsp) begin
      sp_t s;
      s = '0;
      s.sensor = 1'($urandom_range(1));
      s.row = 6'($urandom_range(15));
      s.col = 9'($urandom_range(31));
      s.hitmap = 8'($urandom_range(1, 255));
      if (!used[s.sensor][s.row][s.col]) begin used[s.sensor][s.row][s.col] = 1'b1; sps.push_back(s); end
    end
    foreach (sps[i]) begin
      sp_t s;
      bit nb;
      nb = 1'b0;
      foreach (sps[j]) if (j != i && sps[j].sensor == sps[i].sensor &&
                           int'(sps[j].row) - int'(sps[i].row) inside {[-1:1]} &&
                           int'(sps[j].col) - int'(sps[i].col) inside {[-1:1]}) nb = 1'b1;
      s = sps[i];
      s.iso = (nsp <= 144) && !nb;
      e.push_back(SP_W'(s));
    end
    exp_ev.push_back(e);
    for (int base = 0; base < nsp || base == 0; base += LANES) begin
      int n;
      n = (nsp - base < int'(LANES)) ? nsp - base : int'(LANES);
      for (int k = 0; k < int'(LANES); k++) in_sp[k] = (k < n) ? SP_W'(sps[base + k]) : '0;
      in_nsp = n[$bits(in_nsp)-1:0];
      in_eop = (base + int'(LANES) >= nsp);
      in_valid = 1'b1;
      forever begin
        @(posedge clk);
        if (!in_hold) break;
      end
      @(negedge clk);
      in_valid = 1'b0;
      if (gaps && $urandom_range(3) == 0) @(negedge clk);
    end
  endtask
  // send_event is entered and left at a falling edge

  always @(negedge clk) out_hold = (bp_en && $urandom_range(4) == 0) ? LANES'($urandom) : '0;

  // receiver
  logic [SP_W-1:0] got [$];
  int ee_cnt [LANES];
  int rx_ev = 0, tlast = 0;
  always @(posedge clk) if (!rst) begin
    for (int l = 0; l < int'(LANES); l++) if (out_valid[l] && !out_hold[l]) begin
      if (is_ee(out_data[l])) begin
        checks++;
        if (int'(ee_id(out_data[l])) != ee_cnt[l] % 32) begin
          failures++; $display("FAIL lane %0d: EE %0d, expected %0d", l, ee_id(out_data[l]), ee_cnt[l] % 32);
        end
        ee_cnt[l]++;
      end else begin
        got.push_back(out_data[l]);
        if (ee_cnt[l] != rx_ev) begin failures++; $display("FAIL lane %0d: SP ahead of other lanes", l); end
      end
    end
    if (bypass_pulse) n_bypass++;
    begin
      bit all;
      all = 1'b1;
      foreach (ee_cnt[l]) if (ee_cnt[l] <= rx_ev) all = 1'b0;
      if (all) begin
        logic [SP_W-1:0] e [$];
        e = exp_ev.pop_front();
        checks++;
        got.sort(); e.sort();
        if (got != e) begin
          failures++; $display("FAIL event %0d: %0d SPs out, %0d expected or contents differ", rx_ev, got.size(), e.size());
        end
        foreach (e[i]) if (e[i][24]) n_iso++; else n_non++;
        got.delete();
        rx_ev++;
        tlast = $time;
      end
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, ev;
    foreach (ee_cnt[l]) ee_cnt[l] = 0;
    in_valid = 1'b0; in_eop = 1'b0; in_nsp = '0;
    foreach (in_sp[k]) in_sp[k] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    @(negedge clk);
    // throughput: 32-SP events back to back
    for (ev = 0; ev < 40; ev++) begin
      send_event(32, 1'b0);
      if (ev == 10) t0 = $time;
    end
    wait (rx_ev == 40);
    checks++;
    $display("32-SP events: %0.2f cycles per event", real'(tlast - t0) / 2.0 / 29.0);
    if (tlast - t0 > 2 * 29 * 6) begin failures++; $display("FAIL: flagging too slow"); end
    // random sizes, bypass, back-pressure
    bp_en = 1'b1;
    for (; ev < NEV; ev++) begin
      int n;
      n = (ev % 50 == 7) ? $urandom_range(145, 200) : $urandom_range(0, 48);
      send_event(n, 1'b1);
    end
    wait (rx_ev == NEV);
    checks++;
    if (n_bypass < 5 || n_iso == 0 || n_non == 0) begin
      failures++; $display("FAIL: bypass %0d iso %0d non-iso %0d", n_bypass, n_iso, n_non);
    end
    $display("events %0d bypass pulses %0d isolated %0d not isolated %0d", rx_ev, n_bypass, n_iso, n_non);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
