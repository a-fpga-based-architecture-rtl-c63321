// Testbench of decoder. Random events are sent as 256-bit words with SOP on the first and
// EOP on the last word, SPs in the lowest 32-bit slots and zeros in the free ones; an
// empty event is one all-zero word with SOP and EOP. Checks, per event, the multiset of
// SP words on the eight output streams with the isolation bit of the neighbour reference,
// one EE word per stream and event with the right identifier, that in_ready drops only as
// back-pressure (every word is eventually taken), that err_frame stays low for correct
// framing and pulses once for a word without SOP at the start of an event and once for each
// word repeating SOP inside an event. Checks the rate of 32-SP events: at most 6 cycles each.
module tb_decoder;
  import velo_pkg::*;
  localparam int NEV = 300;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic [BUS_W-1:0]  in_data;
  logic              in_valid, in_sop, in_eop, in_ready, bypass_pulse, err_frame;
  logic [LANES-1:0]  out_valid, out_hold;
  logic [SP_W-1:0]   out_data [LANES];
  int n_err = 0;
  bit bad_sop = 1'b0, extra_sop = 1'b0;

  decoder dut (.*);
  always @(posedge clk) if (!rst && err_frame) n_err++;

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
      for (int k = 0; k < int'(LANES); k++) in_data[k*SP_W +: SP_W] = (k < n) ? SP_W'(sps[base + k]) : '0;
      in_sop = (base == 0) ? !bad_sop : extra_sop;
      in_eop = (base + int'(LANES) >= nsp);
      in_valid = 1'b1;
      forever begin
        @(posedge clk);
        if (in_ready) break;
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
    in_valid = 1'b0; in_eop = 1'b0; in_sop = 1'b0; in_data = '0;
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
    $display("decoder, 32-SP events: %0.2f cycles per event", real'(tlast - t0) / 2.0 / 29.0);
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
    if (n_err != 0) begin failures++; $display("FAIL: %0d framing errors on correct input", n_err); end
    // framing errors: a first word without SOP (one error), then an event of three words
    // whose second and third words repeat SOP (two errors)
    bad_sop = 1'b1;
    send_event(5, 1'b0);
    bad_sop = 1'b0;
    extra_sop = 1'b1;
    send_event(20, 1'b0);
    extra_sop = 1'b0;
    wait (rx_ev == NEV + 2);
    repeat (2) @(posedge clk);
    checks++;
    if (n_err != 3) begin failures++; $display("FAIL: %0d framing errors, expected 3", n_err); end
    checks++;
    if (n_bypass < 5 || n_iso == 0 || n_non == 0) begin
      failures++; $display("FAIL: bypass %0d iso %0d non-iso %0d", n_bypass, n_iso, n_non);
    end
    $display("events %0d bypass pulses %0d isolated %0d not isolated %0d", rx_ev, n_bypass, n_iso, n_non);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
