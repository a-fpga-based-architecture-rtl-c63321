// Testbench of dispatcher: two SP streams are routed by the isolation bit to two
// outputs (0: not isolated, 1: isolated). Each input SP carries its lane and sequence number in the
// hitmap and column fields. Checks: every SP reaches exactly the right output within its
// own event, order per input lane is kept, one EE per event per output with the event
// identifier, no sync error. Output holds are random in the second half. The rate with
// free outputs is measured: the inputs deliver 4 SPs + 1 EE per event and lane; the
// dispatcher must keep up with 7 cycles per event.
module tb_dispatcher;
  import velo_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic [1:0]      valid_in, hold_out, valid_out, hold_in;
  logic [SP_W-1:0] data_in [2];
  logic [SP_W-1:0] data_out [2];
  logic [1:0]      se;
  logic            sync_err;

  dispatcher #(.W(SP_W), .SEL_BIT(ISO_BIT)) dut (.clk, .rst, .valid_in, .data_in,
    .hold_out, .valid_out, .data_out, .hold_in, .sync_err(se));
  assign sync_err = |se;

  int checks = 0, failures = 0;
  localparam int NEV = 200;
  localparam int PER = 4;
  bit hold_en = 1'b0;

  // expected per output: queue of SP words per event (SPs keep lane order)
  logic [SP_W-1:0] exp_q [2][$];

  function automatic int route(input logic [SP_W-1:0] w);
    return int'(w[ISO_BIT]);
  endfunction

  // drivers: one process per lane, inputs change on the falling edge
  for (genvar l = 0; l < 2; l++) begin : g_drv
    initial begin
      valid_in[l] = 1'b0; data_in[l] = '0;
      @(negedge clk iff !rst);
      for (int e = 0; e < NEV; e++) begin
        for (int i = 0; i <= PER; i++) begin
          logic [SP_W-1:0] w;
          if (i < PER) begin
            sp_t s;
            s = '0;
            s.hitmap = 8'(l * 64 + i);
            s.col    = 9'(e);
            s.row    = 6'($urandom_range(63));
            s.sensor = 1'($urandom_range(1));
            s.iso    = 1'($urandom_range(1));
            w = SP_W'(s);
            exp_q[route(w)].push_back(w);
          end else w = make_ee(EVID_W'(e));
          data_in[l] = w; valid_in[l] = 1'b1;
          #0;
          while (hold_out[l]) @(negedge clk);
          @(negedge clk);
        end
      end
      valid_in[l] = 1'b0;
    end
  end

  always @(negedge clk) hold_in = hold_en ? 2'($urandom_range(3)) : 2'b00;

  int ev_out [2];
  int last_seq [2][2];
  int ee_time [2][$];
  always @(posedge clk) if (!rst) begin
    for (int o = 0; o < 2; o++) if (valid_out[o] && !hold_in[o]) begin
      logic [SP_W-1:0] w;
      w = data_out[o];
      checks++;
      if (is_ee(w)) begin
        if (ee_id(w) != EVID_W'(ev_out[o])) begin
          failures++; $display("FAIL out %0d: EE id %0d, expected %0d", o, ee_id(w), ev_out[o]);
        end
        ee_time[o].push_back($time);
        ev_out[o]++;
        for (int l = 0; l < 2; l++) last_seq[o][l] = -1;
      end else begin
        sp_t s;
        int l, sq, idx;
        s = sp_t'(w);
        l = int'(s.hitmap) / 64; sq = int'(s.hitmap) % 64;
        idx = -1;
        foreach (exp_q[o][i]) if (exp_q[o][i] == w) begin idx = i; break; end
        if (route(w) != o || int'(s.col) != ev_out[o] || idx < 0 || sq <= last_seq[o][l]) begin
          failures++;
          $display("FAIL out %0d: SP %08h (event %0d, lane %0d seq %0d) misplaced", o, w,
                   s.col, l, sq);
        end else exp_q[o].delete(idx);
        last_seq[o][l] = sq;
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real cpe;
    foreach (last_seq[o, l]) last_seq[o][l] = -1;
    foreach (ev_out[o]) ev_out[o] = 0;
    hold_in = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    wait (ev_out[0] >= NEV / 2 && ev_out[1] >= NEV / 2);
    cpe = real'(ee_time[0][NEV/2 - 1] - ee_time[0][9]) / 2.0 / real'(NEV/2 - 10);
    $display("free-running rate: %0.2f cycles/event (%0d words per lane and event)", cpe, PER + 1);
    checks++;
    if (cpe > 7.0) begin failures++; $display("FAIL: dispatcher slower than 7 cycles/event"); end
    hold_en = 1'b1;
    wait (ev_out[0] == NEV && ev_out[1] == NEV);
    repeat (5) @(posedge clk);
    for (int o = 0; o < 2; o++) begin
      checks++;
      if (exp_q[o].size() != 0) begin failures++; $display("FAIL out %0d: %0d SPs missing", o, exp_q[o].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && sync_err) begin
    failures++; $display("FAIL: sync error");
  end
endmodule
