// Testbench of encoder_8to1. Eight drivers send random cluster words (bit 31 clear,
// non-zero) and one EE word per event, with random gaps; some events are empty. The
// receiver applies random back-pressure on out_ready and checks: SOP on the first word
// of each event and EOP on its last; the non-zero 32-bit slots of the event's 256-bit
// words equal the multiset of words sent for that event; an empty event is one all-zero
// word with SOP and EOP; no sync error. Also checks that an event of 8 words per lane
// (64 words, 8 output words) leaves within 12 cycles of streaming.
module tb_encoder_8to1;
  import velo_pkg::*;
  localparam int NEV = 200;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic [LANES-1:0] in_valid, in_hold;
  logic [SP_W-1:0]  in_data [LANES];
  logic [BUS_W-1:0] out_data;
  logic out_valid, out_sop, out_eop, out_ready, sync_err;

  encoder_8to1 dut (.*);

  int checks = 0, failures = 0, n_words = 0, n_empty = 0;
  logic [SP_W-1:0] lane_q [LANES][$];
  logic [SP_W-1:0] exp_ev [$][$];
  bit bp_en = 1'b0;

  for (genvar l = 0; l < LANES; l++) begin : g_drv
    initial begin
      in_valid[l] = 1'b0; in_data[l] = '0;
      @(negedge clk iff !rst);
      forever begin
        while (lane_q[l].size() == 0) @(negedge clk);
        in_data[l] = lane_q[l][0]; in_valid[l] = 1'b1;
        forever begin
          @(posedge clk);
          if (!in_hold[l]) break;
        end
        void'(lane_q[l].pop_front());
        @(negedge clk);
        in_valid[l] = 1'b0;
        if (bp_en && $urandom_range(3) == 0) @(negedge clk);
      end
    end
  end

  always @(negedge clk) out_ready = !(bp_en && $urandom_range(3) == 0);

  // receiver
  logic [SP_W-1:0] got [$];
  bit in_ev = 1'b0;
  int rx_ev = 0, ev_words = 0;
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (out_sop == in_ev) begin failures++; $display("FAIL event %0d: SOP %0b unexpected", rx_ev, out_sop); end
    in_ev = 1'b1;
    ev_words++;
    for (int k = 0; k < 8; k++) if (out_data[32*k +: 32] != '0) got.push_back(out_data[32*k +: 32]);
    if (out_eop) begin
      logic [SP_W-1:0] e [$];
      e = exp_ev.pop_front();
      checks++;
      if (e.size() == 0 && (ev_words != 1 || got.size() != 0)) begin
        failures++; $display("FAIL event %0d: empty event not one zero word", rx_ev);
      end
      checks++;
      if (got.size() != e.size()) begin
        failures++; $display("FAIL event %0d: %0d words, expected %0d", rx_ev, got.size(), e.size());
      end else begin
        got.sort(); e.sort();
        foreach (e[i]) if (got[i] != e[i]) begin
          failures++; $display("FAIL event %0d: word %h expected %h", rx_ev, got[i], e[i]); break;
        end
      end
      if (e.size() == 0) n_empty++;
      n_words += ev_words;
      got.delete();
      in_ev = 1'b0; ev_words = 0; rx_ev++;
    end
  end
  always @(posedge clk) if (!rst && sync_err) begin failures++; $display("FAIL: sync error"); end

  task automatic send_event(input int ev, input int maxn);
    logic [SP_W-1:0] e [$];
    for (int l = 0; l < LANES; l++) begin
      int n;
      n = (maxn < 0) ? 8 : $urandom_range(maxn);
      for (int i = 0; i < n; i++) begin
        logic [SP_W-1:0] w;
        w = {1'b0, 31'($urandom_range(1, 32'h7fff_ffff))};
        lane_q[l].push_back(w);
        e.push_back(w);
      end
      lane_q[l].push_back(make_ee(EVID_W'(ev)));
    end
    exp_ev.push_back(e);
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, ev;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    ev = 0;
    // rate: ten full events (8 words per lane) back to back, no back-pressure
    for (int i = 0; i < 10; i++) begin send_event(ev, -1); ev++; end
    wait (rx_ev == 1);
    t0 = $time;
    wait (rx_ev == 10);
    t1 = $time;
    checks++;
    $display("full events: %0d cycles per event", (t1 - t0) / 2 / 9);
    if ((t1 - t0) / 2 > 9 * 12) begin failures++; $display("FAIL: full events too slow"); end
    // random events with back-pressure
    bp_en = 1'b1;
    for (int i = 10; i < NEV; i++) begin
      send_event(ev, (i % 7 == 0) ? 0 : $urandom_range(1, 4));
      ev++;
      while (lane_q[0].size() > 20) @(negedge clk);
    end
    wait (rx_ev == NEV);
    checks++;
    if (n_empty == 0) begin failures++; $display("FAIL: no empty event"); end
    $display("events %0d output words %0d empty events %0d", rx_ev, n_words, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
