// Testbench of encoder_2to1 (W = 32): two event streams (non-zero words, then an EE
// word) are packed into 64-bit words under random output holds and input gaps.
// Checks that each event's words from both inputs come out packed two per word, in
// input order per stream, with at most one zero half per event, followed by one 64-bit
// EE word with the event identifier; a sync error is raised only for the last event,
// whose EE identifiers differ. With both inputs busy and no hold, one packed word leaves
// per cycle.
module tb_encoder_2to1;
  import velo_pkg::*;
  localparam int W = 32, NEV = 300;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic [1:0] valid_in = 2'b00, hold_out;
  logic [W-1:0] data_in [2];
  logic valid_out, hold_in = 1'b0, sync_err;
  logic [2*W-1:0] data_out;
  encoder_2to1 #(.W(W)) dut (.clk, .rst, .valid_in, .data_in, .hold_out, .valid_out,
                             .data_out, .hold_in, .sync_err);
  int checks = 0, failures = 0;
  logic [W-1:0] exp_q [2][NEV+1][$];
  int ev_out = 0, nerr = 0, npad = 0, nout = 0, done_in = 0;
  bit hold_en = 1'b0, gaps = 1'b0;

  always @(posedge clk) if (!rst) begin
    if (sync_err) nerr++;
    if (valid_out && !hold_in) begin
      nout++;
      checks++;
      if (data_out[2*W-1]) begin
        if (exp_q[0][ev_out].size() + exp_q[1][ev_out].size() != 0 ||
            data_out[EVID_W-1:0] != EVID_W'(ev_out) || npad > 1) begin
          failures++; $display("FAIL: EE of event %0d early, wrong id or %0d pads", ev_out, npad);
        end
        ev_out++; npad = 0;
      end else
        for (int h = 0; h < 2; h++) begin
          logic [W-1:0] w;
          int s;
          w = data_out[W*h +: W];
          s = w[30];
          if (w == '0) npad++;
          else if (exp_q[s][ev_out].size() == 0 || exp_q[s][ev_out][0] != w) begin
            failures++; $display("FAIL: word %08h in event %0d out of order", w, ev_out);
          end else void'(exp_q[s][ev_out].pop_front());
        end
    end
  end

  always @(negedge clk) hold_in = hold_en ? ($urandom_range(2) == 0) : 1'b0;

  for (genvar l = 0; l < 2; l++) begin : g_drv
    initial begin
      data_in[l] = '0;
      @(negedge clk iff !rst);
      for (int e = 0; e <= NEV; e++) begin
        int n;
        n = (e < 20) ? 8 : $urandom_range(5);
        for (int i = 0; i <= n; i++) begin
          logic [W-1:0] w;
          if (i < n) begin
            w = W'($urandom) | 32'h1; w[W-1] = 1'b0; w[30] = l[0];
            exp_q[l][e].push_back(w);
          end else begin
            w = make_ee(EVID_W'(e));
            if (e == NEV && l == 1) w = make_ee(EVID_W'(e + 1));
          end
          while (gaps && $urandom_range(3) == 0) begin valid_in[l] = 1'b0; @(negedge clk); end
          data_in[l] = w; valid_in[l] = 1'b1;
          #0;
          while (hold_out[l]) @(negedge clk);
          @(negedge clk);
        end
      end
      valid_in[l] = 1'b0;
      done_in++;
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // events 0..19: 8 words per input, i.e. 8 packed words + 1 EE word per event
    wait (ev_out == 2);
    n0 = nout;
    repeat (90) @(posedge clk);
    checks++;
    if (nout - n0 < 80) begin failures++; $display("FAIL: %0d words in 90 cycles", nout - n0); end
    hold_en = 1'b1; gaps = 1'b1;
    wait (done_in == 2);
    repeat (30) @(posedge clk);
    checks++;
    if (ev_out != NEV + 1) begin failures++; $display("FAIL: %0d events out", ev_out); end
    checks++;
    if (nerr != 1) begin failures++; $display("FAIL: %0d sync errors", nerr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
