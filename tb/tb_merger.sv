// Testbench of merger: two streams of events (random words, then an EE word carrying
// the event identifier) are merged under random holds and random input gaps. Checks
// that each output event holds exactly the words of that event from both inputs, in
// input order per stream, followed by one EE word with the identifier, and that a sync
// error is raised, and only then, when the two EE identifiers differ (last event).
// Without holds and with both inputs busy, one word leaves per cycle.
module tb_merger;
  import velo_pkg::*;
  localparam int W = 32, NEV = 300;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic [1:0] valid_in = 2'b00, hold_out;
  logic [W-1:0] data_in [2];
  logic valid_out, hold_in = 1'b0, sync_err;
  logic [W-1:0] data_out;
  merger #(.W(W)) dut (.clk, .rst, .valid_in, .data_in, .hold_out, .valid_out, .data_out,
                       .hold_in, .sync_err);
  int checks = 0, failures = 0;
  logic [W-1:0] exp_q [2][NEV+1][$];
  int ev_out = 0, nerr = 0, nout = 0, cyc = 0;
  bit hold_en = 1'b0, gaps = 1'b0;
  int done_in = 0;

  always @(posedge clk) if (!rst) begin
    cyc++;
    if (sync_err && !hold_in) nerr++;
    if (valid_out) begin
      checks++;
      nout++;
      if (hold_in) begin failures++; $display("FAIL: valid while held"); end
      if (data_out[W-1]) begin
        if (exp_q[0][ev_out].size() + exp_q[1][ev_out].size() != 0 ||
            data_out[EVID_W-1:0] != EVID_W'(ev_out)) begin
          failures++; $display("FAIL: EE of event %0d early or with wrong id", ev_out);
        end
        ev_out++;
      end else begin
        int s;
        s = data_out[30];
        if (exp_q[s][ev_out].size() == 0 || exp_q[s][ev_out][0] != data_out) begin
          failures++; $display("FAIL: word %08h in event %0d out of order", data_out, ev_out);
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
        n = $urandom_range(5);
        for (int i = 0; i <= n; i++) begin
          logic [W-1:0] w;
          if (i < n) begin
            w = W'($urandom); w[W-1] = 1'b0; w[30] = l[0];
            exp_q[l][e].push_back(w);
          end else begin
            w = make_ee(EVID_W'(e));
            if (e == NEV && l == 1) w = make_ee(EVID_W'(e + 1));   // mismatch at the end
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
    int c0, n0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (20) @(posedge clk);
    c0 = cyc; n0 = nout;
    repeat (100) @(posedge clk);
    checks++;
    if (nout - n0 < 95) begin failures++; $display("FAIL: only %0d words in 100 cycles", nout - n0); end
    hold_en = 1'b1; gaps = 1'b1;
    wait (done_in == 2);
    repeat (20) @(posedge clk);
    checks++;
    if (ev_out != NEV + 1) begin failures++; $display("FAIL: %0d events out", ev_out); end
    checks++;
    if (nerr != 1) begin failures++; $display("FAIL: %0d sync errors, expected 1", nerr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
