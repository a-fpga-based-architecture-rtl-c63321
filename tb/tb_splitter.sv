// Testbench of splitter: a random stream of words (select bit random, some EE words) is
// split into two outputs under random holds. Checks that every non-EE word leaves on
// the output chosen by its select bit, that EE words leave on both outputs at once,
// that order is kept per output, that no word is lost or duplicated, and that without
// holds the splitter passes one word per cycle.
module tb_splitter;
  localparam int W = 32, SEL = 24;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic valid_in = 1'b0, hold_out;
  logic [W-1:0] data_in = '0, data_out;
  logic [1:0] valid_out, hold_in = 2'b00;
  splitter #(.W(W), .SEL_BIT(SEL)) dut (.clk, .rst, .valid_in, .data_in, .hold_out,
                                        .valid_out, .data_out, .hold_in);
  int checks = 0, failures = 0;
  logic [W-1:0] exp_q [2][$];
  int sent = 0, got = 0, cyc = 0;
  bit hold_en = 1'b0;

  always @(posedge clk) if (!rst) begin
    cyc++;
    for (int o = 0; o < 2; o++) if (valid_out[o]) begin
      checks++;
      if (hold_in[o]) begin failures++; $display("FAIL: valid while held on %0d", o); end
      if (exp_q[o].size() == 0 || exp_q[o][0] != data_out) begin
        failures++; $display("FAIL: output %0d got %08h", o, data_out);
      end else void'(exp_q[o].pop_front());
      got++;
    end
    if (data_out[W-1] && valid_out != 2'b00) begin
      checks++;
      if (valid_out != 2'b11) begin failures++; $display("FAIL: EE not on both outputs"); end
    end
  end

  always @(negedge clk) hold_in = hold_en ? 2'($urandom_range(3)) : 2'b00;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input int n);
    for (int i = 0; i < n; i++) begin
      logic [W-1:0] w;
      w = W'($urandom);
      w[W-1] = ($urandom_range(7) == 0);
      if (w[W-1]) begin exp_q[0].push_back(w); exp_q[1].push_back(w); end
      else exp_q[w[SEL]].push_back(w);
      @(negedge clk);
      data_in = w; valid_in = 1'b1;
      #0;
      while (hold_out) @(negedge clk);
      sent++;
    end
    @(negedge clk); valid_in = 1'b0;
  endtask

  initial begin
    int c0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    c0 = cyc;
    send(200);
    checks++;
    if (cyc - c0 > 202) begin failures++; $display("FAIL: %0d cycles for 200 words", cyc - c0); end
    hold_en = 1'b1;
    send(2000);
    hold_en = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q[0].size() + exp_q[1].size() != 0) begin failures++; $display("FAIL: words missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
