// Testbench of error_monitor: error pulses from random sources. Checks that the first
// error (lowest source number when several arrive together) sets the code and the
// sticky flag, that the error word is valid for exactly one cycle after the first error,
// that the counter counts every cycle with an error, and that reset clears everything.
module tb_error_monitor;
  localparam int N = 8;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic [N-1:0] err_in = '0;
  logic err_flag, err_word_valid;
  logic [2:0] err_code;
  logic [15:0] err_count;
  error_monitor #(.NSRC(N)) dut (.clk, .rst, .err_in, .err_flag, .err_code, .err_count,
                                 .err_word_valid);
  int checks = 0, failures = 0;

  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int run = 0; run < 20; run++) begin
      int first, cnt, wv;
      logic [N-1:0] e;
      rst = 1'b1; err_in = '0;
      repeat (2) @(negedge clk);
      rst = 1'b0;
      repeat (3) @(negedge clk);
      check(!err_flag && err_count == 0 && !err_word_valid, "clean after reset");
      first = -1; cnt = 0; wv = 0;
      for (int i = 0; i < 30; i++) begin
        e = ($urandom_range(3) == 0) ? N'($urandom) : '0;
        err_in = e;
        @(negedge clk);
        if (e != '0) begin
          cnt++;
          if (first < 0) begin
            for (int k = N - 1; k >= 0; k--) if (e[k]) first = k;
            check(err_word_valid, "error word valid after the first error");
            wv++;
          end else check(!err_word_valid, "error word only once");
        end else if (first >= 0) check(!err_word_valid, "error word only once");
        if (first >= 0) check(err_flag && int'(err_code) == first, "sticky flag and first code");
        check(int'(err_count) == cnt, "error count");
      end
      err_in = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
