// Testbench of matrix_merger (N = 4): each input carries per event a random number of
// candidate words and then an EE candidate. Checks that every candidate of an event
// leaves before that event's single EE, that the EE carries the identifier, that order
// per input is kept, and that a sync error comes only for the last event (mismatched
// identifiers). One word leaves per cycle when candidates are waiting.
module tb_matrix_merger;
  import velo_pkg::*;
  localparam int N = 4, NEV = 200;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic [N-1:0] in_valid = '0, in_hold;
  logic [CAND_W-1:0] in_data [N];
  logic out_valid, out_hold = 1'b0, sync_err;
  logic [CAND_W-1:0] out_data;
  matrix_merger #(.N(N)) dut (.clk, .rst, .in_valid, .in_data, .in_hold, .out_valid,
                              .out_data, .out_hold, .sync_err);
  int checks = 0, failures = 0, ev_out = 0, nerr = 0, done_in = 0, nout = 0;
  cand_t exp_q [N][NEV+1][$];
  bit hold_en = 1'b0;

  always @(negedge clk) out_hold = hold_en ? ($urandom_range(2) == 0) : 1'b0;

  always @(posedge clk) if (!rst) begin
    if (sync_err) nerr++;
    if (out_valid && !out_hold) begin
      cand_t c;
      c = cand_t'(out_data);
      checks++; nout++;
      if (c.ee) begin
        int left;
        left = 0;
        for (int i = 0; i < N; i++) left += exp_q[i][ev_out].size();
        if (left != 0 || c.grid[EVID_W-1:0] != EVID_W'(ev_out)) begin
          failures++; $display("FAIL: EE of event %0d early or wrong id", ev_out);
        end
        ev_out++;
      end else begin
        int src;
        src = int'(c.acol) % N;
        if (exp_q[src][ev_out].size() == 0 || exp_q[src][ev_out][0] != c) begin
          failures++; $display("FAIL: candidate out of order in event %0d", ev_out);
        end else void'(exp_q[src][ev_out].pop_front());
      end
    end
  end

  for (genvar l = 0; l < N; l++) begin : g_drv
    initial begin
      in_data[l] = '0;
      @(negedge clk iff !rst);
      for (int e = 0; e <= NEV; e++) begin
        int n;
        n = $urandom_range(3);
        for (int i = 0; i <= n; i++) begin
          cand_t c;
          c = cand_t'({$urandom, $urandom});
          if (i < n) begin
            c.ee = 1'b0; c.acol = 3'(l);
            exp_q[l][e].push_back(c);
          end else begin
            c = '0; c.ee = 1'b1;
            c.grid = 9'((e == NEV && l == 2) ? e + 1 : e) & 9'h1f;
          end
          while ($urandom_range(2) == 0) begin in_valid[l] = 1'b0; @(negedge clk); end
          in_data[l] = CAND_W'(c); in_valid[l] = 1'b1;
          // the hold of one input depends on the others, so the transfer is sampled
          // at the rising edge
          forever begin
            @(posedge clk);
            if (!in_hold[l]) break;
          end
          @(negedge clk);
        end
      end
      in_valid[l] = 1'b0;
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
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    wait (ev_out == NEV / 2);
    hold_en = 1'b1;
    wait (done_in == N);
    repeat (30) @(posedge clk);
    checks++;
    if (ev_out != NEV + 1) begin failures++; $display("FAIL: %0d events out", ev_out); end
    checks++;
    if (nerr != 1) begin failures++; $display("FAIL: %0d sync errors", nerr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
