// Testbench of sync_fifo: random writes and reads against a queue model. Checks data
// order, the full hold, the first-word-fall-through latency (a word written on one edge
// is readable in the next cycle), the occupancy and maximum-occupancy monitors with
// clear, and the data-loss flag when a write is forced while full. As everywhere in this
// design, a sender raises valid only while the receiver does not hold.
module tb_sync_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic wr_valid = 1'b0, rd_hold = 1'b1, max_clear = 1'b0;
  logic [W-1:0] wr_data = '0;
  logic wr_hold, rd_valid, err_loss;
  logic [W-1:0] rd_data;
  logic [$clog2(DEPTH+1)-1:0] occupancy, max_occupancy;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst, .wr_valid, .wr_data, .wr_hold,
    .rd_valid, .rd_data, .rd_hold, .max_clear, .occupancy, .max_occupancy, .err_loss);

  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  int peak = 0;
  bit force_write = 1'b0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (!rst) begin
    bit wr, rd;
    wr = wr_valid && !wr_hold;
    rd = rd_valid && !rd_hold;
    check(occupancy == model.size(), "occupancy");
    check(max_occupancy == peak, "max occupancy");
    check(wr_hold == (model.size() == DEPTH), "full hold");
    check(rd_valid == (model.size() != 0), "read valid (fall-through)");
    if (max_clear) peak = model.size();          // the monitor follows the count
    else if (model.size() > peak) peak = model.size();   // with one cycle delay
    if (rd) begin
      check(rd_data == model[0], "read data order");
      void'(model.pop_front());
    end
    if (wr) model.push_back(wr_data);
    check(err_loss == 1'b0 || force_write, "no loss flag in normal use");
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      wr_valid  = ($urandom_range(99) < ((i / 500) % 2 ? 70 : 40)) && !wr_hold;
      wr_data   = W'($urandom);
      rd_hold   = ($urandom_range(99) < ((i / 500) % 2 ? 60 : 20));
      max_clear = ($urandom_range(99) == 0);
    end
    // fill up, then force a write while full
    @(negedge clk); wr_valid = 1'b0; rd_hold = 1'b1; max_clear = 1'b0;
    while (!wr_hold) begin wr_valid = 1'b1; wr_data = W'($urandom); @(negedge clk); end
    wr_valid = 1'b0;
    @(negedge clk); force_write = 1'b1; wr_valid = 1'b1;
    @(negedge clk); wr_valid = 1'b0;
    check(err_loss == 1'b1, "loss flag on write while full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
