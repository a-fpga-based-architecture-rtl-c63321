// sync_fifo: first-word-fall-through FIFO placed between processing units.
//
// The write side follows the valid/hold convention used throughout the design: the
// writer presents wr_valid/wr_data and holds them while wr_hold is high. wr_hold is
// high while the FIFO is full. The read side shows its head word on rd_data with
// rd_valid high; the reader takes it in any cycle where rd_hold is low.
// For monitoring, the FIFO reports its occupancy and the maximum occupancy seen since
// the last max_clear, and flags a data-loss error if a word is offered while it is
// full (the writer ignored the hold). All ports are synchronous to one clock; the
// dual-clock crossing of the original firmware is not modelled.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_valid,
  input  logic [W-1:0]               wr_data,
  output logic                       wr_hold,
  output logic                       rd_valid,
  output logic [W-1:0]               rd_data,
  input  logic                       rd_hold,
  input  logic                       max_clear,
  output logic [$clog2(DEPTH+1)-1:0] occupancy,
  output logic [$clog2(DEPTH+1)-1:0] max_occupancy,
  output logic                       err_loss
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [CW-1:0] count;
  logic          do_wr, do_rd;

  assign wr_hold  = (count == CW'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rptr];
  assign do_wr    = wr_valid && !wr_hold;
  assign do_rd    = rd_valid && !rd_hold;
  assign occupancy = count;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0; rptr <= '0; count <= '0;
      max_occupancy <= '0; err_loss <= 1'b0;
    end else begin
      if (do_wr) wptr <= incr(wptr);
      if (do_rd) rptr <= incr(rptr);
      count <= count + CW'(do_wr) - CW'(do_rd);
      if (max_clear)                  max_occupancy <= count;
      else if (count > max_occupancy) max_occupancy <= count;
      err_loss <= wr_valid && wr_hold;
    end
  end
endmodule
