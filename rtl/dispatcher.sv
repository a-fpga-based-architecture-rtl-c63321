// dispatcher: 2-to-2 router made of two splitters and two mergers.
//
// Each input word goes to output 0 or 1 according to bit SEL_BIT of the word (the
// isolation flag or the sensor bit), whatever input it came on; EE words go to both
// outputs. Splitter k sends its output j to merger j, so each merger collects all the
// words meant for its output and re-aligns the two EE streams (see merger).
// Interface: two valid/hold input streams, two valid/hold output streams, and a
// sync-error pulse per merger. Latency zero, one word per cycle per output.
module dispatcher #(
  parameter int unsigned W       = 32,
  parameter int unsigned SEL_BIT = 24
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [1:0]   valid_in,
  input  logic [W-1:0] data_in [2],
  output logic [1:0]   hold_out,
  output logic [1:0]   valid_out,
  output logic [W-1:0] data_out [2],
  input  logic [1:0]   hold_in,
  output logic [1:0]   sync_err
);
  logic [1:0]   sp_valid [2];   // [splitter][output]
  logic [W-1:0] sp_data  [2];
  logic [1:0]   mg_hold  [2];   // [merger][input]
  logic [1:0]   sp_hold  [2];   // [splitter][output]

  for (genvar k = 0; k < 2; k++) begin : g_split
    splitter #(.W(W), .SEL_BIT(SEL_BIT)) u_split (
      .clk, .rst,
      .valid_in (valid_in[k]), .data_in(data_in[k]), .hold_out(hold_out[k]),
      .valid_out(sp_valid[k]), .data_out(sp_data[k]), .hold_in(sp_hold[k]));
  end

  for (genvar j = 0; j < 2; j++) begin : g_merge
    logic [W-1:0] m_in [2];
    assign m_in[0] = sp_data[0];
    assign m_in[1] = sp_data[1];
    merger #(.W(W)) u_merge (
      .clk, .rst,
      .valid_in ({sp_valid[1][j], sp_valid[0][j]}), .data_in(m_in),
      .hold_out (mg_hold[j]),
      .valid_out(valid_out[j]), .data_out(data_out[j]), .hold_in(hold_in[j]),
      .sync_err (sync_err[j]));
  end

  assign sp_hold[0] = {mg_hold[1][0], mg_hold[0][0]};
  assign sp_hold[1] = {mg_hold[1][1], mg_hold[0][1]};
endmodule
