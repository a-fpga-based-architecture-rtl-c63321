// splitter: one input stream, two output streams (the switch's basic element).
//
// A word is sent to output 0 or 1 according to one bit of it (SEL_BIT: the isolation
// flag or the sensor bit); an EE word goes to both outputs at once. As in the paper's
// splitter diagram there is one holding register R0, a multiplexer choosing between
// the input and R0, and a small controller. A word that cannot leave because its
// output(s) are on hold is latched into R0; while R0 is full the splitter raises its
// own hold towards the previous unit. hold_out is therefore a register output and
// the splitter passes one word per cycle when nothing is held.
// Interface: valid/hold on both sides; the two outputs share data_out and have one
// valid bit each. Data pass combinationally from input to output (zero latency).
module splitter #(
  parameter int unsigned W       = 32,
  parameter int unsigned SEL_BIT = 24
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         valid_in,
  input  logic [W-1:0] data_in,
  output logic         hold_out,
  output logic [1:0]   valid_out,
  output logic [W-1:0] data_out,
  input  logic [1:0]   hold_in
);
  logic         r0_full;
  logic [W-1:0] r0;
  logic         cur_v, send;
  logic [W-1:0] cur;
  logic [1:0]   dest;

  always_comb begin
    cur   = r0_full ? r0 : data_in;
    cur_v = r0_full || valid_in;
    dest  = cur[W-1] ? 2'b11 : (cur[SEL_BIT] ? 2'b10 : 2'b01);
    send  = cur_v && ((dest & hold_in) == 2'b00);
    valid_out = send ? dest : 2'b00;
    data_out  = cur;
  end

  assign hold_out = r0_full;

  always_ff @(posedge clk) begin
    if (rst) begin
      r0_full <= 1'b0;
      r0      <= '0;
    end else if (r0_full) begin
      if (send) r0_full <= 1'b0;
    end else if (valid_in && !send) begin
      r0      <= data_in;
      r0_full <= 1'b1;
    end
  end
endmodule
