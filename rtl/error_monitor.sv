// error_monitor: collects the error signals of the processing units.
//
// Two kinds of error are reported by the units: data loss (a word offered to a full
// register or FIFO) and loss of synchronisation (two EE words with different event
// identifiers meeting in a merger, matrix or encoder, or broken SOP/EOP framing). Each
// source is one input bit. The first error after reset is latched: err_flag goes high
// and stays high, and a one-cycle err_word_valid emits an error word holding the error
// code (the index of the source that fired, lowest index first when several fire
// together) and the number of errors seen so far. Later errors only increase the
// count. Only a reset clears the state, as recovery requires resetting the clustering
// logic and memories. The code assignment is this design's choice.
module error_monitor #(
  parameter int unsigned NSRC = 8
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [NSRC-1:0]         err_in,
  output logic                    err_flag,
  output logic [$clog2(NSRC)-1:0] err_code,
  output logic [15:0]             err_count,
  output logic                    err_word_valid
);
  logic [$clog2(NSRC)-1:0] code;
  always_comb begin
    code = '0;
    for (int i = int'(NSRC) - 1; i >= 0; i--)
      if (err_in[i]) code = ($clog2(NSRC))'(i);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      err_flag <= 1'b0; err_code <= '0; err_count <= '0; err_word_valid <= 1'b0;
    end else begin
      err_word_valid <= 1'b0;
      if (err_in != '0) begin
        if (err_count != 16'hFFFF) err_count <= err_count + 1'b1;
        if (!err_flag) begin
          err_flag       <= 1'b1;
          err_code       <= code;
          err_word_valid <= 1'b1;
        end
      end
    end
  end
endmodule
