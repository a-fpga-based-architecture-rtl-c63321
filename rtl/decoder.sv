// decoder: input stage of the cluster finder.
//
// Takes the 256-bit input words (eight 32-bit SP words each) with valid, SOP and EOP,
// splits them into eight 32-bit streams and replaces the SOP/EOP framing by EE words
// inserted between events on all eight streams. The isolation flagging sits inside it
// (see isolation_flagger), so the SP words leave with their isolation bit set.
// An all-zero 32-bit slot is an empty slot; the SPs of a word are expected in the lowest
// slots. in_ready is the inverse of the hold of the flagging pipeline. err_frame pulses
// when SOP is missing on the first word of an event or repeated inside one (a loss of
// framing). Outputs: eight valid/hold streams.
module decoder
  import velo_pkg::*;
#(
  parameter int unsigned MAX_SP = 144,
  parameter int unsigned SUB    = 16
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [BUS_W-1:0]   in_data,
  input  logic               in_valid,
  input  logic               in_sop,
  input  logic               in_eop,
  output logic               in_ready,
  output logic [LANES-1:0]   out_valid,
  output logic [SP_W-1:0]    out_data [LANES],
  input  logic [LANES-1:0]   out_hold,
  output logic               bypass_pulse,
  output logic               err_frame
);
  logic [SP_W-1:0]            lanes [LANES];
  logic [$clog2(LANES+1)-1:0] nsp;
  logic                       hold, in_event;

  always_comb begin
    nsp = '0;
    for (int k = 0; k < int'(LANES); k++) begin
      lanes[k] = in_data[k*SP_W +: SP_W];
      if (lanes[k] != '0) nsp = nsp + 1'b1;
    end
  end

  isolation_flagger #(.MAX_SP(MAX_SP), .SUB(SUB)) u_flag (
    .clk, .rst,
    .in_valid(in_valid), .in_sp(lanes), .in_nsp(nsp), .in_eop(in_eop), .in_hold(hold),
    .out_valid, .out_data, .out_hold, .bypass_pulse);

  assign in_ready = !hold;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_event  <= 1'b0;
      err_frame <= 1'b0;
    end else begin
      err_frame <= 1'b0;
      if (in_valid && in_ready) begin
        err_frame <= (in_sop == in_event);
        in_event  <= !in_eop;
      end
    end
  end
endmodule
