// encoder_8to1: packs the eight 32-bit cluster streams into the 256-bit output bus.
//
// Seven encoder_2to1 blocks form a tree (32->64 bits four times, 64->128 twice,
// 128->256 once). Words are packed as they arrive, so a 256-bit output word can hold
// zero-padded 32-bit slots; the packing trades density for one output word per cycle.
// The output stage converts the EE words back into SOP/EOP framing: each 256-bit data
// word is kept until the next one or the event's EE word arrives, so that EOP can be set
// on the last word of the event; SOP marks the first. An event without clusters is sent
// as one all-zero word with SOP and EOP. out_ready from the next unit is the inverse of
// its hold. Latency: one cycle per tree level plus the output stage.
module encoder_8to1
  import velo_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic [LANES-1:0] in_valid,
  input  logic [SP_W-1:0]  in_data [LANES],
  output logic [LANES-1:0] in_hold,
  output logic [BUS_W-1:0] out_data,
  output logic             out_valid,
  output logic             out_sop,
  output logic             out_eop,
  input  logic             out_ready,
  output logic             sync_err
);
  // level 1
  logic [3:0]    v1, h1;
  logic [63:0]   d1 [4];
  logic [6:0]    se;
  for (genvar k = 0; k < 4; k++) begin : g_l1
    logic [SP_W-1:0] din [2];
    assign din[0] = in_data[2*k];
    assign din[1] = in_data[2*k+1];
    encoder_2to1 #(.W(32), .EVID_W(EVID_W)) u_enc (
      .clk, .rst, .valid_in(in_valid[2*k+1:2*k]), .data_in(din),
      .hold_out(in_hold[2*k+1:2*k]), .valid_out(v1[k]), .data_out(d1[k]),
      .hold_in(h1[k]), .sync_err(se[k]));
  end
  // level 2
  logic [1:0]    v2, h2;
  logic [127:0]  d2 [2];
  for (genvar k = 0; k < 2; k++) begin : g_l2
    logic [63:0] din [2];
    assign din[0] = d1[2*k];
    assign din[1] = d1[2*k+1];
    encoder_2to1 #(.W(64), .EVID_W(EVID_W)) u_enc (
      .clk, .rst, .valid_in(v1[2*k+1:2*k]), .data_in(din),
      .hold_out(h1[2*k+1:2*k]), .valid_out(v2[k]), .data_out(d2[k]),
      .hold_in(h2[k]), .sync_err(se[4+k]));
  end
  // level 3
  logic          v3, h3;
  logic [255:0]  d3;
  encoder_2to1 #(.W(128), .EVID_W(EVID_W)) u_enc3 (
    .clk, .rst, .valid_in(v2), .data_in(d2), .hold_out(h2),
    .valid_out(v3), .data_out(d3), .hold_in(h3), .sync_err(se[6]));

  // output stage: EE -> SOP/EOP
  logic          pf, first, free;
  logic [255:0]  pw;
  assign free = !out_valid || out_ready;
  assign h3   = !free;

  always_ff @(posedge clk) begin
    if (rst) begin
      pf <= 1'b0; first <= 1'b1; pw <= '0;
      out_valid <= 1'b0; out_data <= '0; out_sop <= 1'b0; out_eop <= 1'b0;
    end else if (free) begin
      out_valid <= 1'b0;
      if (v3) begin
        if (d3[255]) begin                       // EE word: close the event
          out_valid <= 1'b1;
          out_data  <= pf ? pw : '0;
          out_sop   <= pf ? first : 1'b1;
          out_eop   <= 1'b1;
          pf        <= 1'b0;
          first     <= 1'b1;
        end else begin
          if (pf) begin
            out_valid <= 1'b1;
            out_data  <= pw;
            out_sop   <= first;
            out_eop   <= 1'b0;
            first     <= 1'b0;
          end
          pw <= d3;
          pf <= 1'b1;
        end
      end
    end
  end

  assign sync_err = |se;
endmodule
