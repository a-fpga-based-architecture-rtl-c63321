// encoder_2to1: packs two W-bit lines into one 2W-bit line.
//
// Each input line has a holding register (R0, R1) that keeps a word which could not be
// used, and raises that line's hold while full. A third register, R3, keeps a single
// word waiting for a partner. Every cycle in which the output register is free, up to
// two data words, taken in the order R3, line 0, line 1, are packed into one output
// word (the first in the low half); a lone word goes into R3, and a third word into R3
// after the pair leaves. EE words (top bit set) are parked in R0/R1 until both lines
// show one: a word still waiting in R3 is then sent padded with a zero upper half, after
// which a single 2W-bit EE word (top bit set, event identifier in the low bits) is sent
// and sync_err pulses if the two identifiers differ. Packed data words never have the
// top bit set, because the upper half is a cluster word (bit 31 clear) or zero padding.
// Interface: valid/hold on both sides; the output is registered (one cycle latency).
module encoder_2to1 #(
  parameter int unsigned W      = 32,
  parameter int unsigned EVID_W = 5
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [1:0]     valid_in,
  input  logic [W-1:0]   data_in [2],
  output logic [1:0]     hold_out,
  output logic           valid_out,
  output logic [2*W-1:0] data_out,
  input  logic           hold_in,
  output logic           sync_err
);
  logic [1:0]     rf;
  logic [W-1:0]   r [2];
  logic           r3f;
  logic [W-1:0]   r3;
  logic [1:0]     a_v, a_ee, dw, take;
  logic [W-1:0]   a [2];
  logic           free, both_ee;

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      a_v[i]  = rf[i] || valid_in[i];
      a[i]    = rf[i] ? r[i] : data_in[i];
      a_ee[i] = a[i][W-1];
      dw[i]   = a_v[i] && !a_ee[i];
    end
    both_ee = a_v[0] && a_v[1] && a_ee[0] && a_ee[1];
    free    = !valid_out || !hold_in;
    take    = 2'b00;
    if (free && !both_ee) take = dw;
    if (free && both_ee && !r3f) take = 2'b11;
  end

  assign hold_out = rf;

  always_ff @(posedge clk) begin
    if (rst) begin
      rf <= 2'b00; r3f <= 1'b0; r3 <= '0; r[0] <= '0; r[1] <= '0;
      valid_out <= 1'b0; data_out <= '0; sync_err <= 1'b0;
    end else begin
      sync_err <= 1'b0;
      if (free) begin
        valid_out <= 1'b0;
        if (both_ee) begin
          valid_out <= 1'b1;
          if (r3f) begin
            data_out <= {{W{1'b0}}, r3};
            r3f      <= 1'b0;
          end else begin
            data_out <= {1'b1, {(2*W-1-EVID_W){1'b0}}, a[0][EVID_W-1:0]};
            sync_err <= (a[0][EVID_W-1:0] != a[1][EVID_W-1:0]);
          end
        end else begin
          case ({r3f, dw})
            3'b011: begin valid_out <= 1'b1; data_out <= {a[1], a[0]}; end
            3'b101: begin valid_out <= 1'b1; data_out <= {a[0], r3}; r3f <= 1'b0; end
            3'b110: begin valid_out <= 1'b1; data_out <= {a[1], r3}; r3f <= 1'b0; end
            3'b111: begin valid_out <= 1'b1; data_out <= {a[0], r3}; r3 <= a[1]; end
            3'b001: begin r3 <= a[0]; r3f <= 1'b1; end
            3'b010: begin r3 <= a[1]; r3f <= 1'b1; end
            default: ;
          endcase
        end
      end
      for (int i = 0; i < 2; i++) begin
        if (rf[i]) begin
          if (take[i]) rf[i] <= 1'b0;
        end else if (valid_in[i] && !take[i]) begin
          r[i]  <= data_in[i];
          rf[i] <= 1'b1;
        end
      end
    end
  end
endmodule
