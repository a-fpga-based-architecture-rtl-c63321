// merger: two input streams merged into one (the switch's and the isolated-cluster
// block's basic element).
//
// Words from the two inputs are forwarded one per cycle, alternating priority when both
// offer one. Each input has a holding register (R0, R1) that keeps a word which could
// not be forwarded; a full register raises that input's hold. An EE word is parked in
// its register until an EE word is also present on the other input: the two are then
// compared, a single EE word is forwarded, and sync_err pulses if the event
// identifiers differ. This keeps the events of the two inputs aligned on the output.
// Interface: valid/hold on all sides, the EE marker is the top data bit and the event
// identifier the low EVID_W bits. Zero latency from input to output.
module merger #(
  parameter int unsigned W      = 32,
  parameter int unsigned EVID_W = 5
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [1:0]   valid_in,
  input  logic [W-1:0] data_in [2],
  output logic [1:0]   hold_out,
  output logic         valid_out,
  output logic [W-1:0] data_out,
  input  logic         hold_in,
  output logic         sync_err
);
  logic [1:0]   rf;
  logic [W-1:0] r [2];
  logic         prio;
  logic [1:0]   a_v, a_ee, word_ok, take;
  logic [W-1:0] a [2];
  logic         both_ee, pick;

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      a_v[i]     = rf[i] || valid_in[i];
      a[i]       = rf[i] ? r[i] : data_in[i];
      a_ee[i]    = a[i][W-1];
      word_ok[i] = a_v[i] && !a_ee[i];
    end
    both_ee   = a_v[0] && a_v[1] && a_ee[0] && a_ee[1];
    take      = 2'b00;
    pick      = 1'b0;
    valid_out = 1'b0;
    data_out  = a[0];
    sync_err  = 1'b0;
    if (!hold_in) begin
      if (both_ee) begin
        take      = 2'b11;
        valid_out = 1'b1;
        data_out  = a[0];
        sync_err  = (a[0][EVID_W-1:0] != a[1][EVID_W-1:0]);
      end else if (word_ok != 2'b00) begin
        pick = (word_ok == 2'b11) ? prio : word_ok[1];
        take[pick] = 1'b1;
        valid_out  = 1'b1;
        data_out   = a[pick];
      end
    end
  end

  assign hold_out = rf;

  always_ff @(posedge clk) begin
    if (rst) begin
      rf   <= 2'b00;
      prio <= 1'b0;
      r[0] <= '0;
      r[1] <= '0;
    end else begin
      for (int i = 0; i < 2; i++) begin
        if (rf[i]) begin
          if (take[i]) rf[i] <= 1'b0;
        end else if (valid_in[i] && !take[i]) begin
          r[i]  <= data_in[i];
          rf[i] <= 1'b1;
        end
      end
      if (take == 2'b01) prio <= 1'b1;
      else if (take == 2'b10) prio <= 1'b0;
    end
  end
endmodule
