// matrix_merger: N-to-1 merger reading the matrix FIFOs of a chain.
//
// Candidate words are taken round-robin from the FIFOs whose head is a candidate (not
// an EE word), one per cycle. When every FIFO shows an EE word at its head, all of them
// are read together and a single EE word is forwarded; sync_err pulses if their event
// identifiers are not all equal. Hence all candidates of an event leave before its EE
// word. Interface: N FIFO-read streams (valid/hold) in, one registered valid/hold
// stream of cand_t words out.
//
// Lint note: the priority comparison reads only the sensor and position fields of the
// cluster words, and only the low bits of the index, so the other bits are unused.
module matrix_merger
  import velo_pkg::*;
#(
  parameter int unsigned N = 20
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [N-1:0]        in_valid,
  input  logic [CAND_W-1:0]   in_data [N],
  output logic [N-1:0]        in_hold,
  output logic                out_valid,
  output logic [CAND_W-1:0]   out_data,
  input  logic                out_hold,
  output logic                sync_err
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] rr;
  logic [N-1:0]  pop;
  logic [N-1:0]  head_ee, is_cand;
  logic          all_ee, free, found, mism;
  logic [IW-1:0] sel;
  cand_t         c0;

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      cand_t c;
      c = cand_t'(in_data[i]);
      head_ee[i]   = in_valid[i] && c.ee;
      is_cand[i] = in_valid[i] && !c.ee;
    end
    all_ee = (head_ee == {N{1'b1}});
    free   = !out_valid || !out_hold;
    c0     = cand_t'(in_data[0]);
    mism   = 1'b0;
    for (int i = 1; i < int'(N); i++) begin
      cand_t c;
      c = cand_t'(in_data[i]);
      if (c.grid[EVID_W-1:0] != c0.grid[EVID_W-1:0]) mism = 1'b1;
    end
    found = 1'b0;
    sel   = '0;
    for (int k = 0; k < int'(N); k++) begin
      int idx;
      idx = (int'(rr) + k) % int'(N);
      if (!found && is_cand[idx]) begin
        found = 1'b1;
        sel   = IW'(idx);
      end
    end
    pop = '0;
    if (free) begin
      if (found)       pop[sel] = 1'b1;
      else if (all_ee) pop = {N{1'b1}};
    end
    in_hold = ~pop;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      rr        <= '0;
      sync_err  <= 1'b0;
    end else begin
      sync_err <= 1'b0;
      if (free) begin
        out_valid <= 1'b0;
        if (found) begin
          out_valid <= 1'b1;
          out_data  <= in_data[sel];
          rr        <= (sel == IW'(N-1)) ? '0 : sel + 1'b1;
        end else if (all_ee) begin
          out_valid <= 1'b1;
          out_data  <= in_data[0];
          sync_err  <= mism;
        end
      end
    end
  end
endmodule
