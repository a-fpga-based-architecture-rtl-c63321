// clustering_isolated: cluster reconstruction for isolated SPs (and, with OVERFLOW=1,
// for the SPs that overflowed a matrix chain, which are resolved as if isolated).
//
// Each SP word goes through sp_lut; the cluster words are built from the LUT output and
// the SP's own row and column: pixel row = 4*SP row + row offset, pixel column =
// 2*SP column + column offset, each with a 2-bit quarter-pixel fraction. Cluster 0 and
// cluster 1 of an SP are offered on the two inputs of a merger, which puts them on one
// line; an EE word is offered on both merger inputs and comes out once. The merged line
// is written into the output FIFO.
// Cluster word: bit 30 = 1, bit 29 = OVERFLOW, bits 28:23 topology, bit 22 sensor.
// Interface: valid/hold input stream of SP/EE words, FIFO-read output stream of cluster/
// EE words; sync_err from the merger. One SP accepted per cycle unless the merger holds.
//
// Lint note: of the SP word only the EE flag, sensor, position and hitmap are used (bits
// 30:24 are unused); the FIFO occupancy output (occ) is a monitoring tap with no reader.
module clustering_isolated
  import velo_pkg::*;
#(
  parameter bit          OVERFLOW   = 1'b0,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic [SP_W-1:0]     in_data,
  output logic                in_hold,
  output logic                out_valid,
  output logic [SP_W-1:0]     out_data,
  input  logic                out_hold,
  output logic                sync_err,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_max,
  output logic                err_loss
);
  sp_t             sp;
  logic [1:0]      nclu;
  logic [3:0]      row_q [2];
  logic [2:0]      col_q [2];
  logic [5:0]      topo  [2];
  logic [1:0]      m_hold, m_valid;
  logic [SP_W-1:0] m_in [2];
  logic            mo_valid, f_hold;
  logic [SP_W-1:0] mo_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] occ;

  assign sp = sp_t'(in_data);

  sp_lut u_lut (.hitmap(sp.hitmap), .nclu, .row_q, .col_q, .topo);

  assign in_hold = |m_hold;

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      logic [PIX_ROW_W+1:0] rq;
      logic [PIX_COL_W+1:0] cq;
      rq = {sp.row, 4'b0000} + (PIX_ROW_W+2)'(row_q[k]);
      cq = {sp.col, 3'b000}  + (PIX_COL_W+2)'(col_q[k]);
      m_in[k] = sp.ee ? in_data
                      : make_iso_cluster(OVERFLOW, topo[k], sp.sensor,
                                         cq[PIX_COL_W+1:2], cq[1:0],
                                         rq[PIX_ROW_W+1:2], rq[1:0]);
    end
    m_valid[0] = in_valid && !in_hold && (sp.ee || nclu != 2'd0);
    m_valid[1] = in_valid && !in_hold && (sp.ee || nclu == 2'd2);
  end

  merger #(.W(SP_W), .EVID_W(EVID_W)) u_merge (
    .clk, .rst, .valid_in(m_valid), .data_in(m_in), .hold_out(m_hold),
    .valid_out(mo_valid), .data_out(mo_data), .hold_in(f_hold), .sync_err);

  sync_fifo #(.W(SP_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_valid(mo_valid), .wr_data(mo_data), .wr_hold(f_hold),
    .rd_valid(out_valid), .rd_data(out_data), .rd_hold(out_hold),
    .max_clear(1'b0), .occupancy(occ), .max_occupancy(fifo_max), .err_loss);
endmodule
