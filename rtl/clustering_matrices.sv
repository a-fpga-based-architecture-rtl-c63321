// clustering_matrices: cluster reconstruction of the non-isolated SPs of one sensor.
//
// A chain of NMAT matrix_cells receives the SPs on two input lines; each matrix keeps the
// SPs that fall in its 3x3-SP area and passes the others on, swapping the two lines
// between consecutive matrices (line 0 of a matrix feeds line 1 of the next and vice
// versa). At the end of an event each matrix is copied into its cluster_finder, which
// writes the 3x3 cluster candidates found in it into its matrix FIFO. The
// matrix_merger reads all matrix FIFOs, candidate_lut gives the centroid of each
// candidate, and the cluster word is written into the output FIFO. The absolute
// position, in quarter pixels, is the sum of the matrix position on the sensor, the
// candidate corner inside the matrix and the centroid inside the candidate:
//   row_q = 16*(centre SP row - 1) + 4*anchor row + lut row
//   col_q =  8*(centre SP col - 1) + 4*corner col + lut col
// SPs that leave the last matrix have found no room in the chain (overflow). Their two
// lines are merged and resolved by a clustering_isolated block as if isolated, with the
// overflow flag set in their cluster words; ovf_pulse marks each such SP for monitoring.
// Interface: two valid/hold SP input lines; two FIFO-read cluster streams (matrix
// clusters and overflow clusters), each with EE words between events.
//
// Lint note: the pixel count of the candidate LUT (npix) is not part of the matrix cluster
// word, and the occupancy outputs of the overflow FIFO (occ_o, max_o, max_v) are
// monitoring taps with no reader here.
module clustering_matrices
  import velo_pkg::*;
#(
  parameter int unsigned NMAT       = 20,
  parameter bit          ORIENT     = 1'b0,
  parameter int unsigned MFIFO_DEPTH = 16,
  parameter int unsigned OFIFO_DEPTH = 32
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [1:0]      in_valid,
  input  logic [SP_W-1:0] in_data [2],
  output logic [1:0]      in_hold,
  output logic            out_valid,
  output logic [SP_W-1:0] out_data,
  input  logic            out_hold,
  output logic            ovf_valid,
  output logic [SP_W-1:0] ovf_data,
  input  logic            ovf_hold,
  output logic [1:0]      ovf_pulse,
  output logic            sync_err,
  output logic            err_loss
);
  // chain stage k line j: input of matrix k (stage NMAT = chain output)
  logic [1:0]      lv [NMAT+1];
  logic [SP_W-1:0] ldat [NMAT+1][2];
  logic [1:0]      lh [NMAT+1];
  logic [NMAT-1:0] m_err, f_loss;
  logic [NMAT-1:0] fv, fh;
  logic [CAND_W-1:0] fd [NMAT];

  assign lv[0]      = in_valid;
  assign ldat[0][0] = in_data[0];
  assign ldat[0][1] = in_data[1];
  assign in_hold    = lh[0];

  for (genvar k = 0; k < int'(NMAT); k++) begin : g_mat
    logic [1:0]          ov, hin;
    logic [SP_W-1:0]     od [2];
    logic [SP_W-1:0]     idat [2];
    logic                busy, copy, alloc, sensor;
    logic [MAT_PIX-1:0]  pix;
    logic [SP_ROW_W-1:0] crow;
    logic [SP_COL_W-1:0] ccol;
    logic [EVID_W-1:0]   id;

    assign idat[0] = ldat[k][0];
    assign idat[1] = ldat[k][1];

    matrix_cell u_cell (
      .clk, .rst, .in_valid(lv[k]), .in_data(idat), .hold_out(lh[k]),
      .out_valid(ov), .out_data(od), .hold_in(hin), .finder_busy(busy),
      .copy, .copy_alloc(alloc), .copy_pix(pix), .copy_crow(crow), .copy_ccol(ccol),
      .copy_sensor(sensor), .copy_id(id), .sync_err(m_err[k]));

    // line swap towards the next matrix
    assign lv[k+1]      = {ov[0], ov[1]};
    assign ldat[k+1][0] = od[1];
    assign ldat[k+1][1] = od[0];
    assign hin          = {lh[k+1][0], lh[k+1][1]};

    cluster_finder #(.ORIENT(ORIENT), .FIFO_DEPTH(MFIFO_DEPTH)) u_find (
      .clk, .rst, .copy, .copy_alloc(alloc), .copy_pix(pix), .copy_crow(crow),
      .copy_ccol(ccol), .copy_sensor(sensor), .copy_id(id), .busy,
      .out_valid(fv[k]), .out_data(fd[k]), .out_hold(fh[k]), .err_loss(f_loss[k]));
  end

  // merger of the matrix FIFOs, centroid LUT, output FIFO
  logic              mv, mh, merr;
  logic [CAND_W-1:0] md;
  cand_t             mc;
  logic [3:0]        npix, rq, cq;
  logic [4:0]        topo;
  logic [SP_W-1:0]   cw;
  logic              o_loss, v_loss, ovf_err, iso_err;

  matrix_merger #(.N(NMAT)) u_mmerge (
    .clk, .rst, .in_valid(fv), .in_data(fd), .in_hold(fh),
    .out_valid(mv), .out_data(md), .out_hold(mh), .sync_err(merr));

  assign mc = cand_t'(md);
  candidate_lut u_lut (.grid(mc.grid), .npix, .row_q(rq), .col_q(cq), .topo);

  always_comb begin
    int rowq, colq, cmin;
    cmin = ORIENT ? int'(mc.acol) - 2 : int'(mc.acol);
    rowq = 16*(int'(mc.crow) - 1) + 4*int'(mc.arow) + int'(rq);
    colq =  8*(int'(mc.ccol) - 1) + 4*cmin + int'(cq);
    if (mc.ee) cw = make_ee(mc.grid[EVID_W-1:0]);
    else cw = make_mat_cluster(mc.contained, mc.boundary, topo, mc.sensor,
                               PIX_COL_W'(colq >>> 2), 2'(colq), PIX_ROW_W'(rowq >>> 2),
                               2'(rowq));
  end

  logic [$clog2(OFIFO_DEPTH+1)-1:0] occ_o, max_o, max_v;
  sync_fifo #(.W(SP_W), .DEPTH(OFIFO_DEPTH)) u_ofifo (
    .clk, .rst, .wr_valid(mv), .wr_data(cw), .wr_hold(mh),
    .rd_valid(out_valid), .rd_data(out_data), .rd_hold(out_hold),
    .max_clear(1'b0), .occupancy(occ_o), .max_occupancy(max_o), .err_loss(o_loss));

  // overflow path: the chain's two output lines merged, resolved as isolated SPs
  logic            xv, xh;
  logic [SP_W-1:0] xd;
  logic [SP_W-1:0] tail [2];
  assign tail[0] = ldat[NMAT][0];
  assign tail[1] = ldat[NMAT][1];

  merger #(.W(SP_W), .EVID_W(EVID_W)) u_omerge (
    .clk, .rst, .valid_in(lv[NMAT]), .data_in(tail), .hold_out(lh[NMAT]),
    .valid_out(xv), .data_out(xd), .hold_in(xh), .sync_err(ovf_err));

  clustering_isolated #(.OVERFLOW(1'b1), .FIFO_DEPTH(OFIFO_DEPTH)) u_ovf (
    .clk, .rst, .in_valid(xv), .in_data(xd), .in_hold(xh),
    .out_valid(ovf_valid), .out_data(ovf_data), .out_hold(ovf_hold),
    .sync_err(iso_err), .fifo_max(max_v), .err_loss(v_loss));

  assign ovf_pulse[0] = lv[NMAT][0] && !lh[NMAT][0] && !is_ee(tail[0]);
  assign ovf_pulse[1] = lv[NMAT][1] && !lh[NMAT][1] && !is_ee(tail[1]);
  assign sync_err = |m_err || merr || ovf_err || iso_err;
  assign err_loss = |f_loss || o_loss || v_loss;
endmodule
