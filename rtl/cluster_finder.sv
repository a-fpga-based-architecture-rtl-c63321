// cluster_finder: pattern-recognition twin of a matrix and its candidate extraction.
//
// On a copy pulse the 72-pixel content of the matrix is taken into the twin register,
// which frees the input matrix for the next event. Then:
//  1. pixel checker (one cycle): every pixel of the twin is tested in parallel against
//     the two L-shaped patterns; a match sets that pixel's bit in the pixel flag vector.
//     The pixels around the matrix read as zero (the fixed-zero edge registers).
//  2. extraction (one candidate per cycle): the encoder takes the lowest set flag bit
//     as the anchor address, the multiplexer cuts out the 3x3 candidate at that anchor,
//     the word {matrix centre, anchor, 3x3 grid, quality flags} is written into the
//     matrix FIFO and the flag bit is cleared (pixel flush).
//  3. an EE word with the event identifier is written into the FIFO and the finder is
//     free again (busy low).
// Patterns, with the anchor at (r, c) and s = +1 (ORIENT 0, sensors 0 and 3) or s = -1
// (ORIENT 1, sensors 1 and 2, the mirror image):
//   A: anchor active; (r+1,c-s) (r,c-s) (r-1,c-s) (r-1,c) (r-1,c+s) inactive.
//   B: anchor inactive, (r+1,c) and (r,c+s) active; (r+1,c-s) (r,c-s) (r-1,c) (r-1,c+s)
//      (r-1,c+2s) inactive.
// The candidate is rows r..r+2 and columns c..c+2s. Row numbers grow upwards in the
// pattern figure's orientation. Quality flags: "boundary" when the grid reaches the
// outermost row or column of the matrix or lies partly outside it; "contained" when no
// active pixel outside the grid touches an active pixel of the grid.
// Interface: copy/alloc/pix/centre/id from matrix_cell, busy back to it; the matrix
// FIFO is read with valid/hold.
//
// Lint note: the occupancy outputs of the output FIFO (occ, occ_max) are monitoring taps
// with no reader here.
module cluster_finder
  import velo_pkg::*;
#(
  parameter bit          ORIENT     = 1'b0,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                copy,
  input  logic                copy_alloc,
  input  logic [MAT_PIX-1:0]  copy_pix,
  input  logic [SP_ROW_W-1:0] copy_crow,
  input  logic [SP_COL_W-1:0] copy_ccol,
  input  logic                copy_sensor,
  input  logic [EVID_W-1:0]   copy_id,
  output logic                busy,
  output logic                out_valid,
  output logic [CAND_W-1:0]   out_data,
  input  logic                out_hold,
  output logic                err_loss
);
  localparam int S = ORIENT ? -1 : 1;
  typedef enum logic [1:0] {IDLE, CHECK, EXTRACT, SEND_EE} state_t;
  state_t state;

  logic [MAT_PIX-1:0]  tw;
  logic [MAT_PIX-1:0]  pflag, pflag_next;
  logic [SP_ROW_W-1:0] crow;
  logic [SP_COL_W-1:0] ccol;
  logic                sensor;
  logic [EVID_W-1:0]   evid;
  logic                f_hold, f_wr;
  cand_t               f_data, cand;
  logic [6:0]          addr;
  logic [$clog2(FIFO_DEPTH+1)-1:0] occ, occ_max;

  function automatic logic px(input logic [MAT_PIX-1:0] m, input int r, input int c);
    if (r < 0 || r >= int'(MAT_ROWS) || c < 0 || c >= int'(MAT_COLS)) return 1'b0;
    return m[r*int'(MAT_COLS) + c];
  endfunction

  // pixel checker
  always_comb begin
    for (int r = 0; r < int'(MAT_ROWS); r++)
      for (int c = 0; c < int'(MAT_COLS); c++) begin
        logic pa, pb;
        pa =  px(tw, r, c)   && !px(tw, r+1, c-S) && !px(tw, r, c-S) && !px(tw, r-1, c-S) &&
             !px(tw, r-1, c) && !px(tw, r-1, c+S);
        pb = !px(tw, r, c)   &&  px(tw, r+1, c)   &&  px(tw, r, c+S) &&
             !px(tw, r+1, c-S) && !px(tw, r, c-S) && !px(tw, r-1, c) &&
             !px(tw, r-1, c+S) && !px(tw, r-1, c+2*S);
        pflag_next[r*int'(MAT_COLS) + c] = pa || pb;
      end
  end

  // encoder (lowest set flag) and 3x3 multiplexer
  always_comb begin
    int ar, ac, cmin;
    logic [8:0] g;
    logic cont;
    addr = '0;
    for (int k = int'(MAT_PIX) - 1; k >= 0; k--)
      if (pflag[k]) addr = 7'(k);
    ar   = int'(addr) / int'(MAT_COLS);
    ac   = int'(addr) % int'(MAT_COLS);
    cmin = ORIENT ? ac - 2 : ac;
    g = '0;
    for (int dr = 0; dr < 3; dr++)
      for (int dc = 0; dc < 3; dc++)
        g[3*dr + dc] = px(tw, ar + dr, cmin + dc);
    cont = 1'b1;
    for (int rr = -1; rr < 4; rr++)
      for (int cc = -1; cc < 4; cc++)
        if (rr < 0 || rr > 2 || cc < 0 || cc > 2)
          if (px(tw, ar + rr, cmin + cc))
            for (int dr = 0; dr < 3; dr++)
              for (int dc = 0; dc < 3; dc++)
                if (g[3*dr + dc] && (rr - dr) <= 1 && (dr - rr) <= 1 &&
                    (cc - dc) <= 1 && (dc - cc) <= 1)
                  cont = 1'b0;
    cand           = '0;
    cand.sensor    = sensor;
    cand.crow      = crow;
    cand.ccol      = ccol;
    cand.arow      = 4'(ar);
    cand.acol      = 3'(ac);
    cand.grid      = g;
    cand.contained = cont;
    cand.boundary  = (ar == 0) || (ar + 2 >= int'(MAT_ROWS) - 1) ||
                     (cmin <= 0) || (cmin + 2 >= int'(MAT_COLS) - 1);
  end

  always_comb begin
    f_wr   = 1'b0;
    f_data = cand;
    if (state == EXTRACT && pflag != '0) begin
      f_wr = !f_hold;
    end else if (state == SEND_EE) begin
      f_wr        = !f_hold;
      f_data      = '0;
      f_data.ee   = 1'b1;
      f_data.sensor = sensor;
      f_data.grid = 9'(evid);
    end
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE; tw <= '0; pflag <= '0; crow <= '0; ccol <= '0;
      sensor <= 1'b0; evid <= '0;
    end else begin
      case (state)
        IDLE: if (copy) begin
          tw     <= copy_pix;
          crow   <= copy_crow;
          ccol   <= copy_ccol;
          sensor <= copy_sensor;
          evid   <= copy_id;
          state  <= copy_alloc ? CHECK : SEND_EE;
        end
        CHECK: begin
          pflag <= pflag_next;
          state <= EXTRACT;
        end
        EXTRACT: begin
          if (pflag == '0) state <= SEND_EE;
          else if (!f_hold) pflag[addr] <= 1'b0;    // pixel flush
        end
        SEND_EE: if (!f_hold) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  sync_fifo #(.W(CAND_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_valid(f_wr), .wr_data(CAND_W'(f_data)), .wr_hold(f_hold),
    .rd_valid(out_valid), .rd_data(out_data), .rd_hold(out_hold),
    .max_clear(1'b0), .occupancy(occ), .max_occupancy(occ_max), .err_loss);
endmodule
