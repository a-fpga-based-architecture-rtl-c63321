// matrix_cell: one sparse bit matrix of a matrix chain (input side).
//
// A matrix covers 3x3 SPs, i.e. 12 pixel rows x 6 pixel columns, anywhere on the
// sensor. It starts empty. The first SP arriving on input line 0 of an empty matrix
// allocates it: the SP fills the centre and its SP row/column become the matrix centre.
// Afterwards every SP arriving on either line whose SP row and column are within one of
// the centre is stored at its place in the matrix (its hitmap ORed in); any other SP
// is passed on through the output register of its line. Line 1 is held for the cycle
// in which line 0 allocates the matrix (only line 0 may allocate). The chain swaps the
// lines between consecutive matrices, so an SP refused on line 1 meets the next matrix
// on its line 0.
// An EE word stops its line (hold) until the EE word of the other line has arrived.
// Then, as soon as the cluster finder behind the matrix is free, the whole matrix is
// copied into it in one cycle (copy pulse with the pixel map and centre), both EE words
// are passed on, the matrix becomes empty again, and sync_err pulses if the two event
// identifiers differed.
// Timing: one register stage per matrix on the forwarding path; hold_out depends
// combinationally on hold_in, so back-pressure reaches the head of the chain at once.
// Pixel index in copy_pix: row*6 + column, row 0..11 and column 0..5 counted from the
// matrix corner at the lowest SP row and column.
//
// Lint note: the pixel placement reads only the position and hitmap fields of an SP word
// (bits 22:0), so the upper bits of its argument are unused.
module matrix_cell
  import velo_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  input  logic [1:0]            in_valid,
  input  logic [SP_W-1:0]       in_data [2],
  output logic [1:0]            hold_out,
  output logic [1:0]            out_valid,
  output logic [SP_W-1:0]       out_data [2],
  input  logic [1:0]            hold_in,
  input  logic                  finder_busy,
  output logic                  copy,
  output logic                  copy_alloc,
  output logic [MAT_PIX-1:0]    copy_pix,
  output logic [SP_ROW_W-1:0]   copy_crow,
  output logic [SP_COL_W-1:0]   copy_ccol,
  output logic                  copy_sensor,
  output logic [EVID_W-1:0]     copy_id,
  output logic                  sync_err
);
  logic                alloc;
  logic [SP_ROW_W-1:0] crow;
  logic [SP_COL_W-1:0] ccol;
  logic                csensor;
  logic [MAT_PIX-1:0]  pix;
  logic [1:0]          ee_seen;
  logic [EVID_W-1:0]   ee_idr [2];
  logic [1:0]          ov;
  logic [SP_W-1:0]     od [2];

  sp_t        w [2];
  logic [1:0] out_free, acc, in_rng;
  logic       init_now, close;

  function automatic logic near(input logic [SP_COL_W-1:0] a, input logic [SP_COL_W-1:0] b);
    return (a == b) || (a == b + 1'b1) || (b == a + 1'b1);
  endfunction

  // pixels an SP sets in a matrix centred on (crow, ccol)
  function automatic logic [MAT_PIX-1:0] place(input sp_t s, input logic [SP_ROW_W-1:0] cr,
                                               input logic [SP_COL_W-1:0] cc);
    logic [MAT_PIX-1:0] m;
    int dr, dc;
    m  = '0;
    dr = int'(s.row) - int'(cr) + 1;
    dc = int'(s.col) - int'(cc) + 1;
    for (int sr = 0; sr < 4; sr++)
      for (int sc = 0; sc < 2; sc++)
        if (s.hitmap[4*sc + sr] && dr >= 0 && dr < 3 && dc >= 0 && dc < 3)
          m[(dr*4 + sr)*int'(MAT_COLS) + dc*2 + sc] = 1'b1;
    return m;
  endfunction

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      w[i]        = sp_t'(in_data[i]);
      out_free[i] = !ov[i] || !hold_in[i];
      in_rng[i]   = alloc && (w[i].sensor == csensor) &&
                    near(SP_COL_W'(w[i].row), SP_COL_W'(crow)) && near(w[i].col, ccol);
    end
    hold_out[0] = ee_seen[0] || !out_free[0];
    init_now    = !alloc && in_valid[0] && !hold_out[0] && !w[0].ee;
    hold_out[1] = ee_seen[1] || !out_free[1] || init_now;
    acc   = in_valid & ~hold_out;
    close = (ee_seen == 2'b11) && !finder_busy && (out_free == 2'b11);
  end

  assign copy        = close;
  assign copy_alloc  = alloc;
  assign copy_pix    = pix;
  assign copy_crow   = crow;
  assign copy_ccol   = ccol;
  assign copy_sensor = csensor;
  assign copy_id     = ee_idr[0];
  assign sync_err    = close && (ee_idr[0] != ee_idr[1]);
  assign out_valid   = ov;
  assign out_data    = od;

  always_ff @(posedge clk) begin
    if (rst) begin
      alloc <= 1'b0; crow <= '0; ccol <= '0; csensor <= 1'b0; pix <= '0;
      ee_seen <= 2'b00; ee_idr[0] <= '0; ee_idr[1] <= '0;
      ov <= 2'b00; od[0] <= '0; od[1] <= '0;
    end else begin
      logic [MAT_PIX-1:0] npix;
      logic [1:0]         fwd;
      npix = pix;
      fwd  = 2'b00;
      for (int i = 0; i < 2; i++) begin
        if (acc[i]) begin
          if (w[i].ee) begin
            ee_seen[i] <= 1'b1;
            ee_idr[i]  <= ee_id(in_data[i]);
          end else if (in_rng[i]) begin
            npix = npix | place(w[i], crow, ccol);
          end else if (i == 0 && init_now) begin
            npix = npix | place(w[i], w[i].row, w[i].col);
          end else begin
            fwd[i] = 1'b1;
          end
        end
      end
      if (init_now) begin
        alloc   <= 1'b1;
        crow    <= w[0].row;
        ccol    <= w[0].col;
        csensor <= w[0].sensor;
      end
      pix <= npix;
      for (int i = 0; i < 2; i++) begin
        if (close) begin
          ov[i] <= 1'b1;
          od[i] <= make_ee(ee_idr[i]);
        end else if (fwd[i]) begin
          ov[i] <= 1'b1;
          od[i] <= in_data[i];
        end else if (!hold_in[i]) begin
          ov[i] <= 1'b0;
        end
      end
      if (close) begin
        alloc   <= 1'b0;
        pix     <= '0;
        ee_seen <= 2'b00;
      end
    end
  end
endmodule
