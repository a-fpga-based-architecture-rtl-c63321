// candidate_lut: centroid look-up for a 3x3 cluster candidate.
//
// grid bit 3*dr+dc is the pixel dr rows and dc columns from the candidate's lowest-row,
// lowest-column corner. The outputs are the centroid relative to that corner in quarter
// pixels, floor(4*sum/npix) (0..8 in each direction), the pixel count, and a 5-bit
// topology identifier {npix-1, centre pixel}. The table is expressed as this arithmetic
// rule (512 entries); the paper specifies the LUT's purpose, the rounding and the
// identifier code are this design's choices. Purely combinational.
module candidate_lut (
  input  logic [8:0] grid,
  output logic [3:0] npix,
  output logic [3:0] row_q,
  output logic [3:0] col_q,
  output logic [4:0] topo
);
  logic [4:0] sumr, sumc;
  always_comb begin
    npix = '0; sumr = '0; sumc = '0;
    for (int dr = 0; dr < 3; dr++)
      for (int dc = 0; dc < 3; dc++)
        if (grid[3*dr + dc]) begin
          npix = npix + 1'b1;
          sumr = sumr + 5'(dr);
          sumc = sumc + 5'(dc);
        end
    if (npix != 0) begin
      row_q = 4'((7'(sumr) * 7'd4) / 7'(npix));
      col_q = 4'((7'(sumc) * 7'd4) / 7'(npix));
    end else begin
      row_q = '0;
      col_q = '0;
    end
    topo = {npix - 4'd1, grid[4]};
  end
endmodule
