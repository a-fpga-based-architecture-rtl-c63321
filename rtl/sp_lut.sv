// sp_lut: cluster look-up for a single 4x2-pixel SP.
//
// For each of the 256 hitmaps it gives the clusters inside the SP and the centre of
// each. Within a 2-pixel-wide SP, two active pixels in the same or in adjacent pixel
// rows always touch (8-neighbour connectivity), so a cluster is a run of consecutive
// occupied pixel rows and there are at most two clusters (runs). The table is written
// as this rule rather than as 256 stored entries; synthesis turns it into the same LUT.
// Outputs per cluster k (0 = the run starting at the lower pixel row):
//   row_q[k] / col_q[k]: centroid inside the SP in quarter pixels, floor(4*sum/npix),
//                        i.e. integer pixel in bits [.. :2], quarter in bits [1:0];
//   topo[k]:  6-bit topology identifier, bit 2*(row-first_row)+col for the first three
//             rows of the run (exact for clusters spanning up to three pixel rows).
// The run rule, the rounding and the identifier code are this design's choices; the
// paper gives the LUT's purpose (centroid of up to two clusters per SP), not its content.
// Purely combinational.
module sp_lut (
  input  logic [7:0] hitmap,
  output logic [1:0] nclu,
  output logic [3:0] row_q [2],
  output logic [2:0] col_q [2],
  output logic [5:0] topo  [2]
);
  logic [3:0] occ;
  logic [3:0] npix [2];
  logic [4:0] sumr [2];
  logic [2:0] sumc_c [2];
  logic [1:0] first [2];
  logic       run;  // index of the run being built
  logic       started;
  int         dr;

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      npix[k] = '0; sumr[k] = '0; sumc_c[k] = '0; first[k] = '0; topo[k] = '0;
      row_q[k] = '0; col_q[k] = '0;
    end
    dr = 0;
    run = 1'b0;
    started = 1'b0;
    nclu = '0;
    for (int r = 0; r < 4; r++) occ[r] = hitmap[r] | hitmap[4 + r];
    for (int r = 0; r < 4; r++) begin
      if (occ[r]) begin
        if (r == 0 || !occ[r-1]) begin
          if (started) run = 1'b1;
          started = 1'b1;
          first[run] = 2'(r);
          nclu = nclu + 1'b1;
        end
        for (int c = 0; c < 2; c++) begin
          if (hitmap[4*c + r]) begin
            npix[run]   = npix[run] + 1'b1;
            sumr[run]   = sumr[run] + 5'(r);
            sumc_c[run] = sumc_c[run] + 3'(c);
            dr = r - int'(first[run]);
            if (dr < 3) topo[run][2*dr + c] = 1'b1;
          end
        end
      end
    end
    for (int k = 0; k < 2; k++) begin
      if (npix[k] != 0) begin
        row_q[k] = 4'((7'(sumr[k]) * 7'd4) / 7'(npix[k]));
        col_q[k] = 3'((5'(sumc_c[k]) * 5'd4) / 5'(npix[k]));
      end
    end
  end
endmodule
