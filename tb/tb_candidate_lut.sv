// Testbench of candidate_lut: all 512 3x3 grids (bit 3*row+col). Checks the pixel
// count, the centroid floor(4*sum/npix) in rows and columns, and the topology
// identifier {npix-1, centre pixel}.
module tb_candidate_lut;
  logic [8:0] grid;
  logic [3:0] npix, row_q, col_q;
  logic [4:0] topo;
  candidate_lut dut (.grid, .npix, .row_q, .col_q, .topo);
  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 1; g < 512; g++) begin
      int n, sr, sc;
      n = 0; sr = 0; sc = 0;
      grid = 9'(g);
      #1;
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++)
        if (g[3*r + c]) begin n++; sr += r; sc += c; end
      checks++;
      if (int'(npix) != n || int'(row_q) != 4*sr/n || int'(col_q) != 4*sc/n ||
          topo != {4'(n - 1), g[4]}) begin
        failures++;
        $display("FAIL grid %03h: n %0d r %0d c %0d t %b", g, npix, row_q, col_q, topo);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
