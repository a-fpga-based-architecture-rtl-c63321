// Testbench of sp_lut: all 256 hitmaps. The reference finds the clusters of the 4x2 SP
// with a generic 8-neighbour flood fill (no use of the run rule) and orders them by
// their lowest pixel row. Checks the number of clusters, both centroids
// (floor(4*sum/npix)) and the topology bits (bit 2*(row-first row)+column, first three
// rows of the cluster).
module tb_sp_lut;
  logic [7:0] hitmap;
  logic [1:0] nclu;
  logic [3:0] row_q [2];
  logic [2:0] col_q [2];
  logic [5:0] topo [2];
  sp_lut dut (.hitmap, .nclu, .row_q, .col_q, .topo);
  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int h = 0; h < 256; h++) begin
      int comp [8];
      int n;
      int np [2], sr [2], sc [2], first [2];
      logic [5:0] tp [2];
      hitmap = 8'(h);
      n = 0;
      #1;
      foreach (comp[i]) comp[i] = -1;
      for (int i = 0; i < 8; i++) if (h[i] && comp[i] < 0) begin
        bit grown;
        grown = 1'b1;
        comp[i] = n;
        while (grown) begin
          grown = 1'b0;
          for (int a = 0; a < 8; a++) if (comp[a] == n)
            for (int b = 0; b < 8; b++)
              if (h[b] && comp[b] < 0 && (a % 4 - b % 4) <= 1 && (b % 4 - a % 4) <= 1) begin
                comp[b] = n; grown = 1'b1;
              end
        end
        n++;
      end
      // components are numbered by their lowest pixel row (pixel index = 4*col + row,
      // row-major search finds the lowest row first only per column, so reorder)
      for (int k = 0; k < 2; k++) begin np[k] = 0; sr[k] = 0; sc[k] = 0; first[k] = 99; tp[k] = '0; end
      for (int i = 0; i < 8; i++) if (comp[i] >= 0 && comp[i] < 2 && i % 4 < first[comp[i]])
        first[comp[i]] = i % 4;
      if (n == 2 && first[1] < first[0])
        for (int i = 0; i < 8; i++) if (comp[i] >= 0) comp[i] = 1 - comp[i];
      if (n == 2 && first[1] < first[0]) begin int t; t = first[0]; first[0] = first[1]; first[1] = t; end
      for (int i = 0; i < 8; i++) if (comp[i] >= 0 && comp[i] < 2) begin
        int k, r, c;
        k = comp[i]; r = i % 4; c = i / 4;
        np[k]++; sr[k] += r; sc[k] += c;
        if (r - first[k] < 3) tp[k][2*(r - first[k]) + c] = 1'b1;
      end
      checks++;
      if (int'(nclu) != n) begin failures++; $display("FAIL %02h: nclu %0d expected %0d", h, nclu, n); end
      for (int k = 0; k < n && k < 2; k++) begin
        checks++;
        if (int'(row_q[k]) != 4*sr[k]/np[k] || int'(col_q[k]) != 4*sc[k]/np[k] || topo[k] != tp[k]) begin
          failures++;
          $display("FAIL %02h cluster %0d: got r%0d c%0d t%b expected r%0d c%0d t%b", h, k,
                   row_q[k], col_q[k], topo[k], 4*sr[k]/np[k], 4*sc[k]/np[k], tp[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
