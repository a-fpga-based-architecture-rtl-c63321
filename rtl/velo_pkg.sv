// velo_pkg: word formats and constants shared by the VELO cluster-finder blocks.
//
// Three kinds of 32-bit words travel between the blocks:
//  * SuperPixel (SP) word: a 4x2-pixel group with its 8-bit hitmap, 6-bit SP row,
//    9-bit SP column and 1-bit sensor identifier (the field widths follow the paper;
//    the bit positions, the isolation bit and the hitmap bit order are this design's
//    own choice).
//  * EndEvent (EE) word: bit 31 set, 5-bit event identifier in bits 4:0. It separates
//    the events on every internal stream. Bit 31 is the "reserved for internal use"
//    bit of the cluster format, so the same marker works on SP and cluster streams.
//  * Cluster word: the output format of the paper's cluster-format figure, bit for bit
//    (bit 30 tells isolated-SP clusters from matrix clusters).
// Inside a 4x2 SP, hitmap bit index = 4*pixel_column + pixel_row (row 0..3, column 0..1).
//
// Lint note: SP_PIX_ROWS and SP_PIX_COLS document the SP geometry and are not read by
// every configuration; ee_id reads only the identifier bits of an EE word.
package velo_pkg;

  localparam int unsigned SP_W       = 32;   // SP, EE and cluster word width
  localparam int unsigned LANES      = 8;    // SPs per 256-bit input word
  localparam int unsigned BUS_W      = SP_W * LANES;
  localparam int unsigned EVID_W     = 5;    // event identifier width in EE words
  localparam int unsigned SP_ROW_W   = 6;    // 256 pixel rows / 4
  localparam int unsigned SP_COL_W   = 9;    // 768 pixel columns / 2
  localparam int unsigned PIX_ROW_W  = 8;    // integer pixel row in cluster words
  localparam int unsigned PIX_COL_W  = 10;   // integer pixel column in cluster words
  localparam int unsigned SP_PIX_ROWS = 4;   // pixel rows in an SP
  localparam int unsigned SP_PIX_COLS = 2;   // pixel columns in an SP
  localparam int unsigned MAT_ROWS   = 12;   // pixel rows of a matrix (3 SPs)
  localparam int unsigned MAT_COLS   = 6;    // pixel columns of a matrix (3 SPs)
  localparam int unsigned MAT_PIX    = MAT_ROWS * MAT_COLS;  // 72

  localparam int unsigned ISO_BIT    = 24;   // isolation flag position in SP words
  localparam int unsigned SENSOR_BIT = 23;   // sensor identifier position in SP words

  typedef struct packed {
    logic                ee;        // 0 for an SP
    logic [5:0]          rsvd;
    logic                iso;       // 1: no active neighbour SP in the event
    logic                sensor;    // sensor within the pair
    logic [SP_COL_W-1:0] col;
    logic [SP_ROW_W-1:0] row;
    logic [7:0]          hitmap;
  } sp_t;

  // Cluster candidate word written by a cluster finder into its matrix FIFO.
  typedef struct packed {
    logic                ee;        // EE marker; event id then in grid[4:0]
    logic                sensor;
    logic [SP_ROW_W-1:0] crow;      // SP row of the matrix centre
    logic [SP_COL_W-1:0] ccol;      // SP column of the matrix centre
    logic [3:0]          arow;      // anchor pixel row inside the matrix (0..11)
    logic [2:0]          acol;      // anchor pixel column inside the matrix (0..5)
    logic [8:0]          grid;      // 3x3 candidate, bit 3*dr+dc
    logic                contained; // no active pixel touches the grid from outside
    logic                boundary;  // grid touches the matrix boundary
  } cand_t;

  localparam int unsigned CAND_W = $bits(cand_t);

  function automatic logic is_ee(input logic [SP_W-1:0] w);
    return w[SP_W-1];
  endfunction

  function automatic logic [EVID_W-1:0] ee_id(input logic [SP_W-1:0] w);
    return w[EVID_W-1:0];
  endfunction

  function automatic logic [SP_W-1:0] make_ee(input logic [EVID_W-1:0] id);
    return {1'b1, {(SP_W-1-EVID_W){1'b0}}, id};
  endfunction

  // Cluster word of an isolated (or overflow) SP: bit 30 = 1, bit 29 = flag
  // (1 = SP overflowed the matrix chain), bits 28:23 = 6-bit topology identifier.
  function automatic logic [SP_W-1:0] make_iso_cluster(
      input logic overflow, input logic [5:0] topo, input logic sensor,
      input logic [PIX_COL_W-1:0] icol, input logic [1:0] fcol,
      input logic [PIX_ROW_W-1:0] irow, input logic [1:0] frow);
    return {1'b0, 1'b1, overflow, topo, sensor, icol, fcol, irow, frow};
  endfunction

  // Cluster word of a matrix cluster: bit 30 = 0, bits 29:28 = {contained, boundary},
  // bits 27:23 = 5-bit topology identifier.
  function automatic logic [SP_W-1:0] make_mat_cluster(
      input logic contained, input logic boundary, input logic [4:0] topo,
      input logic sensor,
      input logic [PIX_COL_W-1:0] icol, input logic [1:0] fcol,
      input logic [PIX_ROW_W-1:0] irow, input logic [1:0] frow);
    return {1'b0, 1'b0, contained, boundary, topo, sensor, icol, fcol, irow, frow};
  endfunction

endpackage
