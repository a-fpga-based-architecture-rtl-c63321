// velo_cluster_top: real-time cluster finder for one VELO half-module (two sensors).
//
// Data path (one instance of the paper's clustering architecture):
//   decoder (with isolation flagging) -> 8 lane FIFOs -> two 4-to-4 switches
//   -> 8 FIFOs -> 4 x clustering_isolated (isolated SPs, per switch and sensor)
//              -> 2 x clustering_matrices (non-isolated SPs, one chain per sensor,
//                 fed by one line from each switch)
//   -> 8 cluster streams -> encoder_8to1 -> 256-bit output with SOP/EOP.
// Encoder input order (top to bottom of the architecture diagram): isolated S0 and S1
// of switch A, matrix and overflow clusters of sensor 0, matrix and overflow clusters
// of sensor 1, isolated S0 and S1 of switch B.
// Sensor 0 of the pair uses the pattern orientation of sensors 0 and 3, sensor 1 the
// mirrored one of sensors 1 and 2 (an assumption about which sensors form a pair).
// Interface: 256-bit input with valid/SOP/EOP/ready, 256-bit output with
// valid/SOP/EOP/ready. Monitoring: maximum occupancy of the 16 inter-unit FIFOs
// (cleared by max_clear), counts of SPs overflowing the matrix chains and of bypassed
// (too large) event chunks, and an error flag/code/word from error_monitor.
// The whole design runs on one clock; the paper's separate 250 MHz (decoder, encoder)
// and 350 MHz (switch, clustering) domains are not modelled.
//
// Lint note: the occupancy outputs of the lane, switch and matrix FIFOs (l_occ, s_occ,
// fmax) are monitoring taps with no reader in this top; they are left for a status
// register interface, which is outside this design.
module velo_cluster_top
  import velo_pkg::*;
#(
  parameter int unsigned MAX_SP      = 144,
  parameter int unsigned SUB         = 16,
  parameter int unsigned NMAT        = 20,
  parameter int unsigned LFIFO_DEPTH = 16,
  parameter int unsigned MFIFO_DEPTH = 16,
  parameter int unsigned OFIFO_DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [BUS_W-1:0] in_data,
  input  logic             in_valid,
  input  logic             in_sop,
  input  logic             in_eop,
  output logic             in_ready,
  output logic [BUS_W-1:0] out_data,
  output logic             out_valid,
  output logic             out_sop,
  output logic             out_eop,
  input  logic             out_ready,
  input  logic             max_clear,
  output logic [$clog2(LFIFO_DEPTH+1)-1:0] fifo_max [16],
  output logic [31:0]      ovf_count,
  output logic [31:0]      bypass_count,
  output logic             err_flag,
  output logic [3:0]       err_code,
  output logic [15:0]      err_count,
  output logic             err_word_valid
);
  localparam int unsigned OW = $clog2(LFIFO_DEPTH+1);

  // ---------------- decoder ----------------
  logic [LANES-1:0] d_v, d_h;
  logic [SP_W-1:0]  d_d [LANES];
  logic             bypass_pulse, err_frame;

  decoder #(.MAX_SP(MAX_SP), .SUB(SUB)) u_dec (
    .clk, .rst, .in_data, .in_valid, .in_sop, .in_eop, .in_ready,
    .out_valid(d_v), .out_data(d_d), .out_hold(d_h), .bypass_pulse, .err_frame);

  // ---------------- lane FIFOs ----------------
  logic [LANES-1:0] l_v, l_h, l_loss;
  logic [SP_W-1:0]  l_d [LANES];
  logic [OW-1:0]    l_occ [LANES];
  for (genvar k = 0; k < int'(LANES); k++) begin : g_lfifo
    sync_fifo #(.W(SP_W), .DEPTH(LFIFO_DEPTH)) u_f (
      .clk, .rst, .wr_valid(d_v[k]), .wr_data(d_d[k]), .wr_hold(d_h[k]),
      .rd_valid(l_v[k]), .rd_data(l_d[k]), .rd_hold(l_h[k]), .max_clear,
      .occupancy(l_occ[k]), .max_occupancy(fifo_max[k]), .err_loss(l_loss[k]));
  end

  // ---------------- switches ----------------
  logic [3:0]      sa_v, sa_h, sb_v, sb_h;
  logic [SP_W-1:0] sa_in [4], sb_in [4], sa_d [4], sb_d [4];
  logic            sa_err, sb_err;
  for (genvar k = 0; k < 4; k++) begin : g_swin
    assign sa_in[k] = l_d[k];
    assign sb_in[k] = l_d[4+k];
  end
  switch4 u_swa (.clk, .rst, .valid_in(l_v[3:0]), .data_in(sa_in), .hold_out(l_h[3:0]),
                 .valid_out(sa_v), .data_out(sa_d), .hold_in(sa_h), .sync_err(sa_err));
  switch4 u_swb (.clk, .rst, .valid_in(l_v[7:4]), .data_in(sb_in), .hold_out(l_h[7:4]),
                 .valid_out(sb_v), .data_out(sb_d), .hold_in(sb_h), .sync_err(sb_err));

  // ---------------- switch output FIFOs ----------------
  // index: 0..3 = switch A outputs (S0, S1, S0 IF, S1 IF), 4..7 = switch B outputs
  logic [7:0]      w_v, w_h, s_v, s_h, s_loss;
  logic [SP_W-1:0] w_d [8], s_d [8];
  logic [OW-1:0]   s_occ [8];
  assign w_v = {sb_v, sa_v};
  assign {sb_h, sa_h} = w_h;
  for (genvar k = 0; k < 4; k++) begin : g_swout
    assign w_d[k]   = sa_d[k];
    assign w_d[4+k] = sb_d[k];
  end
  for (genvar k = 0; k < 8; k++) begin : g_sfifo
    sync_fifo #(.W(SP_W), .DEPTH(LFIFO_DEPTH)) u_f (
      .clk, .rst, .wr_valid(w_v[k]), .wr_data(w_d[k]), .wr_hold(w_h[k]),
      .rd_valid(s_v[k]), .rd_data(s_d[k]), .rd_hold(s_h[k]), .max_clear,
      .occupancy(s_occ[k]), .max_occupancy(fifo_max[8+k]), .err_loss(s_loss[k]));
  end

  // ---------------- cluster reconstruction ----------------
  logic [LANES-1:0] e_v, e_h;
  logic [SP_W-1:0]  e_d [LANES];
  logic [3:0]       iso_err, iso_loss;
  logic [1:0]       mat_err, mat_loss;
  logic [1:0]       ovf_p [2];

  // isolated: A.S0IF -> lane 0, A.S1IF -> lane 1, B.S0IF -> lane 6, B.S1IF -> lane 7
  localparam int ISO_SRC [4] = '{2, 3, 6, 7};
  localparam int ISO_DST [4] = '{0, 1, 6, 7};
  for (genvar k = 0; k < 4; k++) begin : g_iso
    logic [$clog2(OFIFO_DEPTH+1)-1:0] fmax;
    clustering_isolated #(.OVERFLOW(1'b0), .FIFO_DEPTH(OFIFO_DEPTH)) u_iso (
      .clk, .rst, .in_valid(s_v[ISO_SRC[k]]), .in_data(s_d[ISO_SRC[k]]),
      .in_hold(s_h[ISO_SRC[k]]),
      .out_valid(e_v[ISO_DST[k]]), .out_data(e_d[ISO_DST[k]]), .out_hold(e_h[ISO_DST[k]]),
      .sync_err(iso_err[k]), .fifo_max(fmax), .err_loss(iso_loss[k]));
  end

  // matrices: sensor j takes line 0 from switch A output j, line 1 from switch B output j
  for (genvar j = 0; j < 2; j++) begin : g_mat
    logic [SP_W-1:0] din [2];
    logic [1:0]      hin;
    assign din[0] = s_d[j];
    assign din[1] = s_d[4+j];
    assign s_h[j]   = hin[0];
    assign s_h[4+j] = hin[1];
    clustering_matrices #(.NMAT(NMAT), .ORIENT(j[0]), .MFIFO_DEPTH(MFIFO_DEPTH),
                          .OFIFO_DEPTH(OFIFO_DEPTH)) u_mat (
      .clk, .rst, .in_valid({s_v[4+j], s_v[j]}), .in_data(din), .in_hold(hin),
      .out_valid(e_v[2+2*j]), .out_data(e_d[2+2*j]), .out_hold(e_h[2+2*j]),
      .ovf_valid(e_v[3+2*j]), .ovf_data(e_d[3+2*j]), .ovf_hold(e_h[3+2*j]),
      .ovf_pulse(ovf_p[j]), .sync_err(mat_err[j]), .err_loss(mat_loss[j]));
  end

  // ---------------- encoder ----------------
  logic enc_err;
  encoder_8to1 u_enc (
    .clk, .rst, .in_valid(e_v), .in_data(e_d), .in_hold(e_h),
    .out_data, .out_valid, .out_sop, .out_eop, .out_ready, .sync_err(enc_err));

  // ---------------- monitoring and errors ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      ovf_count <= '0;
      bypass_count <= '0;
    end else begin
      ovf_count    <= ovf_count + 32'(ovf_p[0][0]) + 32'(ovf_p[0][1])
                                + 32'(ovf_p[1][0]) + 32'(ovf_p[1][1]);
      bypass_count <= bypass_count + 32'(bypass_pulse);
    end
  end

  // error codes: 0 frame, 1/2 switch A/B sync, 3 isolated sync, 4/5 matrix sync (S0/S1),
  // 6 encoder sync, 7 lane FIFO loss, 8 switch FIFO loss, 9 isolated loss, 10 matrix loss
  error_monitor #(.NSRC(16)) u_err (
    .clk, .rst,
    .err_in({5'b0, |mat_loss, |iso_loss, |s_loss, |l_loss, enc_err, mat_err[1], mat_err[0],
             |iso_err, sb_err, sa_err, err_frame}),
    .err_flag, .err_code, .err_count, .err_word_valid);
endmodule
