// switch4: 4-to-4 switch arranging SPs by isolation flag and by sensor.
//
// Two dispatchers route the four input streams by isolation flag; two more route the
// results by sensor, giving the four outputs:
//   out[0] non-isolated SPs of sensor 0   out[1] non-isolated SPs of sensor 1
//   out[2] isolated SPs of sensor 0       out[3] isolated SPs of sensor 1
// Any input word can reach any output. EE words reach every output, merged back to one
// EE per output by the mergers, which also check that the event identifiers agree.
// Interface: four valid/hold input streams, four valid/hold output streams, and the
// OR of the eight mergers' sync-error pulses. Zero latency, one word per cycle per
// output when nothing is held.
module switch4
  import velo_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  logic [3:0]      valid_in,
  input  logic [SP_W-1:0] data_in [4],
  output logic [3:0]      hold_out,
  output logic [3:0]      valid_out,
  output logic [SP_W-1:0] data_out [4],
  input  logic [3:0]      hold_in,
  output logic            sync_err
);
  logic [1:0]      se [4];
  logic [1:0]      a_v, b_v, a_h, b_h;
  logic [SP_W-1:0] a_d [2];
  logic [SP_W-1:0] b_d [2];
  logic [SP_W-1:0] in_a [2], in_b [2], in_s [2], in_si [2];
  logic [SP_W-1:0] o_s [2], o_si [2];

  assign in_a[0] = data_in[0];
  assign in_a[1] = data_in[1];
  assign in_b[0] = data_in[2];
  assign in_b[1] = data_in[3];

  // first stage: by isolation flag
  dispatcher #(.W(SP_W), .SEL_BIT(ISO_BIT)) u_if_a (
    .clk, .rst, .valid_in(valid_in[1:0]), .data_in(in_a), .hold_out(hold_out[1:0]),
    .valid_out(a_v), .data_out(a_d), .hold_in(a_h), .sync_err(se[0]));
  dispatcher #(.W(SP_W), .SEL_BIT(ISO_BIT)) u_if_b (
    .clk, .rst, .valid_in(valid_in[3:2]), .data_in(in_b), .hold_out(hold_out[3:2]),
    .valid_out(b_v), .data_out(b_d), .hold_in(b_h), .sync_err(se[1]));

  // second stage: by sensor
  assign in_s[0]  = a_d[0];
  assign in_s[1]  = b_d[0];
  assign in_si[0] = a_d[1];
  assign in_si[1] = b_d[1];

  logic [1:0] s_hold, si_hold, s_v, si_v;
  dispatcher #(.W(SP_W), .SEL_BIT(SENSOR_BIT)) u_sen (
    .clk, .rst, .valid_in({b_v[0], a_v[0]}), .data_in(in_s), .hold_out(s_hold),
    .valid_out(s_v), .data_out(o_s), .hold_in(hold_in[1:0]), .sync_err(se[2]));
  dispatcher #(.W(SP_W), .SEL_BIT(SENSOR_BIT)) u_sen_if (
    .clk, .rst, .valid_in({b_v[1], a_v[1]}), .data_in(in_si), .hold_out(si_hold),
    .valid_out(si_v), .data_out(o_si), .hold_in(hold_in[3:2]), .sync_err(se[3]));

  assign a_h = {si_hold[0], s_hold[0]};
  assign b_h = {si_hold[1], s_hold[1]};

  assign valid_out = {si_v, s_v};
  assign data_out[0] = o_s[0];
  assign data_out[1] = o_s[1];
  assign data_out[2] = o_si[0];
  assign data_out[3] = o_si[1];
  assign sync_err = |{se[0], se[1], se[2], se[3]};
endmodule
