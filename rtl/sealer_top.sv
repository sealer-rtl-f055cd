// sealer_top: in-SRAM AES-128 encryption engine built from SRAM subarrays.
//
// NUM_SUBARRAYS subarrays of 256x256 bits (default 32: 192 blocks encrypted
// at once, the largest batch the paper evaluates) share one controller and
// one key-expansion unit. Each subarray holds 6 tiles x 51 block slots, so the
// engine stores 306 blocks per subarray and encrypts the 6*NUM_SUBARRAYS
// blocks of one slot per CMD_ENC, in place, in ENC_CYCLES cycles. Between
// encryptions the subarrays are ordinary SRAM reached through CMD_READ and
// CMD_WRITE of one 256-bit row.
//
// Interface: one command at a time on a valid/ready handshake (see
// sealer_ctrl). done pulses when a command finishes; rd_valid pulses with
// rd_data, the row a CMD_READ returned. cmd_ready stays low for the 256-cycle
// S-box initialisation after reset (sbox_ready). The cipher key enters on
// cmd_key with CMD_KEY; where it comes from (the paper assumes an on-chip
// random number generator) is outside this design.
module sealer_top
  import sealer_pkg::*;
#(
  parameter int unsigned NUM_SUBARRAYS = 32,
  parameter int unsigned SW = (NUM_SUBARRAYS > 1) ? $clog2(NUM_SUBARRAYS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cmd_op_e              cmd_op,
  input  logic [SW-1:0]        cmd_sub,
  input  logic [7:0]           cmd_row,
  input  logic [5:0]           cmd_slot,
  input  logic [SUB_COLS-1:0]  cmd_wdata,
  input  logic [ROW_BYTES-1:0] cmd_bmask,
  input  logic [127:0]         cmd_key,
  output logic                 done,
  output logic                 rd_valid,
  output logic [SUB_COLS-1:0]  rd_data,
  output logic                 sbox_ready
);
  array_ctrl_t         actrl;
  logic [SUB_COLS-1:0] ext_wdata;
  logic                sub_all;
  logic [SW-1:0]       sub_sel;
  logic                ke_load, ke_step;
  logic [127:0]        ke_key, ke_rk;
  logic [3:0]          ke_round;
  logic [SUB_COLS-1:0] sub_q [NUM_SUBARRAYS];

  sealer_ctrl #(.NUM_SUBARRAYS(NUM_SUBARRAYS), .SW(SW)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_sub, .cmd_row,
    .cmd_slot, .cmd_wdata, .cmd_bmask, .cmd_key, .done, .rd_valid, .sbox_ready,
    .ke_load, .ke_key, .ke_step, .ke_rk, .actrl, .ext_wdata, .sub_all, .sub_sel);

  key_expand u_key (
    .clk, .rst_n, .load(ke_load), .key(ke_key), .step(ke_step),
    .rk(ke_rk), .round(ke_round));

  for (genvar s = 0; s < NUM_SUBARRAYS; s++) begin : g_sub
    sealer_subarray u_sub (
      .clk, .rst_n, .en(sub_all || (32'(sub_sel) == s)), .ctrl(actrl),
      .ext_wdata, .q(sub_q[s]));
  end

  assign rd_data = sub_q[sub_sel];

  a_round_in_range: assert property (@(posedge clk) disable iff (!rst_n) ke_round <= 4'd10)
    else $error("key expansion past round 10");
endmodule
