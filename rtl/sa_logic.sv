// sa_logic: the sense-amplifier row of one tile with its compute extensions.
//
// Per column (paper Fig. 2(b) and Fig. 3(c)): the BL amplifier gives AND and
// the BLB amplifier NOR of the activated cells; a NOR gate on the two gives
// their XOR. A MUX in front of a clocked latch Q with enable chooses either a
// sensed value or the latch of the column 8 places to the left, S(i-8), so
// the latched row can shift right by one byte per cycle. That shift, with the
// S-box entry entering lane 0 on the left, performs the fused
// SubBytes/ShiftRows of Fig. 4.
//
// Lane 0 (bits 39:32) is the S-box lane, lanes 1..4 hold the four bytes of a
// state row. Modes (one per clock, see sealer_pkg::sa_mode_e):
//   SA_READ          all lanes latch the BL sense (plain read)
//   SA_XOR           all lanes latch NOR(BL, BLB), the XOR of two rows
//   SA_LOOKUP        lane 0 latches the S-box entry, data lanes hold
//   SA_SHIFT_LOOKUP  data lanes shift right one byte, lane 0 latches S-box
//   SA_SHIFT         data lanes shift right one byte, lane 0 holds
// The plain-read input to the latch MUX is not drawn in Fig. 3(c) and is this
// design's addition, as is the reset of the latches.
//
// xor_out (combinational) is the XOR sense, used by the S-box input MUX.
// q_x2 is the latched row with each data byte multiplied by 2 in GF(2^8): the
// paper forms 2*B "by shifting ... to the left by one bit"; this design adds
// the conditional 0x1b reduction that AES requires for a correct product.
module sa_logic
  import sealer_pkg::*;
#(
  parameter int unsigned LANES = 5,
  parameter int unsigned COLS  = 8 * LANES
) (
  input  logic            clk,
  input  logic            rst_n,
  input  sa_mode_e        mode,
  input  logic [COLS-1:0] bl_and,
  input  logic [COLS-1:0] blb_nor,
  output logic [COLS-1:0] xor_out,
  output logic [COLS-1:0] q,
  output logic [COLS-1:0] q_x2
);
  localparam int unsigned DW = COLS - 8;   // data columns

  assign xor_out = ~(bl_and | blb_nor);

  logic [COLS-1:0] d;
  logic            en_sbox, en_data;

  always_comb begin
    d       = q;
    en_sbox = 1'b0;
    en_data = 1'b0;
    unique case (mode)
      SA_READ:         begin d = bl_and;  en_sbox = 1'b1; en_data = 1'b1; end
      SA_XOR:          begin d = xor_out; en_sbox = 1'b1; en_data = 1'b1; end
      SA_LOOKUP:       begin d[COLS-1 -: 8] = bl_and[COLS-1 -: 8]; en_sbox = 1'b1; end
      SA_SHIFT_LOOKUP: begin
        d[COLS-1 -: 8] = bl_and[COLS-1 -: 8];
        d[DW-1:0]      = q[COLS-1:8];          // S(i) <= S(i-8)
        en_sbox = 1'b1; en_data = 1'b1;
      end
      SA_SHIFT:        begin d[DW-1:0] = q[COLS-1:8]; en_data = 1'b1; end
      default:         ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else begin
      if (en_sbox) q[COLS-1 -: 8] <= d[COLS-1 -: 8];
      if (en_data) q[DW-1:0]      <= d[DW-1:0];
    end
  end

  always_comb begin
    q_x2 = q;
    for (int unsigned l = 1; l < LANES; l++)
      q_x2[COLS-1-8*l -: 8] = xtime(q[COLS-1-8*l -: 8]);
  end
endmodule
