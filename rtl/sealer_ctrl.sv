// sealer_ctrl: sequencer of the in-SRAM AES engine.
//
// It turns host commands into one row operation per clock (array_ctrl_t),
// broadcast to every subarray, so all tiles of all subarrays encrypt the
// block in the same slot together.
//
// After reset it writes the S-box into lane 0 of rows 0..255 of every tile
// (256 cycles, sbox_ready rises at the end). Commands (valid/ready handshake,
// one at a time):
//   CMD_READ   activate cmd_row of subarray cmd_sub, latch it; rd_valid and
//              done pulse on the next cycle, with the row in the SA latches.
//   CMD_WRITE  write cmd_wdata to cmd_row of subarray cmd_sub under cmd_bmask
//              (the S-box lanes are always masked off); done one cycle later.
//   CMD_KEY    expand cmd_key and write round key j, row r into row 204+4j+r
//              of every tile (44 writes); done after the last one.
//   CMD_ENC    encrypt slot cmd_slot (rows 4k..4k+3) of every tile in place;
//              done exactly ENC_CYCLES cycles after the command is accepted.
//
// Encryption schedule (paper Sec. 4.2-4.4): for round i = 0..9 and each state
// row r: XOR data row r with round key i row r (3 cycles, AddRoundKey);
// fused SubBytes/ShiftRows with the two rows still active (FIFO prefill, then
// T1..T5 of Fig. 4); write the row back; for i < 9 also write 2*row into row
// 248+r. For i < 9 MixColumns follows (Fig. 5): T_c = (B0^B1)^(B2^B3) through
// rows 252/253, then B'_r = ((2B_r ^ T) ^ 2B_(r+1)) ^ B_r through row 253,
// overwriting B_r. Finally each row is XORed with round key 10 and written.
// The order in which rows, rounds and MixColumns steps are issued follows the
// paper; the single-cycle FIFO prefill, the cycle costs of writes (1) and of
// the done cycle, and the command set are this design's choices.
module sealer_ctrl
  import sealer_pkg::*;
#(
  parameter int unsigned NUM_SUBARRAYS = 32,
  parameter int unsigned SW = (NUM_SUBARRAYS > 1) ? $clog2(NUM_SUBARRAYS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host commands
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
  output logic                 sbox_ready,
  // key expansion unit
  output logic                 ke_load,
  output logic [127:0]         ke_key,
  output logic                 ke_step,
  input  logic [127:0]         ke_rk,
  // to the subarrays
  output array_ctrl_t          actrl,
  output logic [SUB_COLS-1:0]  ext_wdata,
  output logic                 sub_all,
  output logic [SW-1:0]        sub_sel
);
  typedef enum logic [3:0] {
    ST_SBOX, ST_IDLE, ST_READ, ST_RDONE, ST_WRITE, ST_KEY,
    ST_ARK, ST_FUSE, ST_WB, ST_WB2, ST_MC, ST_DONE
  } state_e;

  typedef struct packed {
    logic       is_xor;
    logic [7:0] ra;
    logic [7:0] rb;
  } mc_op_t;

  state_e               state;
  logic [7:0]           cnt;
  logic [3:0]           rnd;
  logic [1:0]           row, cyc;
  logic [2:0]           fstep;
  logic [4:0]           mc_idx;
  logic [7:0]           c_row;
  logic [5:0]           c_slot;
  logic [SUB_COLS-1:0]  c_wdata;
  logic [ROW_BYTES-1:0] c_bmask;
  logic [SW-1:0]        c_sub;

  wire accept = cmd_valid && cmd_ready;

  // MixColumns step list of Fig. 5 for the block in `slot`.
  function automatic mc_op_t mc_step(logic [4:0] idx, logic [5:0] slot);
    mc_op_t     o;
    logic [1:0] r;
    logic [2:0] k;
    o = '{is_xor: 1'b0, ra: 8'd0, rb: 8'd0};
    if (idx < 5'd6) begin
      unique case (idx[2:0])
        3'd0: o = '{1'b1, data_row(slot, 2'd0), data_row(slot, 2'd1)};
        3'd1: o = '{1'b0, 8'(T_ROW), 8'd0};
        3'd2: o = '{1'b1, data_row(slot, 2'd2), data_row(slot, 2'd3)};
        3'd3: o = '{1'b0, 8'(I_ROW), 8'd0};
        3'd4: o = '{1'b1, 8'(T_ROW), 8'(I_ROW)};
        default: o = '{1'b0, 8'(T_ROW), 8'd0};
      endcase
    end else begin
      r = 2'((idx - 5'd6) / 5'd6);
      k = 3'((idx - 5'd6) % 5'd6);
      unique case (k)
        3'd0: o = '{1'b1, 8'(DBL_ROW0 + r), 8'(T_ROW)};
        3'd1: o = '{1'b0, 8'(I_ROW), 8'd0};
        3'd2: o = '{1'b1, 8'(I_ROW), 8'(DBL_ROW0 + 2'(r + 2'd1))};
        3'd3: o = '{1'b0, 8'(I_ROW), 8'd0};
        3'd4: o = '{1'b1, 8'(I_ROW), data_row(slot, r)};
        default: o = '{1'b0, data_row(slot, r), 8'd0};
      endcase
    end
    return o;
  endfunction

  // Byte-select order of the fused stage: the byte whose substitute ends up
  // rightmost after ShiftRows is pushed first. MUX index m selects state
  // column 3-m; output column c takes input column (c + r) mod 4.
  function automatic logic [1:0] fuse_sel(logic [1:0] r, logic [1:0] j);
    return 2'd3 - 2'(2'd3 - j + r);
  endfunction

  // Round key row r replicated into the data lanes of every tile.
  function automatic logic [SUB_COLS-1:0] key_row_data(logic [127:0] k, logic [1:0] r);
    logic [SUB_COLS-1:0] d = '0;
    for (int t = 0; t < TILES; t++)
      for (int c = 0; c < 4; c++)
        d[SUB_COLS-1-8*(TILE_LANES*t+1+c) -: 8] = k[127-8*(32'(r)+4*c) -: 8];
    return d;
  endfunction

  function automatic logic [SUB_COLS-1:0] sbox_row_data(logic [7:0] i);
    logic [SUB_COLS-1:0] d = '0;
    for (int t = 0; t < TILES; t++)
      d[SUB_COLS-1-8*TILE_LANES*t -: 8] = sbox_lookup(i);
    return d;
  endfunction

  mc_op_t mc;
  assign mc = mc_step(mc_idx, c_slot);

  // ------------------------------------------------------------ outputs
  always_comb begin
    actrl      = CTRL_IDLE;
    ext_wdata  = '0;
    sub_all    = 1'b1;
    cmd_ready  = (state == ST_IDLE);
    done       = 1'b0;
    rd_valid   = 1'b0;
    ke_load    = accept && (cmd_op == CMD_KEY);
    ke_key     = cmd_key;
    ke_step    = 1'b0;
    unique case (state)
      ST_SBOX: begin
        actrl.wl1_en = 1'b1; actrl.wl1_row = cnt;
        actrl.we = 1'b1; actrl.wsrc = WSRC_EXT; actrl.byte_mask = SBOX_MASK;
        ext_wdata = sbox_row_data(cnt);
      end
      ST_READ: begin
        sub_all = 1'b0;
        actrl.wl1_en = 1'b1; actrl.wl1_row = c_row; actrl.sa_mode = SA_READ;
      end
      ST_RDONE: begin
        sub_all = 1'b0; rd_valid = 1'b1; done = 1'b1;
      end
      ST_WRITE: begin
        sub_all = 1'b0;
        actrl.wl1_en = 1'b1; actrl.wl1_row = c_row;
        actrl.we = 1'b1; actrl.wsrc = WSRC_EXT; actrl.byte_mask = c_bmask & ~SBOX_MASK;
        ext_wdata = c_wdata;
      end
      ST_KEY: begin
        actrl.wl1_en = 1'b1; actrl.wl1_row = key_row(cnt[5:2], cnt[1:0]);
        actrl.we = 1'b1; actrl.wsrc = WSRC_EXT; actrl.byte_mask = DATA_MASK;
        ext_wdata = key_row_data(ke_rk, cnt[1:0]);
        ke_step = (cnt[1:0] == 2'd3);
      end
      ST_ARK: begin
        actrl.wl1_en = 1'b1; actrl.wl1_row = data_row(c_slot, row);
        actrl.wl2_en = 1'b1; actrl.wl2_row = key_row(rnd, row);
        actrl.sa_mode = (cyc == 2'(XOR_CYCLES - 1)) ? SA_XOR : SA_HOLD;
      end
      ST_FUSE: begin
        actrl.wl1_en = 1'b1; actrl.wl1_row = data_row(c_slot, row);
        actrl.wl2_en = 1'b1; actrl.wl2_row = key_row(rnd, row);
        actrl.fifo_push = (fstep <= 3'd3);
        actrl.fifo_sel  = fuse_sel(row, fstep[1:0]);
        unique case (fstep)
          3'd0:       actrl.sa_mode = SA_HOLD;          // prefill
          3'd1:       actrl.sa_mode = SA_LOOKUP;        // T1
          3'd2, 3'd3,
          3'd4:       actrl.sa_mode = SA_SHIFT_LOOKUP;  // T2..T4
          default:    actrl.sa_mode = SA_SHIFT;         // T5
        endcase
      end
      ST_WB: begin
        actrl.wl1_en = 1'b1; actrl.wl1_row = data_row(c_slot, row);
        actrl.we = 1'b1; actrl.wsrc = WSRC_LATCH; actrl.byte_mask = DATA_MASK;
      end
      ST_WB2: begin
        actrl.wl1_en = 1'b1; actrl.wl1_row = 8'(DBL_ROW0 + row);
        actrl.we = 1'b1; actrl.wsrc = WSRC_XTIME; actrl.byte_mask = DATA_MASK;
      end
      ST_MC: begin
        actrl.wl1_en = 1'b1; actrl.wl1_row = mc.ra;
        if (mc.is_xor) begin
          actrl.wl2_en = 1'b1; actrl.wl2_row = mc.rb;
          actrl.sa_mode = (cyc == 2'(XOR_CYCLES - 1)) ? SA_XOR : SA_HOLD;
        end else begin
          actrl.we = 1'b1; actrl.wsrc = WSRC_LATCH; actrl.byte_mask = DATA_MASK;
        end
      end
      ST_DONE: done = 1'b1;
      default: ;
    endcase
  end

  assign sbox_ready = (state != ST_SBOX);
  assign sub_sel    = c_sub;

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_SBOX;
      cnt    <= '0;
      rnd    <= '0;
      row    <= '0;
      cyc    <= '0;
      fstep  <= '0;
      mc_idx <= '0;
      c_row  <= '0;
      c_slot <= '0;
      c_wdata <= '0;
      c_bmask <= '0;
      c_sub  <= '0;
    end else begin
      unique case (state)
        ST_SBOX: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'hff) state <= ST_IDLE;
        end
        ST_IDLE: if (accept) begin
          c_row <= cmd_row; c_slot <= cmd_slot; c_wdata <= cmd_wdata;
          c_bmask <= cmd_bmask; c_sub <= cmd_sub;
          cnt <= '0; rnd <= '0; row <= '0; cyc <= '0;
          unique case (cmd_op)
            CMD_READ:  state <= ST_READ;
            CMD_WRITE: state <= ST_WRITE;
            CMD_KEY:   state <= ST_KEY;
            default:   state <= ST_ARK;
          endcase
        end
        ST_READ:  state <= ST_RDONE;
        ST_RDONE: state <= ST_IDLE;
        ST_WRITE: state <= ST_DONE;
        ST_KEY: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(4 * NUM_RKEYS - 1)) state <= ST_DONE;
        end
        ST_ARK: begin
          if (cyc == 2'(XOR_CYCLES - 1)) begin
            cyc <= '0;
            fstep <= '0;
            state <= (rnd == 4'd10) ? ST_WB : ST_FUSE;
          end else cyc <= cyc + 2'd1;
        end
        ST_FUSE: begin
          fstep <= fstep + 3'd1;
          if (fstep == 3'(FUSE_CYCLES - 1)) state <= ST_WB;
        end
        ST_WB, ST_WB2: begin
          if (state == ST_WB && rnd < 4'd9) state <= ST_WB2;
          else if (row != 2'd3) begin
            row <= row + 2'd1;
            state <= ST_ARK;
          end else begin
            row <= '0;
            if (rnd == 4'd10)     state <= ST_DONE;
            else if (rnd == 4'd9) begin rnd <= 4'd10; state <= ST_ARK; end
            else begin mc_idx <= '0; cyc <= '0; state <= ST_MC; end
          end
        end
        ST_MC: begin
          if (!mc.is_xor || cyc == 2'(XOR_CYCLES - 1)) begin
            cyc <= '0;
            if (mc_idx == 5'(MC_STEPS - 1)) begin
              mc_idx <= '0;
              rnd <= rnd + 4'd1;
              state <= ST_ARK;
            end else mc_idx <= mc_idx + 5'd1;
          end else cyc <= cyc + 2'd1;
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  // A command that is not yet accepted must be held.
  logic pend_q;
  cmd_op_e op_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= 1'b0;
      op_q   <= CMD_READ;
    end else begin
      pend_q <= cmd_valid && !cmd_ready;
      op_q   <= cmd_op;
      if (pend_q) assert (cmd_valid && cmd_op == op_q)
        else $error("command withdrawn or changed before it was accepted");
    end
  end
endmodule
