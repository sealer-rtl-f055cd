// sealer_pkg: constants, types and GF(2^8) helpers shared by the in-SRAM AES engine.
//
// The geometry follows the paper's main configuration: a 256x256 6T subarray
// split into 6 tiles. Each tile is 40 columns wide: 8 columns that hold the
// S-box (one byte per row, 256 rows) and 32 columns that hold AES state rows.
// Rows 0..203 hold 51 data blocks (4 rows each), rows 204..247 the 11 round
// keys (4 rows each) and rows 248..253 the MixColumns intermediates. Rows
// 254..255 and columns 240..255 of the subarray are not used by the cipher
// and behave as ordinary storage (this design's choice; the paper does not
// say what they hold).
//
// Bit order: a subarray row is a 256-bit vector whose bit 255 is column 0
// (the leftmost column in the paper's figures). Columns are grouped in bytes;
// byte b is bits [255-8b -: 8] with its most significant bit in the leftmost
// column. Tile t owns bytes 5t..5t+4: its lane 0 (byte 5t) is the S-box lane
// and lanes 1..4 hold state columns c = 0..3 of one state row.
// Byte masks are 32-bit vectors whose bit 31-b enables byte b.
package sealer_pkg;

  typedef logic [7:0] byte_t;

  // Subarray geometry (paper, Sec. 4.1)
  localparam int unsigned ROWS            = 256;
  localparam int unsigned SUB_COLS        = 256;
  localparam int unsigned TILES           = 6;
  localparam int unsigned TILE_LANES      = 5;
  localparam int unsigned TILE_COLS       = 8 * TILE_LANES;           // 40
  localparam int unsigned ROW_BYTES       = SUB_COLS / 8;             // 32
  localparam int unsigned BLOCKS_PER_TILE = 51;
  localparam int unsigned KEY_ROW0        = 204;
  localparam int unsigned NUM_RKEYS       = 11;
  localparam int unsigned DBL_ROW0        = 248;                      // 2*B rows 248..251
  localparam int unsigned T_ROW           = 252;                      // I0, then T_c
  localparam int unsigned I_ROW           = 253;                      // I1, I2, I3

  // An in-array XOR takes three times a plain access (paper, Sec. 4.2).
  localparam int unsigned XOR_CYCLES      = 3;
  // Fused SubBytes/ShiftRows per state row: one FIFO prefill cycle + T1..T5.
  localparam int unsigned FUSE_CYCLES     = 6;
  // MixColumns per round: 15 XORs and 15 writes (Fig. 5).
  localparam int unsigned MC_STEPS        = 30;
  localparam int unsigned MC_CYCLES       = 15 * XOR_CYCLES + 15;
  // Cycles of one encryption, from command acceptance to the done pulse.
  localparam int unsigned ENC_CYCLES =
      9 * (4 * (XOR_CYCLES + FUSE_CYCLES + 2) + MC_CYCLES)   // rounds with MixColumns
    + 4 * (XOR_CYCLES + FUSE_CYCLES + 1)                     // last SubBytes/ShiftRows
    + 4 * (XOR_CYCLES + 1)                                   // final AddRoundKey
    + 1;                                                     // done cycle

  // Sense-amplifier latch operation for one cycle.
  typedef enum logic [2:0] {
    SA_HOLD,          // keep the latched row
    SA_READ,          // latch the BL sense (single activated row: the stored bits)
    SA_XOR,           // latch NOR(BL, BLB) = XOR of two activated rows
    SA_LOOKUP,        // latch the S-box lane from the tile's S-box decoder row
    SA_SHIFT_LOOKUP,  // shift data lanes right by a byte and latch the S-box lane
    SA_SHIFT          // shift data lanes right by a byte
  } sa_mode_e;

  // Source of the write drivers.
  typedef enum logic [1:0] {
    WSRC_EXT,    // data from outside the array (host, S-box or key loading)
    WSRC_LATCH,  // the SA latch (write back a computed row)
    WSRC_XTIME   // the SA latch, each data byte multiplied by 2 in GF(2^8)
  } wsrc_e;

  // Row operation broadcast to the subarrays.
  typedef struct packed {
    logic                  wl1_en;
    logic [7:0]            wl1_row;
    logic                  wl2_en;
    logic [7:0]            wl2_row;
    sa_mode_e              sa_mode;
    logic                  fifo_push;
    logic [1:0]            fifo_sel;
    logic                  we;
    wsrc_e                 wsrc;
    logic [ROW_BYTES-1:0]  byte_mask;
  } array_ctrl_t;

  // Per-tile slice of the operation (the wordlines arrive separately).
  typedef struct packed {
    sa_mode_e              sa_mode;
    logic                  fifo_push;
    logic [1:0]            fifo_sel;
    logic                  we;
    wsrc_e                 wsrc;
    logic [TILE_LANES-1:0] lane_mask;
  } tile_ctrl_t;

  typedef enum logic [1:0] {
    CMD_READ,   // read one row of one subarray
    CMD_WRITE,  // write one row of one subarray under a byte mask
    CMD_KEY,    // expand a cipher key into rows 204..247 of every tile
    CMD_ENC     // encrypt block slot k of every tile of every subarray
  } cmd_op_e;

  localparam array_ctrl_t CTRL_IDLE = '{
    wl1_en: 1'b0, wl1_row: 8'd0, wl2_en: 1'b0, wl2_row: 8'd0,
    sa_mode: SA_HOLD, fifo_push: 1'b0, fifo_sel: 2'd0,
    we: 1'b0, wsrc: WSRC_EXT, byte_mask: '0};

  // ---------------------------------------------------------------- GF(2^8)
  function automatic byte_t xtime(byte_t b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic byte_t gf_mul(byte_t a, byte_t b);
    byte_t p = 8'h00;
    byte_t x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  // S-box entry: multiplicative inverse (x^254) followed by the AES affine map.
  function automatic byte_t sbox_f(byte_t x);
    byte_t inv = 8'h01;
    byte_t sq  = x;
    byte_t s;
    for (int i = 0; i < 8; i++) begin      // 254 = 0b11111110
      if (i != 0) inv = gf_mul(inv, sq);
      sq = gf_mul(sq, sq);
    end
    s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]}
            ^ {inv[3:0], inv[7:4]} ^ 8'h63;
    return s;
  endfunction

  // The whole S-box as a constant, entry x in bits [8x+7:8x].
  function automatic logic [2047:0] gen_sbox();
    logic [2047:0] t;
    for (int i = 0; i < 256; i++) t[8*i +: 8] = sbox_f(byte_t'(i));
    return t;
  endfunction

  localparam logic [2047:0] SBOX_TABLE = gen_sbox();

  function automatic byte_t sbox_lookup(byte_t x);
    return SBOX_TABLE[8*x +: 8];
  endfunction

  // Row addresses of the layout in Fig. 3(a).
  function automatic logic [7:0] data_row(logic [5:0] slot, logic [1:0] r);
    return 8'(4 * slot + r);
  endfunction

  function automatic logic [7:0] key_row(logic [3:0] rk, logic [1:0] r);
    return 8'(KEY_ROW0 + 4 * rk + r);
  endfunction

  // Byte masks selecting the S-box lanes or the data lanes of all tiles.
  function automatic logic [ROW_BYTES-1:0] lane_mask_all(bit sbox_lanes);
    logic [ROW_BYTES-1:0] m = '0;
    for (int t = 0; t < TILES; t++)
      for (int l = 0; l < TILE_LANES; l++)
        if ((l == 0) == sbox_lanes) m[ROW_BYTES-1-(TILE_LANES*t+l)] = 1'b1;
    return m;
  endfunction

  localparam logic [ROW_BYTES-1:0] SBOX_MASK = lane_mask_all(1'b1);
  localparam logic [ROW_BYTES-1:0] DATA_MASK = lane_mask_all(1'b0);

endpackage
