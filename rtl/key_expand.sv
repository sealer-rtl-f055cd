// key_expand: AES-128 key schedule, one round key per step.
//
// load captures the cipher key as round key 0; each step replaces the current
// round key with the next one (RotWord, SubWord, Rcon, then the XOR chain
// across the four words), so rk holds round key `round` (0..10). The
// controller writes each round key as four rows into rows 204..247 of every
// tile before it steps. Byte order is that of FIPS-197: key byte 0 is
// key[127:120], and row r of a round key holds bytes r, r+4, r+8, r+12.
//
// The paper states only that the expansion yields 11 round keys stored in the
// subarray and "can be implemented in the subarray"; computing it in a small
// dedicated unit with its own S-box table (built from the GF(2^8) definition
// at elaboration) is this design's choice.
module key_expand
  import sealer_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [127:0] key,
  input  logic         step,
  output logic [127:0] rk,
  output logic [3:0]   round
);
  byte_t       rcon;
  logic [31:0] w [4];
  logic [31:0] t;
  logic [127:0] nxt;

  always_comb begin
    for (int i = 0; i < 4; i++) w[i] = rk[127-32*i -: 32];
    // RotWord then SubWord then Rcon on the last word
    t = {sbox_lookup(w[3][23:16]) ^ rcon, sbox_lookup(w[3][15:8]), sbox_lookup(w[3][7:0]), sbox_lookup(w[3][31:24])};
    nxt[127:96] = w[0] ^ t;
    nxt[95:64]  = w[1] ^ nxt[127:96];
    nxt[63:32]  = w[2] ^ nxt[95:64];
    nxt[31:0]   = w[3] ^ nxt[63:32];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rk    <= '0;
      round <= '0;
      rcon  <= 8'h01;
    end else if (load) begin
      rk    <= key;
      round <= '0;
      rcon  <= 8'h01;
    end else if (step && round < 4'd10) begin
      rk    <= nxt;
      round <= round + 4'd1;
      rcon  <= xtime(rcon);
    end
  end
endmodule
