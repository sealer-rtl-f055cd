// tb_sealer_full: end-to-end run of the engine at its default size (32 subarrays, 192 blocks per encryption).
// After the S-box initialisation it stores a plaintext block in every tile of
// slot k of every subarray (the first one is the FIPS-197 Appendix B block),
// loads a key, encrypts, reads the rows back and compares every block with
// the reference AES; the FIPS-197 ciphertext is also checked literally. Rows
// outside the slot, the spare columns and the S-box must survive. A second
// key (FIPS-197 Appendix C.1) is then loaded and the last slot encrypted.
// Each mechanism of the design is counted and must occur at least once:
// S-box loading, round-key loading, plain writes and reads, protected S-box
// lanes, AddRoundKey XORs, FIFO-fed S-box lookups, byte shifts, 2*B writes,
// MixColumns steps, final rounds and parallel encryption of all tiles.
module tb_sealer_full;
  import sealer_pkg::*;
  import aes_ref_pkg::*;
  localparam int N = 32;
  localparam int SWD = (N > 1) ? $clog2(N) : 1;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done, rd_valid, sbox_ready;
  cmd_op_e cmd_op = CMD_READ;
  logic [SWD-1:0] cmd_sub = '0;
  logic [7:0] cmd_row = '0;
  logic [5:0] cmd_slot = '0;
  logic [255:0] cmd_wdata = '0, rd_data;
  logic [31:0] cmd_bmask = '0;
  logic [127:0] cmd_key = '0;
  u8 sb [256];
  int checks = 0, failures = 0;

  sealer_top dut (.*);

`include "tb_sealer_body.svh"
endmodule
