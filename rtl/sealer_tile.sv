// sealer_tile: one tile of a subarray, the unit that processes one AES block.
//
// A tile holds the S-box (lane 0 of rows 0..255), 51 data blocks, 11 round
// keys and the MixColumns intermediates in a 256x40 bitcell array
// (tile_array). Its sense amplifiers (sa_logic) compute the XOR of the two
// rows that the subarray's Decoder1 and Decoder2 activate, and its own S-box
// decoder (row_decoder) fed by a two-entry FIFO (sbox_input_fifo) turns a
// state byte into the row address of its substitute. All tiles of a subarray
// receive the same wordlines and the same per-cycle control, so they work on
// the block in the same slot in parallel.
//
// Fused SubBytes/ShiftRows of one state row (paper Fig. 4): with the data row
// and the key row still activated, the controller pushes the sensed XOR bytes
// into the FIFO in ShiftRows order; each lookup cycle decodes the FIFO head,
// latches its S-box entry into lane 0 and, from T2 on, shifts the data lanes
// right by a byte. After T5 lanes 1..4 hold the substituted, shifted row.
//
// Timing: control and wordlines are sampled at the rising edge; q is the SA
// latch, valid the cycle after an SA operation. Writes take one cycle and use
// the write drivers' source wsrc (external data, latch, or latch times 2).
module sealer_tile
  import sealer_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ROWS-1:0]      wl,          // Decoder1 | Decoder2
  input  tile_ctrl_t           ctrl,
  input  logic [TILE_COLS-1:0] ext_wdata,
  output logic [TILE_COLS-1:0] q
);
  logic [ROWS-1:0]      wl_sbox, wl_lookup;
  logic [TILE_COLS-1:0] bl_and, blb_nor, xor_out, q_x2, wdata;
  logic [7:0]           head;
  logic                 lookup, fifo_empty, fifo_full;

  assign lookup = (ctrl.sa_mode == SA_LOOKUP) || (ctrl.sa_mode == SA_SHIFT_LOOKUP);

  row_decoder #(.ROWS(ROWS)) u_sbox_dec (
    .en(lookup), .addr(head), .wl(wl_lookup));

  // S-box lane wordlines: the local decoder during a lookup, the shared
  // decoders otherwise (S-box loading, plain reads).
  assign wl_sbox = lookup ? wl_lookup : wl;

  always_comb begin
    unique case (ctrl.wsrc)
      WSRC_LATCH: wdata = q;
      WSRC_XTIME: wdata = q_x2;
      default:    wdata = ext_wdata;
    endcase
  end

  tile_array #(.ROWS(ROWS), .LANES(TILE_LANES)) u_array (
    .clk, .wl_data(wl), .wl_sbox, .we(ctrl.we), .lane_mask(ctrl.lane_mask),
    .wdata, .bl_and, .blb_nor);

  sa_logic #(.LANES(TILE_LANES)) u_sa (
    .clk, .rst_n, .mode(ctrl.sa_mode), .bl_and, .blb_nor,
    .xor_out, .q, .q_x2);

  sbox_input_fifo #(.DEPTH(2)) u_fifo (
    .clk, .rst_n, .sensed(xor_out[TILE_COLS-9:0]), .push(ctrl.fifo_push),
    .sel(ctrl.fifo_sel), .pop(lookup), .head, .empty(fifo_empty), .full(fifo_full));

  a_lookup_has_input: assert property (@(posedge clk) disable iff (!rst_n) lookup |-> !fifo_empty)
    else $error("S-box lookup with an empty input FIFO");
  a_fifo_not_overfilled: assert property (@(posedge clk) disable iff (!rst_n)
                                          (ctrl.fifo_push && fifo_full) |-> lookup)
    else $error("push into a full S-box input FIFO");
endmodule
