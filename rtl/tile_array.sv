// tile_array: the 6T bitcell array of one tile, 256 rows by 40 columns.
//
// The array senses every column through its two bitlines at once. Several
// wordlines may be active together: BL then reads high only if every
// activated cell holds 1 (bl_and), and BLB only if every activated cell holds
// 0 (blb_nor), which is the bitline computing of the paper's Fig. 2(a). With
// a single active wordline bl_and is the stored bit; with none, both bitlines
// stay precharged high.
//
// The leftmost 8 columns (lane 0, bits 39:32) store the S-box, one entry per
// row, and have their own wordlines (wl_sbox) so that the tile's S-box decoder
// can read an entry while Decoder1/Decoder2 keep a data row and a key row
// active in the 32 data columns (wl_data). That split wordline is this
// design's choice; the paper only says the S-box sits in the tile's first 8
// columns and is addressed by the decoder.
//
// Writes happen at the rising clock edge into every row whose wordline is
// active, for the byte lanes set in lane_mask (bit 4 = lane 0). The analog
// sensing is modelled as the logic function it computes. The cells are not
// reset, as in an SRAM.
module tile_array #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned LANES = 5,
  parameter int unsigned COLS  = 8 * LANES
) (
  input  logic             clk,
  input  logic [ROWS-1:0]  wl_data,
  input  logic [ROWS-1:0]  wl_sbox,
  input  logic             we,
  input  logic [LANES-1:0] lane_mask,
  input  logic [COLS-1:0]  wdata,
  output logic [COLS-1:0]  bl_and,
  output logic [COLS-1:0]  blb_nor
);
  logic [COLS-1:0] cells [ROWS];

  // Column bit j (j = COLS-1 is column 0) is in the S-box lane for j >= COLS-8.
  localparam int unsigned SB0 = COLS - 8;

  always_comb begin
    bl_and  = '1;
    blb_nor = '1;
    for (int unsigned r = 0; r < ROWS; r++) begin
      for (int unsigned j = 0; j < COLS; j++) begin
        if ((j >= SB0) ? wl_sbox[r] : wl_data[r]) begin
          bl_and[j]  = bl_and[j]  &  cells[r][j];
          blb_nor[j] = blb_nor[j] & ~cells[r][j];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int unsigned r = 0; r < ROWS; r++)
        for (int unsigned j = 0; j < COLS; j++)
          if (((j >= SB0) ? wl_sbox[r] : wl_data[r]) && lane_mask[j / 8])
            cells[r][j] <= wdata[j];
    end
  end
endmodule
