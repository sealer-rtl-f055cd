// sealer_subarray: one 256x256 SRAM subarray turned into a 6-block AES unit.
//
// Decoder1 and Decoder2 each activate at most one row across the full width;
// their wordlines are ORed, so two active rows give the sense amplifiers two
// operands (paper Sec. 4.2). The 240 columns of the six tiles work in parallel
// on the six blocks that share a slot; the 16 rightmost columns (bytes 30, 31)
// are outside every tile and are plain storage, read and written through
// Decoder1 only (this design's choice). Writes go to the Decoder1 row; the
// controller never writes with Decoder2 active.
//
// en gates the operation: a subarray that is not addressed by a host access
// holds its latches and does not write. q is the latched row (valid the cycle
// after SA_READ/SA_XOR); one row operation per cycle.
module sealer_subarray
  import sealer_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  array_ctrl_t           ctrl,
  input  logic [SUB_COLS-1:0]   ext_wdata,
  output logic [SUB_COLS-1:0]   q
);
  localparam int unsigned SPARE = SUB_COLS - TILES * TILE_COLS;   // 16

  logic [ROWS-1:0] wl1, wl2, wl;

  row_decoder #(.ROWS(ROWS)) u_dec1 (.en(ctrl.wl1_en), .addr(ctrl.wl1_row), .wl(wl1));
  row_decoder #(.ROWS(ROWS)) u_dec2 (.en(ctrl.wl2_en), .addr(ctrl.wl2_row), .wl(wl2));
  assign wl = wl1 | wl2;

  tile_ctrl_t tctrl [TILES];

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    always_comb begin
      tctrl[t].sa_mode   = en ? ctrl.sa_mode : SA_HOLD;
      tctrl[t].fifo_push = en && ctrl.fifo_push;
      tctrl[t].fifo_sel  = ctrl.fifo_sel;
      tctrl[t].we        = en && ctrl.we;
      tctrl[t].wsrc      = ctrl.wsrc;
      tctrl[t].lane_mask = ctrl.byte_mask[ROW_BYTES-1-TILE_LANES*t -: TILE_LANES];
    end
    sealer_tile u_tile (
      .clk, .rst_n, .wl, .ctrl(tctrl[t]),
      .ext_wdata(ext_wdata[SUB_COLS-1-TILE_COLS*t -: TILE_COLS]),
      .q(q[SUB_COLS-1-TILE_COLS*t -: TILE_COLS]));
  end

  // Spare columns: ordinary storage.
  logic [SPARE-1:0] spare [ROWS];
  logic [SPARE-1:0] spare_q;

  always_ff @(posedge clk) begin
    if (en && ctrl.we && ctrl.wl1_en)
      for (int b = 0; b < SPARE / 8; b++)
        if (ctrl.byte_mask[SPARE/8-1-b]) spare[ctrl.wl1_row][SPARE-1-8*b -: 8] <= ext_wdata[SPARE-1-8*b -: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) spare_q <= '0;
    else if (en && ctrl.sa_mode == SA_READ && ctrl.wl1_en) spare_q <= spare[ctrl.wl1_row];
  end
  assign q[SPARE-1:0] = spare_q;

  a_write_one_decoder: assert property (@(posedge clk) disable iff (!rst_n) !(ctrl.we && ctrl.wl2_en))
    else $error("write with Decoder2 active");
endmodule
