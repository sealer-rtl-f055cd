// sbox_input_fifo: byte-select MUX and two-entry FIFO at a tile's S-box decoder.
//
// The MUX picks byte sel of the four sensed state bytes (sel 3 = lane 1, the
// leftmost state byte; sel 0 = lane 4, the rightmost), in the order that
// ShiftRows needs, and push writes it into the FIFO. The head entry is the
// address of the tile's S-box decoder; pop drops it after the lookup. Push
// and pop may happen in the same cycle. Two 8-bit entries are the paper's
// number (Sec. 4.3); the entries reset to empty, which is this design's choice.
//
// The MUX reads the XOR sense of the still-activated data and key rows, not
// the shifting latch: only then do the select values printed in Fig. 4
// (10, 11, 00, 01) pick 0d, 6c, e1, b4 after the latch has started shifting.
module sbox_input_fifo #(
  parameter int unsigned DEPTH = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] sensed,   // state bytes, sel 3 in bits 31:24
  input  logic        push,
  input  logic [1:0]  sel,
  input  logic        pop,
  output logic [7:0]  head,
  output logic        empty,
  output logic        full
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [7:0]    mem [DEPTH];
  logic [CW-1:0] count;
  logic [7:0]    din;
  logic          do_pop, do_push;

  assign din    = sensed[8*sel +: 8];
  assign empty  = (count == '0);
  assign full   = (32'(count) == DEPTH);
  assign head   = mem[0];
  assign do_pop = pop && !empty;
  assign do_push = push && (!full || do_pop);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      // shift out the head, then append at the first free place
      if (do_pop)
        for (int i = 0; i < DEPTH - 1; i++) mem[i] <= mem[i+1];
      if (do_push) mem[32'(count) - (do_pop ? 1 : 0)] <= din;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("S-box FIFO overflow");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("S-box FIFO underflow");
endmodule
