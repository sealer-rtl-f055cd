// row_decoder: 8-to-256 wordline decoder.
//
// Drives exactly one of ROWS wordlines high when en is set, none otherwise.
// Each subarray has two of them (Decoder1 and Decoder2 of the paper's
// Fig. 3(a)); activating a row through each at once is what lets the sense
// amplifiers compute the XOR of two rows. Each tile has a third one whose
// address is the byte at the head of its S-box input FIFO: decoding that byte
// selects the S-box row holding its substitute, so the decoder itself performs
// the SubBytes table lookup.
//
// Purely combinational. The paper names the decoders; the one-hot structure is
// the obvious implementation and this design's choice.
module row_decoder #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned AW   = $clog2(ROWS)
) (
  input  logic            en,
  input  logic [AW-1:0]   addr,
  output logic [ROWS-1:0] wl
);
  always_comb begin
    wl = '0;
    if (en && (32'(addr) < ROWS)) wl[addr] = 1'b1;
  end
endmodule
