// tb_row_decoder: exhaustive check of the 8-to-256 wordline decoder.
// Every address with enable set must raise exactly its own wordline; with
// enable clear no wordline may rise.
module tb_row_decoder;
  logic         en;
  logic [7:0]   addr;
  logic [255:0] wl;
  int checks = 0, failures = 0;

  row_decoder #(.ROWS(256)) dut (.en, .addr, .wl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++) begin
      en = 1'b1; addr = 8'(a); #1;
      checks++;
      if (wl !== (256'(1) << a)) begin failures++; $display("addr %0d: wl wrong", a); end
      en = 1'b0; #1;
      checks++;
      if (wl !== '0) begin failures++; $display("addr %0d: wordline with en=0", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
