// tb_key_expand: AES-128 key schedule.
// Checks the FIPS-197 Appendix A.1 example (round keys 1 and 10 are printed
// there) and then all 11 round keys of random keys against the reference
// model, one step per clock.
module tb_key_expand;
  import aes_ref_pkg::*;
  logic         clk = 0, rst_n = 0, load = 0, step = 0;
  logic [127:0] key, rk;
  logic [3:0]   round;
  logic [127:0] rks [11];
  u8            sb [256];
  int checks = 0, failures = 0;

  key_expand dut (.clk, .rst_n, .load, .key, .step, .rk, .round);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  task automatic run(logic [127:0] k);
    key = k; load = 1; @(posedge clk); #1; load = 0;
    ref_expand(k, rks, sb);
    for (int j = 0; j <= 10; j++) begin
      chk($sformatf("round key %0d", j), rk, rks[j]);
      chk("round index", 128'(round), 128'(j));
      if (j == 1 && k == 128'h2b7e151628aed2a6abf7158809cf4f3c)
        chk("FIPS-197 round key 1", rk, 128'ha0fafe1788542cb123a339392a6c7605);
      if (j == 10 && k == 128'h2b7e151628aed2a6abf7158809cf4f3c)
        chk("FIPS-197 round key 10", rk, 128'hd014f9a8c9ee2589e13f0cc8b6630ca6);
      step = 1; @(posedge clk); #1; step = 0;
    end
    chk("saturates at round 10", 128'(round), 128'd10);
  endtask

  initial begin
    for (int i = 0; i < 256; i++) sb[i] = ref_sbox(u8'(i));
    key = '0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    run(128'h2b7e151628aed2a6abf7158809cf4f3c);
    for (int n = 0; n < 20; n++) run({$urandom, $urandom, $urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
