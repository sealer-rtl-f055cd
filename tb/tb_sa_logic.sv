// tb_sa_logic: sense-amplifier row of a tile.
// Drives the bitline senses of two random operand rows and checks XOR
// sensing, plain reads, the S-box lane lookup, the byte shift S(i) <= S(i-8)
// and the GF(2^8) doubling path against values computed here.
module tb_sa_logic;
  import sealer_pkg::*;
  logic        clk = 0, rst_n = 0;
  sa_mode_e    mode;
  logic [39:0] bl_and, blb_nor, xor_out, q, q_x2;
  int checks = 0, failures = 0;

  sa_logic #(.LANES(5)) dut (.clk, .rst_n, .mode, .bl_and, .blb_nor, .xor_out, .q, .q_x2);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [39:0] got, logic [39:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  function automatic logic [7:0] dbl(logic [7:0] b);
    logic [8:0] w = {b, 1'b0};
    if (w[8]) w = w ^ 9'h11b;
    return w[7:0];
  endfunction

  task automatic op(sa_mode_e m);
    mode = m; @(posedge clk); #1; mode = SA_HOLD;
  endtask

  initial begin
    logic [39:0] a, b, exp, prev;
    mode = SA_HOLD; bl_and = '0; blb_nor = '0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    chk("reset", q, '0);
    for (int i = 0; i < 100; i++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      bl_and = a & b; blb_nor = ~(a | b); #1;
      chk("xor sense", xor_out, a ^ b);
      op(SA_XOR);
      chk("latched xor", q, a ^ b);
      prev = q;
      op(SA_HOLD);
      chk("hold", q, prev);
      // lookup: only lane 0 takes the BL sense
      bl_and = {$urandom, $urandom};
      op(SA_LOOKUP);
      exp = {bl_and[39:32], prev[31:0]};
      chk("lookup", q, exp);
      prev = q;
      bl_and = {$urandom, $urandom};
      op(SA_SHIFT_LOOKUP);
      exp = {bl_and[39:32], prev[39:8]};
      chk("shift+lookup", q, exp);
      prev = q;
      op(SA_SHIFT);
      exp = {prev[39:32], prev[39:8]};
      chk("shift", q, exp);
      exp = {q[39:32], dbl(q[31:24]), dbl(q[23:16]), dbl(q[15:8]), dbl(q[7:0])};
      chk("x2 path", q_x2, exp);
      bl_and = {$urandom, $urandom};
      op(SA_READ);
      chk("read", q, bl_and);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
