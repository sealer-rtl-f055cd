// tb_tile_array: bitline computing of one tile's bitcell array.
// Writes random rows (with and without lane masks), then checks that one
// active wordline senses the stored bits, two give AND on BL and NOR on BLB,
// none leaves both bitlines high, and that the S-box lane follows its own
// wordlines. Expected values come from a shadow copy kept by the testbench.
module tb_tile_array;
  logic         clk = 0;
  logic [255:0] wl_data, wl_sbox;
  logic         we;
  logic [4:0]   lane_mask;
  logic [39:0]  wdata, bl_and, blb_nor;
  logic [39:0]  shadow [256];
  int checks = 0, failures = 0;

  tile_array #(.ROWS(256), .LANES(5)) dut (.clk, .wl_data, .wl_sbox, .we, .lane_mask, .wdata, .bl_and, .blb_nor);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [39:0] lane_expand(logic [4:0] m);
    logic [39:0] e;
    for (int l = 0; l < 5; l++) e[39-8*l -: 8] = {8{m[4-l]}};
    return e;
  endfunction

  task automatic wr(int r, logic [39:0] d, logic [4:0] m);
    wl_data = 256'(1) << r; wl_sbox = 256'(1) << r; we = 1; wdata = d; lane_mask = m;
    @(posedge clk); #1;
    we = 0;
    shadow[r] = (shadow[r] & ~lane_expand(m)) | (d & lane_expand(m));
  endtask

  task automatic chk(string what, logic [39:0] got, logic [39:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    int a, b;
    logic [39:0] e_and, e_nor;
    we = 0; wl_data = '0; wl_sbox = '0; lane_mask = '1; wdata = '0;
    @(posedge clk); #1;
    for (int r = 0; r < 256; r++) begin shadow[r] = '0; wr(r, {$urandom, $urandom}, 5'b11111); end
    for (int i = 0; i < 40; i++) wr($urandom_range(0, 255), {$urandom, $urandom}, 5'($urandom));
    // nothing active: bitlines stay precharged
    wl_data = '0; wl_sbox = '0; #1;
    chk("idle BL", bl_and, '1);
    chk("idle BLB", blb_nor, '1);
    for (int i = 0; i < 200; i++) begin
      a = $urandom_range(0, 255);
      b = $urandom_range(0, 255);
      wl_data = 256'(1) << a; wl_sbox = 256'(1) << a; #1;
      chk("single-row read", bl_and, shadow[a]);
      chk("single-row BLB", blb_nor, ~shadow[a]);
      wl_data = (256'(1) << a) | (256'(1) << b); wl_sbox = wl_data; #1;
      chk("two-row AND", bl_and, shadow[a] & shadow[b]);
      chk("two-row NOR", blb_nor, ~(shadow[a] | shadow[b]));
      // data columns on rows a+b, S-box lane on row a only
      wl_sbox = 256'(1) << a; #1;
      e_and = {shadow[a][39:32], shadow[a][31:0] & shadow[b][31:0]};
      e_nor = {~shadow[a][39:32], ~(shadow[a][31:0] | shadow[b][31:0])};
      chk("split wordline AND", bl_and, e_and);
      chk("split wordline NOR", blb_nor, e_nor);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
