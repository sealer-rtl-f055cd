// tb_sealer_tile: one tile running the paper's worked examples.
// Loads the S-box, stores data block 50 and round key 0 as printed in the
// paper's Fig. 3(b), then replays Fig. 4 step by step: AddRoundKey of the
// third state row must latch 6c 0d b4 e1, and the latch must read
// d7|6c0db4e1, 50|d76c0db4, f8|50d76c0d, 8d|f8 50 d7 6c and finally
// 8d f8 50 d7 after T1..T5. It then runs the fused stage on all four rows of
// random blocks, writes 2*B rows, and performs the MixColumns steps of
// Fig. 5, comparing every result with the reference model. The XOR takes
// three cycles, the fused stage six (prefill + T1..T5); both are checked by
// counting the cycles the test spends in them.
module tb_sealer_tile;
  import sealer_pkg::*;
  import aes_ref_pkg::*;
  logic         clk = 0, rst_n = 0;
  logic [255:0] wl;
  tile_ctrl_t   ctrl;
  logic [39:0]  ext_wdata, q;
  u8            sb [256];
  int checks = 0, failures = 0;
  int cycles = 0;

  sealer_tile dut (.clk, .rst_n, .wl, .ctrl, .ext_wdata, .q);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [39:0] got, logic [39:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  task automatic idle();
    ctrl = '{sa_mode: SA_HOLD, fifo_push: 0, fifo_sel: 0, we: 0, wsrc: WSRC_EXT, lane_mask: 0};
    wl = '0;
  endtask

  task automatic tick();
    @(posedge clk); #1;
  endtask

  task automatic write_row(int r, logic [39:0] d, logic [4:0] m, wsrc_e src = WSRC_EXT);
    idle(); wl = 256'(1) << r; ctrl.we = 1; ctrl.wsrc = src; ctrl.lane_mask = m; ext_wdata = d;
    tick(); idle();
  endtask

  task automatic read_row(int r);
    idle(); wl = 256'(1) << r; ctrl.sa_mode = SA_READ; tick(); idle();
  endtask

  task automatic xor_rows(int a, int b);
    int c0 = cycles;
    idle(); wl = (256'(1) << a) | (256'(1) << b);
    tick(); tick();
    ctrl.sa_mode = SA_XOR; tick();
    checks++;
    if (cycles - c0 != 3) begin failures++; $display("XOR took %0d cycles", cycles - c0); end
    ctrl.sa_mode = SA_HOLD;
  endtask

  // Fused SubBytes/ShiftRows on state row r, rows a (data) and b (key) kept active.
  task automatic fuse(int r, int a, int b, bit fig4 = 0);
    int c0 = cycles;
    logic [1:0] s [4];
    for (int j = 0; j < 4; j++) s[j] = 2'(3 - ((3 - j + r) % 4));
    wl = (256'(1) << a) | (256'(1) << b);
    ctrl.fifo_push = 1; ctrl.fifo_sel = s[0]; ctrl.sa_mode = SA_HOLD; tick();
    ctrl.fifo_sel = s[1]; ctrl.sa_mode = SA_LOOKUP; tick();
    if (fig4) chk("Fig4 T1", q, 40'hd7_6c0db4e1);
    ctrl.fifo_sel = s[2]; ctrl.sa_mode = SA_SHIFT_LOOKUP; tick();
    if (fig4) chk("Fig4 T2", q, 40'h50_d76c0db4);
    ctrl.fifo_sel = s[3]; tick();
    if (fig4) chk("Fig4 T3", q, 40'hf8_50d76c0d);
    ctrl.fifo_push = 0; tick();
    if (fig4) chk("Fig4 T4", q, 40'h8d_f850d76c);
    ctrl.sa_mode = SA_SHIFT; tick();
    if (fig4) chk("Fig4 T5", {8'h00, q[31:0]}, 40'h00_8df850d7);
    idle();
    checks++;
    if (cycles - c0 != 6) begin failures++; $display("fused stage took %0d cycles", cycles - c0); end
  endtask

  function automatic logic [31:0] sub_shift(logic [31:0] v, int r);
    u8 b [4];
    u8 o [4];
    for (int c = 0; c < 4; c++) b[c] = sb[v[31-8*c -: 8]];
    for (int c = 0; c < 4; c++) o[c] = b[(c + r) % 4];
    return {o[0], o[1], o[2], o[3]};
  endfunction

  function automatic logic [31:0] dbl4(logic [31:0] v);
    logic [31:0] o;
    for (int c = 0; c < 4; c++) o[31-8*c -: 8] = ref_mul(v[31-8*c -: 8], 8'h02);
    return o;
  endfunction

  initial begin
    logic [31:0] blk [4];
    logic [31:0] key [4];
    logic [31:0] exp_row [4];
    logic [31:0] t;
    int k;
    idle(); ext_wdata = '0;
    for (int i = 0; i < 256; i++) sb[i] = ref_sbox(u8'(i));
    #12 rst_n = 1; tick();
    for (int i = 0; i < 256; i++) write_row(i, {sb[i], 32'h0}, 5'b10000);

    // ---- Fig. 3(b) / Fig. 4 example: block 50 (rows 200..203), key 0 (204..207)
    write_row(200, {8'h0, 32'hb5aca372}, 5'b01111);
    write_row(201, {8'h0, 32'h0e5d356a}, 5'b01111);
    write_row(202, {8'h0, 32'ha146f62e}, 5'b01111);
    write_row(204, {8'h0, 32'h0015bd0f}, 5'b01111);
    write_row(205, {8'h0, 32'h2da6e4e6}, 5'b01111);
    write_row(206, {8'h0, 32'hcd4b42cf}, 5'b01111);
    write_row(207, {8'h0, 32'h267c980c}, 5'b01111);
    read_row(202);
    chk("S-box lane kept under data write", q, {sb[202], 32'ha146f62e});
    xor_rows(202, 206);
    chk("Fig4 T0 AddRoundKey", {8'h0, q[31:0]}, {8'h0, 32'h6c0db4e1});
    fuse(2, 202, 206, 1);
    write_row(202, '0, 5'b01111, WSRC_LATCH);
    write_row(250, '0, 5'b01111, WSRC_XTIME);
    read_row(202);
    chk("written back", {8'h0, q[31:0]}, {8'h0, 32'h8df850d7});
    read_row(250);
    chk("2*B row", {8'h0, q[31:0]}, {8'h0, dbl4(32'h8df850d7)});

    // ---- random blocks: AddRoundKey + fused stage on every row, then MixColumns
    for (int n = 0; n < 6; n++) begin
      k = $urandom_range(0, 50);
      for (int r = 0; r < 4; r++) begin
        blk[r] = $urandom; key[r] = $urandom;
        write_row(4*k + r, {8'h0, blk[r]}, 5'b01111);
        write_row(204 + 4*n + r, {8'h0, key[r]}, 5'b01111);
      end
      for (int r = 0; r < 4; r++) begin
        xor_rows(4*k + r, 204 + 4*n + r);
        chk("ARK", {8'h0, q[31:0]}, {8'h0, blk[r] ^ key[r]});
        fuse(r, 4*k + r, 204 + 4*n + r);
        exp_row[r] = sub_shift(blk[r] ^ key[r], r);
        chk("SubBytes+ShiftRows", {8'h0, q[31:0]}, {8'h0, exp_row[r]});
        write_row(4*k + r, '0, 5'b01111, WSRC_LATCH);
        write_row(248 + r, '0, 5'b01111, WSRC_XTIME);
      end
      // Fig. 5(a): T = (B0^B1)^(B2^B3)
      xor_rows(4*k, 4*k + 1);     write_row(252, '0, 5'b01111, WSRC_LATCH);
      xor_rows(4*k + 2, 4*k + 3); write_row(253, '0, 5'b01111, WSRC_LATCH);
      xor_rows(252, 253);         write_row(252, '0, 5'b01111, WSRC_LATCH);
      t = exp_row[0] ^ exp_row[1] ^ exp_row[2] ^ exp_row[3];
      read_row(252);
      chk("T_c", {8'h0, q[31:0]}, {8'h0, t});
      // Fig. 5(b): B'_r = T ^ 2B_r ^ 2B_(r+1) ^ B_r
      for (int r = 0; r < 4; r++) begin
        xor_rows(248 + r, 252);           write_row(253, '0, 5'b01111, WSRC_LATCH);
        xor_rows(253, 248 + (r + 1) % 4); write_row(253, '0, 5'b01111, WSRC_LATCH);
        xor_rows(253, 4*k + r);           write_row(4*k + r, '0, 5'b01111, WSRC_LATCH);
      end
      for (int c = 0; c < 4; c++) begin
        u8 a0, a1, a2, a3;
        logic [31:0] m [4];
        a0 = exp_row[0][31-8*c -: 8]; a1 = exp_row[1][31-8*c -: 8];
        a2 = exp_row[2][31-8*c -: 8]; a3 = exp_row[3][31-8*c -: 8];
        m[0] = 32'(ref_mul(a0, 2) ^ ref_mul(a1, 3) ^ a2 ^ a3);
        m[1] = 32'(a0 ^ ref_mul(a1, 2) ^ ref_mul(a2, 3) ^ a3);
        m[2] = 32'(a0 ^ a1 ^ ref_mul(a2, 2) ^ ref_mul(a3, 3));
        m[3] = 32'(ref_mul(a0, 3) ^ a1 ^ a2 ^ ref_mul(a3, 2));
        for (int r = 0; r < 4; r++) begin
          read_row(4*k + r);
          chk($sformatf("MixColumns r%0d c%0d", r, c), {32'h0, q[31-8*c -: 8]}, {32'h0, m[r][7:0]});
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
