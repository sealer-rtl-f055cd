// tb_sealer_subarray: six tiles working in parallel.
// Loads the S-box in all tiles, puts a different random block and key row in
// each tile, and checks that one XOR and one fused SubBytes/ShiftRows pass,
// driven once through Decoder1/Decoder2, give each tile its own correct
// result. Also checks the spare columns as plain storage, the byte mask, and
// that a disabled subarray neither writes nor changes its latches.
module tb_sealer_subarray;
  import sealer_pkg::*;
  import aes_ref_pkg::*;
  logic          clk = 0, rst_n = 0, en = 1;
  array_ctrl_t   ctrl;
  logic [255:0]  ext_wdata, q;
  u8             sb [256];
  int checks = 0, failures = 0;

  sealer_subarray dut (.clk, .rst_n, .en, .ctrl, .ext_wdata, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [255:0] got, logic [255:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic wr(int r, logic [255:0] d, logic [31:0] m);
    ctrl = CTRL_IDLE; ctrl.wl1_en = 1; ctrl.wl1_row = 8'(r); ctrl.we = 1; ctrl.byte_mask = m;
    ctrl.wsrc = WSRC_EXT; ext_wdata = d; tick(); ctrl = CTRL_IDLE;
  endtask

  task automatic rd(int r);
    ctrl = CTRL_IDLE; ctrl.wl1_en = 1; ctrl.wl1_row = 8'(r); ctrl.sa_mode = SA_READ; tick(); ctrl = CTRL_IDLE;
  endtask

  initial begin
    logic [255:0] d, e, prev;
    logic [31:0]  blk [6];
    logic [31:0]  key [6];
    logic [31:0]  m;
    int r, k, sr;
    ctrl = CTRL_IDLE; ext_wdata = '0;
    for (int i = 0; i < 256; i++) sb[i] = ref_sbox(u8'(i));
    #12 rst_n = 1; tick();
    for (int i = 0; i < 256; i++) begin
      d = '0;
      for (int t = 0; t < 6; t++) d[255-40*t -: 8] = sb[i];
      wr(i, d, SBOX_MASK);
    end
    for (int n = 0; n < 20; n++) begin
      k = $urandom_range(0, 50); sr = $urandom_range(0, 3);
      d = '0; e = '0;
      for (int t = 0; t < 6; t++) begin
        blk[t] = $urandom; key[t] = $urandom;
        d = put_tile_row(d, t, blk[t]); e = put_tile_row(e, t, key[t]);
      end
      wr(4*k + sr, d, DATA_MASK);
      wr(204 + sr, e, DATA_MASK);
      // AddRoundKey across the six tiles
      ctrl = CTRL_IDLE;
      ctrl.wl1_en = 1; ctrl.wl1_row = 8'(4*k + sr); ctrl.wl2_en = 1; ctrl.wl2_row = 8'(204 + sr);
      tick(); tick(); ctrl.sa_mode = SA_XOR; tick();
      for (int t = 0; t < 6; t++)
        chk($sformatf("tile %0d XOR", t), 256'(get_tile_row(q, t)), 256'(blk[t] ^ key[t]));
      // fused stage
      for (int j = 0; j < 6; j++) begin
        ctrl.fifo_push = (j <= 3);
        ctrl.fifo_sel = 2'(3 - ((3 - (j % 4) + sr) % 4));
        ctrl.sa_mode = (j == 0) ? SA_HOLD : (j == 1) ? SA_LOOKUP : (j == 5) ? SA_SHIFT : SA_SHIFT_LOOKUP;
        tick();
      end
      ctrl = CTRL_IDLE;
      for (int t = 0; t < 6; t++) begin
        logic [31:0] x;
        u8 b [4];
        x = blk[t] ^ key[t];
        for (int c = 0; c < 4; c++) b[c] = sb[x[31-8*c -: 8]];
        chk($sformatf("tile %0d fused", t), 256'(get_tile_row(q, t)),
            256'({b[sr % 4], b[(1 + sr) % 4], b[(2 + sr) % 4], b[(3 + sr) % 4]}));
      end
    end
    // spare columns and byte mask
    for (int n = 0; n < 20; n++) begin
      r = $urandom_range(0, 255);
      d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      rd(r); prev = q;
      m = $urandom & ~SBOX_MASK;
      wr(r, d, m);
      rd(r);
      for (int b = 0; b < 32; b++)
        if (!SBOX_MASK[31-b])
          chk($sformatf("row %0d byte %0d", r, b), 256'(q[255-8*b -: 8]),
              256'(m[31-b] ? d[255-8*b -: 8] : prev[255-8*b -: 8]));
    end
    // disabled subarray: no write, latch held
    rd(10); prev = q;
    en = 0;
    wr(10, ~prev, '1);
    rd(11);
    chk("latch held while disabled", q, prev);
    en = 1;
    rd(10);
    chk("no write while disabled", q, prev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
