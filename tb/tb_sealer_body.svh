// Shared body of the end-to-end testbenches (tb_sealer_top, tb_sealer_full).
// Expects N, clk, rst_n, the command signals, sb, checks, failures and a
// sealer_top instance named dut in the including module.

  always #5 clk = ~clk;

  int watchdog_cycles = 20000 + 40 * N * 6 * 4 * 3;
  initial begin
    repeat (watchdog_cycles) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [255:0] got, logic [255:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  // ---- mechanism counters, observed on the controller's row operations
  int m_sbox_load, m_key_row, m_host_wr, m_host_rd, m_xor, m_lookup, m_shift,
      m_x2, m_mc, m_final, m_enc;
  always @(posedge clk) if (rst_n) begin
    automatic array_ctrl_t a = dut.actrl;
    if (!dut.sbox_ready && a.we) m_sbox_load++;
    if (a.we && a.wsrc == WSRC_EXT && a.wl1_row >= 204 && a.wl1_row <= 247 && dut.sub_all && dut.sbox_ready) m_key_row++;
    if (a.we && a.wsrc == WSRC_EXT && !dut.sub_all) m_host_wr++;
    if (a.sa_mode == SA_READ) m_host_rd++;
    if (a.sa_mode == SA_XOR && a.wl2_row >= 204 && a.wl2_row <= 247) m_xor++;
    if (a.sa_mode inside {SA_LOOKUP, SA_SHIFT_LOOKUP}) m_lookup++;
    if (a.sa_mode inside {SA_SHIFT, SA_SHIFT_LOOKUP}) m_shift++;
    if (a.we && a.wsrc == WSRC_XTIME) m_x2++;
    if (a.sa_mode == SA_XOR && a.wl1_row >= 248) m_mc++;
    if (a.sa_mode == SA_XOR && a.wl2_row >= 244 && a.wl2_row <= 247) m_final++;
  end

  task automatic send(cmd_op_e op, int sub = 0, int row = 0, int slot = 0,
                      logic [255:0] wd = '0, logic [31:0] bm = '0, logic [127:0] key = '0);
    cmd_op = op; cmd_sub = SWD'(sub); cmd_row = 8'(row); cmd_slot = 6'(slot);
    cmd_wdata = wd; cmd_bmask = bm; cmd_key = key; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic wait_done(output int cyc);
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    @(posedge clk); #1;
  endtask

  task automatic write_row(int sub, int row, logic [255:0] d, logic [31:0] m);
    int c;
    send(CMD_WRITE, sub, row, 0, d, m);
    wait_done(c);
  endtask

  task automatic read_row(int sub, int row, output logic [255:0] d);
    send(CMD_READ, sub, row);
    while (!rd_valid) @(posedge clk);
    d = rd_data;
    checks++;
    if (!done) begin failures++; $display("read without done"); end
    @(posedge clk); #1;
  endtask

  task automatic load_key(logic [127:0] key);
    int c;
    send(CMD_KEY, 0, 0, 0, '0, '0, key);
    wait_done(c);
  endtask

  // Store blocks[s][t] in slot k, encrypt, read back and compare.
  task automatic run_slot(int k, logic [127:0] key, logic [127:0] blocks [N][6]);
    logic [255:0] d, other0, other1;
    int c;
    int r_other;
    for (int s = 0; s < N; s++)
      for (int r = 0; r < 4; r++) begin
        d = '0;
        for (int t = 0; t < 6; t++) d = put_tile_row(d, t, state_row(blocks[s][t], r));
        d[15:0] = 16'(s * 4 + r + k);                         // spare columns
        write_row(s, 4*k + r, d, 32'hffffffff);               // S-box lanes are protected
      end
    // a row of another slot, which must be left alone
    r_other = (k == 0) ? 4 : 4*k - 1;
    other0 = {8{$urandom}};
    write_row(0, r_other, other0, ~SBOX_MASK);
    read_row(0, r_other, other0);
    send(CMD_ENC, 0, 0, k);
    wait_done(c);
    m_enc++;
    chk($sformatf("slot %0d encryption cycles", k), 256'(c), 256'(ENC_CYCLES));
    for (int s = 0; s < N; s++) begin
      logic [31:0] rows [4];
      logic [127:0] got, exp;
      logic [255:0] rd [4];
      for (int r = 0; r < 4; r++) read_row(s, 4*k + r, rd[r]);
      for (int t = 0; t < 6; t++) begin
        for (int r = 0; r < 4; r++) rows[r] = get_tile_row(rd[r], t);
        for (int c2 = 0; c2 < 4; c2++)
          for (int r = 0; r < 4; r++) got[127-8*(r + 4*c2) -: 8] = rows[r][31-8*c2 -: 8];
        exp = ref_encrypt(blocks[s][t], key, sb);
        chk($sformatf("slot %0d sub %0d tile %0d ciphertext", k, s, t), 256'(got), 256'(exp));
      end
      for (int r = 0; r < 4; r++) begin
        chk("spare columns kept", 256'(rd[r][15:0]), 256'(16'(s * 4 + r + k)));
        for (int t = 0; t < 6; t++)
          chk("S-box lane kept", 256'(rd[r][255-40*t -: 8]), 256'(sb[4*k + r]));
      end
    end
    read_row(0, r_other, other1);
    chk("other slot untouched", other1, other0);
  endtask

  initial begin
    logic [127:0] blocks [N][6];
    logic [127:0] key;
    logic [255:0] d;
    for (int i = 0; i < 256; i++) sb[i] = ref_sbox(u8'(i));
    #12 rst_n = 1;
    while (!sbox_ready) @(posedge clk);
    @(posedge clk); #1;
    // plain SRAM use: write and read back a few rows in every subarray
    for (int s = 0; s < N; s++) begin
      logic [255:0] w;
      w = {8{$urandom}};
      write_row(s, 254, w, 32'hffffffff);
      read_row(s, 254, d);
      for (int t = 0; t < 6; t++) w[255-40*t -: 8] = sb[254];   // S-box lanes are not writable
      chk("plain SRAM row", d, w);
    end
    // FIPS-197 Appendix B example in tile 0 of subarray 0, random elsewhere
    key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    for (int s = 0; s < N; s++) for (int t = 0; t < 6; t++) blocks[s][t] = {$urandom, $urandom, $urandom, $urandom};
    blocks[0][0] = 128'h3243f6a8885a308d313198a2e0370734;
    load_key(key);
    run_slot(0, key, blocks);
    read_row(0, 0, d);
    chk("FIPS-197 B ciphertext row 0", 256'(get_tile_row(d, 0)), 256'(32'h39_02_dc_19));
    // FIPS-197 Appendix C.1 in the last slot
    key = 128'h000102030405060708090a0b0c0d0e0f;
    for (int s = 0; s < N; s++) for (int t = 0; t < 6; t++) blocks[s][t] = {$urandom, $urandom, $urandom, $urandom};
    blocks[N-1][5] = 128'h00112233445566778899aabbccddeeff;
    load_key(key);
    run_slot(50, key, blocks);
    read_row(N-1, 200, d);
    chk("FIPS-197 C.1 ciphertext row 0", 256'(get_tile_row(d, 5)), 256'(32'h69_6a_d8_70));

    $display("mechanisms: sbox_load=%0d key_rows=%0d host_wr=%0d host_rd=%0d ark_xor=%0d lookup=%0d shift=%0d x2_write=%0d mc_xor=%0d final_ark=%0d enc=%0d blocks_per_enc=%0d",
             m_sbox_load, m_key_row, m_host_wr, m_host_rd, m_xor, m_lookup, m_shift, m_x2, m_mc, m_final, m_enc, 6 * N);
    checks++; if (m_sbox_load == 0) begin failures++; $display("no S-box load"); end
    checks++; if (m_key_row == 0)   begin failures++; $display("no key rows"); end
    checks++; if (m_host_wr == 0)   begin failures++; $display("no host write"); end
    checks++; if (m_host_rd == 0)   begin failures++; $display("no host read"); end
    checks++; if (m_xor == 0)       begin failures++; $display("no AddRoundKey"); end
    checks++; if (m_lookup == 0)    begin failures++; $display("no S-box lookup"); end
    checks++; if (m_shift == 0)     begin failures++; $display("no byte shift"); end
    checks++; if (m_x2 == 0)        begin failures++; $display("no 2*B write"); end
    checks++; if (m_mc == 0)        begin failures++; $display("no MixColumns"); end
    checks++; if (m_final == 0)     begin failures++; $display("no final round"); end
    checks++; if (m_enc == 0)       begin failures++; $display("no encryption"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
