// tb_sealer_ctrl: the sequencer, observed at its row-operation output.
// Checks the S-box initialisation writes, the 44 round-key row writes (data
// from the reference key schedule), the host read/write commands, and for an
// encryption the complete ordered list of XOR, write-back and 2*B operations
// against a list built here from the schedule of the paper (AddRoundKey,
// fused SubBytes/ShiftRows with write-back, MixColumns steps of Fig. 5, final
// AddRoundKey), plus the fused-stage FIFO traffic with the byte select of
// every push, and the total cycle count.
module tb_sealer_ctrl;
  import sealer_pkg::*;
  import aes_ref_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done, rd_valid, sbox_ready;
  cmd_op_e cmd_op;
  logic [1:0] cmd_sub;
  logic [7:0] cmd_row;
  logic [5:0] cmd_slot;
  logic [255:0] cmd_wdata, ext_wdata;
  logic [31:0] cmd_bmask;
  logic [127:0] cmd_key, ke_key, ke_rk;
  logic ke_load, ke_step, sub_all;
  logic [1:0] sub_sel;
  logic [3:0] ke_round;
  array_ctrl_t actrl;
  u8 sb [256];
  int checks = 0, failures = 0;

  sealer_ctrl #(.NUM_SUBARRAYS(N)) dut (.*);
  key_expand u_ke (.clk, .rst_n, .load(ke_load), .key(ke_key), .step(ke_step), .rk(ke_rk), .round(ke_round));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [255:0] got, logic [255:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  // expected encryption trace: {kind, ra, rb}; kind 0 = XOR, 1 = write latch, 2 = write 2*latch
  typedef struct { int kind; int ra; int rb; } ev_t;
  ev_t exp_q [$];

  function automatic void build_trace(int k);
    exp_q.delete();
    for (int i = 0; i <= 10; i++) begin
      for (int r = 0; r < 4; r++) begin
        exp_q.push_back('{0, 4*k + r, 204 + 4*i + r});
        exp_q.push_back('{1, 4*k + r, 0});
        if (i < 9) exp_q.push_back('{2, 248 + r, 0});
      end
      if (i < 9) begin
        exp_q.push_back('{0, 4*k, 4*k + 1}); exp_q.push_back('{1, 252, 0});
        exp_q.push_back('{0, 4*k + 2, 4*k + 3}); exp_q.push_back('{1, 253, 0});
        exp_q.push_back('{0, 252, 253}); exp_q.push_back('{1, 252, 0});
        for (int r = 0; r < 4; r++) begin
          exp_q.push_back('{0, 248 + r, 252}); exp_q.push_back('{1, 253, 0});
          exp_q.push_back('{0, 253, 248 + (r + 1) % 4}); exp_q.push_back('{1, 253, 0});
          exp_q.push_back('{0, 253, 4*k + r}); exp_q.push_back('{1, 4*k + r, 0});
        end
      end
    end
  endfunction

  int n_push, n_lookup, n_bad;
  bit tracing = 0;
  always @(posedge clk) if (tracing) begin
    ev_t e;
    bit is_ev;
    is_ev = 0;
    if (actrl.sa_mode == SA_XOR) begin e = '{0, actrl.wl1_row, actrl.wl2_row}; is_ev = 1; end
    if (actrl.we && actrl.wsrc == WSRC_LATCH) begin e = '{1, actrl.wl1_row, 0}; is_ev = 1; end
    if (actrl.we && actrl.wsrc == WSRC_XTIME) begin e = '{2, actrl.wl1_row, 0}; is_ev = 1; end
    // Push p of an encryption belongs to state row r = (p/4)%4 and is its
    // j-th select, j = p%4; the byte wanted is the one that ShiftRows moves
    // to position 3-j, i.e. state column (3-j+r) mod 4, MUX index 3-column.
    if (actrl.fifo_push) begin
      chk($sformatf("push %0d select", n_push), 256'(actrl.fifo_sel),
          256'(3 - ((3 - (n_push % 4) + (n_push / 4) % 4) % 4)));
      n_push++;
    end
    if (actrl.sa_mode inside {SA_LOOKUP, SA_SHIFT_LOOKUP}) n_lookup++;
    if (is_ev) begin
      if (exp_q.size() == 0 || exp_q[0].kind != e.kind || exp_q[0].ra != e.ra ||
          (e.kind == 0 && exp_q[0].rb != e.rb)) begin
        n_bad++;
        if (n_bad < 5) $display("unexpected op %0d %0d %0d", e.kind, e.ra, e.rb);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end

  task automatic send(cmd_op_e op, int sub = 0, int row = 0, int slot = 0,
                      logic [255:0] wd = '0, logic [31:0] bm = '0, logic [127:0] key = '0);
    cmd_op = op; cmd_sub = 2'(sub); cmd_row = 8'(row); cmd_slot = 6'(slot);
    cmd_wdata = wd; cmd_bmask = bm; cmd_key = key; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  initial begin
    logic [127:0] rks [11];
    logic [127:0] key;
    logic [255:0] d;
    int cyc, nw;
    cmd_op = CMD_READ; cmd_sub = 0; cmd_row = 0; cmd_slot = 0; cmd_wdata = '0; cmd_bmask = '0; cmd_key = '0;
    for (int i = 0; i < 256; i++) sb[i] = ref_sbox(u8'(i));
    #12 rst_n = 1;
    #1;
    // S-box initialisation
    for (int i = 0; i < 256; i++) begin
      if (i != 0) @(negedge clk);
      d = '0;
      for (int t = 0; t < 6; t++) d[255-40*t -: 8] = sb[i];
      chk($sformatf("sbox write %0d", i),
          {actrl.we, actrl.wl1_en, actrl.wl1_row, actrl.byte_mask, 1'b0, sub_all, ext_wdata[255:40]},
          {1'b1, 1'b1, 8'(i), SBOX_MASK, 1'b0, 1'b1, d[255:40]});
      chk("sbox lanes", {ext_wdata[39:0] & 40'hff00000000}, {d[39:0] & 40'hff00000000});
    end
    @(negedge clk);
    chk("sbox_ready", 256'(sbox_ready), 256'(1));
    // key load: 44 writes of round-key rows
    key = {$urandom, $urandom, $urandom, $urandom};
    ref_expand(key, rks, sb);
    send(CMD_KEY, 0, 0, 0, '0, '0, key);
    nw = 0;
    while (!done) begin
      @(negedge clk);
      if (actrl.we) begin
        d = '0;
        for (int t = 0; t < 6; t++) d = put_tile_row(d, t, state_row(rks[nw / 4], nw % 4));
        chk($sformatf("key row %0d", nw), {actrl.wl1_row, actrl.byte_mask, ext_wdata},
            {8'(204 + nw), DATA_MASK, d});
        nw++;
      end
    end
    chk("44 key rows", 256'(nw), 256'(44));
    @(posedge clk); #1;
    // host write and read on subarray 2
    d = {8{$urandom}};
    send(CMD_WRITE, 2, 77, 0, d, 32'hffffffff);
    @(negedge clk);
    chk("host write", {actrl.we, sub_all, sub_sel, actrl.wl1_row, actrl.byte_mask, ext_wdata},
        {1'b1, 1'b0, 2'd2, 8'd77, ~SBOX_MASK, d});
    while (!done) @(negedge clk);
    send(CMD_READ, 3, 99);
    @(negedge clk);
    chk("host read", {actrl.sa_mode, sub_all, sub_sel, actrl.wl1_row}, {SA_READ, 1'b0, 2'd3, 8'd99});
    @(negedge clk);
    chk("rd_valid", {rd_valid, done}, 2'b11);
    @(posedge clk); #1;
    // encryptions
    for (int i = 0; i < 3; i++) begin
      int k;
      k = (i == 0) ? 0 : (i == 1) ? 17 : 50;
      build_trace(k);
      n_push = 0; n_lookup = 0; n_bad = 0; tracing = 1;
      send(CMD_ENC, 0, 0, k);
      cyc = 0;
      while (!done) begin @(posedge clk); cyc++; end
      #1 tracing = 0;
      chk($sformatf("slot %0d trace mismatches", k), 256'(n_bad), 0);
      chk("all expected ops issued", 256'(exp_q.size()), 0);
      chk("FIFO pushes", 256'(n_push), 256'(160));
      chk("S-box lookups", 256'(n_lookup), 256'(160));
      chk("encryption cycles", 256'(cyc), 256'(ENC_CYCLES));
      @(posedge clk); #1;
    end
    $display("ENC_CYCLES=%0d", ENC_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
