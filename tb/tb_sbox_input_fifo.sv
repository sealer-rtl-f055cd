// tb_sbox_input_fifo: byte-select MUX and two-entry FIFO.
// First replays the selects of the paper's Fig. 4 example on the sensed row
// 6c 0d b4 e1 (expected head sequence 0d, 6c, e1, b4), then runs random
// push/pop traffic against a queue model.
module tb_sbox_input_fifo;
  logic        clk = 0, rst_n = 0;
  logic [31:0] sensed;
  logic        push, pop, empty, full;
  logic [1:0]  sel;
  logic [7:0]  head;
  logic [7:0]  model [$];
  int checks = 0, failures = 0;

  sbox_input_fifo #(.DEPTH(2)) dut (.clk, .rst_n, .sensed, .push, .sel, .pop, .head, .empty, .full);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  task automatic cyc(logic pu, logic [1:0] s, logic po);
    push = pu; sel = s; pop = po;
    @(posedge clk); #1;
    if (po && model.size() > 0) void'(model.pop_front());
    if (pu) model.push_back(sensed[8*s +: 8]);
    push = 0; pop = 0;
  endtask

  initial begin
    push = 0; pop = 0; sel = 0; sensed = 32'h6c0db4e1;
    #12 rst_n = 1;
    @(posedge clk); #1;
    checks++; if (!empty) begin failures++; $display("not empty after reset"); end
    // Fig. 4: prefill 10, T1 push 11 + lookup, T2 push 00 + lookup, T3 push 01 + lookup, T4 lookup
    cyc(1, 2'b10, 0); chk("after sel 10", head, 8'h0d);
    cyc(1, 2'b11, 0); chk("head T1", head, 8'h0d);
    checks++; if (!full) begin failures++; $display("not full with two entries"); end
    cyc(1, 2'b00, 1); chk("head T2", head, 8'h6c);
    cyc(1, 2'b01, 1); chk("head T3", head, 8'he1);
    cyc(0, 2'b00, 1); chk("head T4", head, 8'hb4);
    cyc(0, 2'b00, 1);
    checks++; if (!empty) begin failures++; $display("not empty at end"); end
    model.delete();
    for (int i = 0; i < 2000; i++) begin
      logic pu, po;
      sensed = $urandom;
      po = ($urandom_range(0, 1) == 1) && (model.size() > 0);
      pu = ($urandom_range(0, 1) == 1) && (model.size() < 2 || po);
      cyc(pu, 2'($urandom), po);
      checks++;
      if (empty !== (model.size() == 0)) begin failures++; $display("empty flag wrong"); end
      if (model.size() > 0) chk("random head", head, model[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
