// tb_dm_fifo: self-checking test of dm_fifo.
// Random pushes and pops (never pushing into a full FIFO without popping,
// never popping an empty one) are checked against a queue model: head data,
// occupancy, full and empty every cycle. Run at depth 8 and depth 1.
module tb_dm_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        push8, pop8, full8, empty8;  logic [63:0] din8, dout8;  logic [3:0] count8;
  logic        push1, pop1, full1, empty1;  logic [63:0] din1, dout1;  logic [0:0] count1;

  dm_fifo #(.WIDTH(64), .DEPTH(8)) dut8 (.clk, .rst_n, .push(push8), .din(din8), .pop(pop8),
    .dout(dout8), .count(count8), .full(full8), .empty(empty8));
  dm_fifo #(.WIDTH(64), .DEPTH(1)) dut1 (.clk, .rst_n, .push(push1), .din(din1), .pop(pop1),
    .dout(dout1), .count(count1), .full(full1), .empty(empty1));

  logic [63:0] q8[$], q1[$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push8 = 0; pop8 = 0; push1 = 0; pop1 = 0; din8 = 0; din1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // compare model
      check(count8 == q8.size(), $sformatf("count8 %0d vs %0d", count8, q8.size()));
      check(full8 == (q8.size() == 8) && empty8 == (q8.size() == 0), "flags8");
      if (q8.size() > 0) check(dout8 == q8[0], $sformatf("dout8 %h vs %h", dout8, q8[0]));
      check(count1 == q1.size(), "count1");
      if (q1.size() > 0) check(dout1 == q1[0], "dout1");
      // drive
      pop8  = (q8.size() > 0) && ($urandom_range(0, 99) < 45 + (i / 1000) * 10);
      push8 = ($urandom_range(0, 99) < 55) && (q8.size() < 8 || pop8);
      din8  = {$urandom, $urandom};
      pop1  = (q1.size() > 0) && ($urandom_range(0, 1) == 1);
      push1 = ($urandom_range(0, 1) == 1) && (q1.size() < 1 || pop1);
      din1  = {$urandom, $urandom};
      @(posedge clk);
      #1;
      if (pop8) void'(q8.pop_front());
      if (push8) q8.push_back(din8);
      if (pop1) void'(q1.pop_front());
      if (push1) q1.push_back(din1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
