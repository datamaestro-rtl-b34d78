// tb_dm_ext_transposer: self-checking test of dm_ext_transposer (8x8x8 bit).
// Random tiles through the extension with random source valid and sink
// ready; every output must equal the transposed input (or the input itself
// in bypass), in order, with one cycle of latency and one word per cycle
// when never stalled.
module tb_dm_ext_transposer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic bypass, iv, ir, ov, ordy;
  logic [511:0] id, od;

  dm_ext_transposer dut (.clk, .rst_n, .bypass, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [511:0] tr(input logic [511:0] x);
    logic [511:0] y;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) y[(c*8+r)*8 +: 8] = x[(r*8+c)*8 +: 8];
    return y;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [511:0] exp[$];
  initial begin
    int n_out = 0, first_out = -1;
    iv = 0; ordy = 0; id = 0; bypass = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      if (cyc == 1500) bypass = 1;
      if (!iv || ir) begin
        iv = (cyc < 100) ? 1'b1 : ($urandom_range(0, 3) != 0);
        for (int k = 0; k < 16; k++) id[k*32 +: 32] = $urandom;
      end
      ordy = (cyc < 100) ? 1'b1 : ($urandom_range(0, 3) != 0);
      #1;
      if (ov && ordy) begin
        check(exp.size() > 0 && od == exp.pop_front(), $sformatf("output %0d", n_out));
        n_out++;
      end
      if (iv && ir) exp.push_back(bypass ? id : tr(id));
      @(posedge clk);
      if (cyc == 99) check(n_out == 99, $sformatf("full rate: %0d words in 100 cycles", n_out));
    end
    check(n_out > 1000, "enough traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
