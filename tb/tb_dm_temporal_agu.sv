// tb_dm_temporal_agu: self-checking test of dm_temporal_agu (6 dimensions).
// 1) The worked example of a 4x4x4 GeMM on a 2x2x2 array: bounds [2,2,2],
//    strides [4,0,8] must give 0,4,0,4,8,12,8,12, one address per cycle.
// 2) Random bounds/strides/base with a randomly stalling consumer, compared
//    with a nested-loop reference model; finish must pulse exactly once.
module tb_dm_temporal_agu;
  import dm_pkg::*;
  localparam int DT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, ta_valid, ta_ready, busy, finish;
  addr_t cfg_base, ta;
  logic [CNT_W-1:0] cfg_bound [DT];
  addr_t cfg_stride [DT];

  dm_temporal_agu #(.DT(DT)) dut (.clk, .rst_n, .start, .cfg_base, .cfg_bound, .cfg_stride,
    .ta_valid, .ta_ready, .ta, .busy, .finish);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: expected address list by explicit nested loops.
  function automatic void expected(ref addr_t exp[$]);
    int unsigned idx [DT];
    int unsigned total = 1;
    exp.delete();
    for (int i = 0; i < DT; i++) total *= (cfg_bound[i] == 0) ? 1 : cfg_bound[i];
    for (int i = 0; i < DT; i++) idx[i] = 0;
    for (int unsigned n = 0; n < total; n++) begin
      addr_t a = cfg_base;
      for (int i = 0; i < DT; i++) a += addr_t'(cfg_stride[i] * idx[i]);
      exp.push_back(a);
      for (int i = 0; i < DT; i++) begin
        int unsigned b = (cfg_bound[i] == 0) ? 1 : cfg_bound[i];
        if (idx[i] + 1 < b) begin idx[i]++; break; end
        idx[i] = 0;
      end
    end
  endfunction

  task automatic run(input int stall_pct, output int cycles);
    addr_t exp[$];
    int got = 0, fin = 0;
    expected(exp);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 0;
    while (busy && cycles < 100000) begin
      ta_ready = ($urandom_range(0, 99) >= stall_pct);
      #1;
      if (ta_valid && ta_ready) begin
        check(got < exp.size() && ta == exp[got], $sformatf("addr %0d: %0d", got, ta));
        got++;
      end
      @(posedge clk); #1;
      if (finish) fin++;
      cycles++;
      @(negedge clk);
    end
    check(got == exp.size(), $sformatf("address count %0d vs %0d", got, exp.size()));
    check(fin == 1, $sformatf("finish pulses %0d", fin));
  endtask

  initial begin
    int cyc;
    start = 0; ta_ready = 1; cfg_base = '0;
    for (int i = 0; i < DT; i++) begin cfg_bound[i] = 1; cfg_stride[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Worked example
    cfg_bound[0] = 2; cfg_bound[1] = 2; cfg_bound[2] = 2;
    cfg_stride[0] = 4; cfg_stride[1] = 0; cfg_stride[2] = 8;
    begin
      addr_t ex[8] = '{0, 4, 0, 4, 8, 12, 8, 12};
      addr_t e[$];
      expected(e);
      for (int i = 0; i < 8; i++) check(e[i] == ex[i], "reference model vs worked example");
    end
    run(0, cyc);
    check(cyc == 8, $sformatf("8 addresses in %0d cycles", cyc));
    // Random configurations
    for (int t = 0; t < 40; t++) begin
      cfg_base = addr_t'($urandom);
      for (int i = 0; i < DT; i++) begin
        cfg_bound[i]  = CNT_W'($urandom_range(0, 4));
        cfg_stride[i] = addr_t'($urandom);
      end
      run(t % 2 ? 30 : 0, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
