// tb_dm_quant: self-checking test of dm_quant (64 lanes, int32 -> int8).
// Random tiles and rescale parameters through the unit with a stalling sink;
// each lane compared with sat8(((x * mult + 2^(shift-1)) >> shift) + zp)
// computed in 64-bit arithmetic. Saturation on both sides is counted.
module tb_dm_quant;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic iv, ir, ov, ordy;
  logic [2047:0] id;
  logic [511:0] od;
  logic signed [31:0] mult; logic [5:0] shift; logic signed [7:0] zp;

  dm_quant dut (.clk, .rst_n, .cfg_mult(mult), .cfg_shift(shift), .cfg_zp(zp),
    .in_valid(iv), .in_ready(ir), .in_data(id), .out_valid(ov), .out_ready(ordy), .out_data(od));

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

  int sat_hi = 0, sat_lo = 0;
  function automatic logic [511:0] model(input logic [2047:0] x);
    logic [511:0] y;
    for (int i = 0; i < 64; i++) begin
      longint p;
      p = longint'($signed(x[i*32 +: 32])) * longint'(mult);
      if (shift != 0) p = p + (longint'(1) <<< (shift - 1));
      p = (p >>> shift) + longint'(zp);
      if (p > 127) begin p = 127; sat_hi++; end
      if (p < -128) begin p = -128; sat_lo++; end
      y[i*8 +: 8] = 8'(p);
    end
    return y;
  endfunction

  logic [511:0] exp[$];
  initial begin
    iv = 0; ordy = 0; id = 0; mult = 1; shift = 0; zp = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int blk = 0; blk < 20; blk++) begin
      // new parameters only when the pipeline is empty
      @(negedge clk); iv = 0; ordy = 1;
      repeat (2) @(negedge clk);
      mult = $signed($urandom_range(0, 1 << (blk % 16)));
      if (blk % 3 == 0) mult = -mult;
      shift = 6'($urandom_range(0, 24)); zp = 8'($urandom);
      for (int cyc = 0; cyc < 50; cyc++) begin
        if (!iv || ir) begin
          iv = ($urandom_range(0, 3) != 0);
          for (int k = 0; k < 64; k++) id[k*32 +: 32] = $urandom >> $urandom_range(0, 31);
        end
        ordy = ($urandom_range(0, 3) != 0);
        #1;
        if (ov && ordy) check(exp.size() > 0 && od == exp.pop_front(), "E tile");
        if (iv && ir) exp.push_back(model(id));
        @(posedge clk);
        @(negedge clk);
      end
      ordy = 1; iv = 0;
      #1; if (ov) check(exp.size() > 0 && od == exp.pop_front(), "E tile");
      @(posedge clk); @(negedge clk);
    end
    check(sat_hi > 0 && sat_lo > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
