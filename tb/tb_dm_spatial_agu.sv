// tb_dm_spatial_agu: self-checking test of dm_spatial_agu.
// The worked example (bounds [2,2], strides [1,2]: offsets 0,1,2,3) and the
// default 8x4 configuration with random temporal addresses and strides,
// compared with SA[c] = TA + S0*(c mod 8) + S1*(c div 8).
module tb_dm_spatial_agu;
  import dm_pkg::*;
  int checks = 0, failures = 0;

  addr_t ta4, ta32;
  addr_t st4 [2], st32 [2];
  addr_t sa4 [4], sa32 [32];

  dm_spatial_agu #(.DS(2), .BS('{2, 2}), .NC(4)) dut4 (.ta(ta4), .cfg_stride(st4), .sa(sa4));
  dm_spatial_agu dut32 (.ta(ta32), .cfg_stride(st32), .sa(sa32));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t tas[8] = '{0, 4, 0, 4, 8, 12, 8, 12};
    st4[0] = 1; st4[1] = 2;
    for (int cc = 0; cc < 8; cc++) begin
      ta4 = tas[cc];
      #1;
      for (int c = 0; c < 4; c++) check(sa4[c] == tas[cc] + addr_t'(c), $sformatf("SA%0d cc%0d", c, cc));
    end
    for (int t = 0; t < 500; t++) begin
      ta32 = addr_t'($urandom); st32[0] = addr_t'($urandom); st32[1] = addr_t'($urandom);
      #1;
      for (int c = 0; c < 32; c++)
        check(sa32[c] == addr_t'(ta32 + st32[0] * (c % 8) + st32[1] * (c / 8)), $sformatf("sa32[%0d]", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
