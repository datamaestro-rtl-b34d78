// tb_dm_mic_write: self-checking test of dm_mic_write.
// All combinations of address/data presence and grant with random values:
// a write request exactly when both heads are present, carrying that address
// and data, and a pop exactly when such a request is granted.
module tb_dm_mic_write;
  import dm_pkg::*;
  int checks = 0, failures = 0;
  logic av, dv, pop, gnt; addr_t a; word_t d; mem_req_t req;

  dm_mic_write dut (.addr_valid(av), .addr(a), .data_valid(dv), .data(d), .pop, .req, .gnt);

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
    for (int t = 0; t < 800; t++) begin
      {av, dv, gnt} = 3'(t);
      a = addr_t'($urandom); d = {$urandom, $urandom};
      #1;
      check(req.valid == (av && dv), "valid");
      check(pop == (av && dv && gnt), "pop");
      if (req.valid) check(req.we && req.addr == a && req.wdata == d, "payload");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
