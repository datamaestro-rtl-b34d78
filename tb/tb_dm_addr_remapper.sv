// tb_dm_addr_remapper: self-checking test of dm_addr_remapper.
// Mode 0 (2048-bank groups, fully interleaved) must be the identity. Mode 1
// (512-bank groups) is checked arithmetically: a group holds 512 banks x 8
// rows x 8 bytes = 32KB of contiguous logical addresses, interleaved over its
// banks; the physical (fully interleaved) address of a logical one is
// (row * 2048 + group * 512 + bank_in_group) * 8 + byte. A third instance
// with a group size of 1 checks the non-interleaved mode the same way.
module tb_dm_addr_remapper;
  import dm_pkg::*;
  int checks = 0, failures = 0;
  addr_t a, y, y3;
  logic m;
  logic [1:0] m3;

  dm_addr_remapper dut (.addr_in(a), .mode(m), .addr_out(y));
  dm_addr_remapper #(.NMODES(3), .GROUPS('{2048, 512, 1, 1})) dut3 (.addr_in(a), .mode(m3), .addr_out(y3));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic addr_t model(input addr_t l, input int unsigned g);
    int unsigned bytes_per_group = g * WORDS_PER_BANK * 8;
    int unsigned grp = l / bytes_per_group;
    int unsigned off = l % bytes_per_group;
    int unsigned w   = off / 8;
    int unsigned big = w % g;
    int unsigned row = w / g;
    return addr_t'((row * NUM_BANKS + grp * g + big) * 8 + (l % 8));
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      a = addr_t'($urandom);
      m = 0; m3 = 2'd0; #1;
      check(y == a, "mode 0 identity");
      check(y3 == a, "3-mode: mode 0 identity");
      m = 1; m3 = 2'd1; #1;
      check(y == model(a, 512), $sformatf("mode 1: %h -> %h, expected %h", a, y, model(a, 512)));
      check(y3 == model(a, 512), "3-mode: mode 1");
      m3 = 2'd2; #1;
      check(y3 == model(a, 1), $sformatf("non-interleaved: %h -> %h, expected %h", a, y3, model(a, 1)));
    end
    // consecutive words of one group land in consecutive banks
    m = 1;
    a = addr_t'(32768 + 8); #1;
    check(y[BYTE_BITS +: BANK_BITS] == 513, "group 1, second word in bank 513");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
