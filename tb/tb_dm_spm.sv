// tb_dm_spm: self-checking test of dm_spm, 4 lanes.
// Random writes and reads on distinct banks per cycle against a reference
// array; read data must appear on the requesting lane one cycle later.
// Also checks that the bank and row fields select distinct words (bank 0 and
// bank NUM_BANKS-1, rows 0 and WORDS_PER_BANK-1).
module tb_dm_spm;
  import dm_pkg::*;
  localparam int NP = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NP-1:0] en, we;
  logic [BANK_BITS-1:0] bank [NP];
  logic [WORD_BITS-1:0] row [NP];
  word_t wd [NP], rd [NP];

  dm_spm #(.NP(NP)) dut (.clk, .en, .we, .bank, .row, .wdata(wd), .rdata(rd));

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

  word_t model [int];
  initial begin
    word_t exp [NP]; logic ev [NP];
    for (int p = 0; p < NP; p++) ev[p] = 0;
    en = 0; we = 0;
    // fill 32 banks x all rows
    for (int b = 0; b < 32; b++) for (int r = 0; r < WORDS_PER_BANK; r++) begin
      @(negedge clk);
      en = 4'b0001; we = 4'b0001;
      bank[0] = BANK_BITS'(b * 64 + 5); row[0] = WORD_BITS'(r); wd[0] = {$urandom, $urandom};
      model[(b * 64 + 5) * WORDS_PER_BANK + r] = wd[0];
    end
    @(negedge clk); en = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) if (ev[p]) check(rd[p] == exp[p], $sformatf("lane %0d read", p));
      for (int p = 0; p < NP; p++) begin
        int b, r;
        b = (($urandom_range(0, 7) * 4 + p) * 64 + 5);   // distinct banks per lane
        r = $urandom_range(0, WORDS_PER_BANK - 1);
        en[p] = ($urandom_range(0, 3) != 0); we[p] = ($urandom_range(0, 2) == 0);
        bank[p] = BANK_BITS'(b); row[p] = WORD_BITS'(r); wd[p] = {$urandom, $urandom};
        ev[p] = en[p] && !we[p];
        exp[p] = model[b * WORDS_PER_BANK + r];
      end
      for (int p = 0; p < NP; p++) if (en[p] && we[p]) model[int'(bank[p]) * WORDS_PER_BANK + int'(row[p])] = wd[p];
    end
    // corner words
    @(negedge clk);
    en = 4'b1111; we = 4'b1111;
    bank[0] = 0; row[0] = 0; wd[0] = 64'h1111;
    bank[1] = BANK_BITS'(NUM_BANKS - 1); row[1] = 0; wd[1] = 64'h2222;
    bank[2] = 1; row[2] = WORD_BITS'(WORDS_PER_BANK - 1); wd[2] = 64'h3333;
    bank[3] = BANK_BITS'(NUM_BANKS - 1 - 1); row[3] = WORD_BITS'(WORDS_PER_BANK - 1); wd[3] = 64'h4444;
    @(negedge clk); we = 0;
    @(negedge clk); en = 0;
    check(rd[0] == 64'h1111 && rd[1] == 64'h2222 && rd[2] == 64'h3333 && rd[3] == 64'h4444, "corner words");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
