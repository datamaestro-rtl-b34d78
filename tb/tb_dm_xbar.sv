// tb_dm_xbar: self-checking test of dm_xbar together with dm_spm, 6 ports.
// Ports issue random reads and writes, often to the same few banks so that
// conflicts are frequent. Checked every cycle: at most one grant per bank,
// a requesting port whose bank no other port wants is always granted, every
// bank in demand grants someone, and read data (one cycle after the grant)
// equals a reference memory updated by the granted writes. Also checked:
// no port waits more than 6 cycles (rotating priority), conflicts happened.
module tb_dm_xbar;
  import dm_pkg::*;
  localparam int NM = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mem_req_t req [NM];
  mem_rsp_t rsp [NM];
  logic [NM-1:0] gnt, ben, bwe;
  logic [BANK_BITS-1:0] bsel [NM];
  logic [WORD_BITS-1:0] brow [NM];
  word_t bwd [NM], brd [NM];

  dm_xbar #(.NM(NM)) dut (.clk, .rst_n, .req, .gnt, .rsp, .bank_en(ben), .bank_we(bwe),
    .bank_sel(bsel), .bank_row(brow), .bank_wdata(bwd), .bank_rdata(brd));
  dm_spm #(.NP(NM)) mem (.clk, .en(ben), .we(bwe), .bank(bsel), .row(brow), .wdata(bwd), .rdata(brd));

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

  word_t model [addr_t];
  word_t exp_rd [NM];
  logic  exp_v  [NM];
  int    wait_c [NM];
  int    conflicts = 0;

  function automatic word_t rd_model(input addr_t a);
    return model.exists(a) ? model[a] : '0;
  endfunction

  initial begin
    for (int m = 0; m < NM; m++) begin req[m] = '0; exp_v[m] = 0; wait_c[m] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // initialise the addresses used (4 banks x 2 rows, word aligned)
    for (int b = 0; b < 4; b++) for (int r = 0; r < 2; r++) begin
      addr_t a;
      a = addr_t'(((r * NUM_BANKS) + b * 301) * 8);
      @(negedge clk);
      req[0] = '{valid: 1'b1, we: 1'b1, addr: a, wdata: '0};
      @(posedge clk); #1;
      model[a] = '0;
    end
    @(negedge clk); req[0] = '0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // new requests only where the previous one was granted (hold otherwise)
      for (int m = 0; m < NM; m++) begin
        if (!req[m].valid || gnt[m]) begin
          int b, r;
          b = $urandom_range(0, 3); r = $urandom_range(0, 1);
          req[m].valid = ($urandom_range(0, 99) < 80);
          req[m].we    = ($urandom_range(0, 2) == 0);
          req[m].addr  = addr_t'(((r * NUM_BANKS) + b * 301) * 8);
          req[m].wdata = {$urandom, $urandom};
        end
      end
      #1;
      // read data due from last cycle's grants
      for (int m = 0; m < NM; m++) begin
        check(rsp[m].valid == exp_v[m], $sformatf("rsp valid port %0d", m));
        if (exp_v[m]) check(rsp[m].rdata == exp_rd[m], $sformatf("rsp data port %0d cyc %0d got %h exp %h", m, cyc, rsp[m].rdata, exp_rd[m]));
      end
      // arbitration rules
      for (int m = 0; m < NM; m++) begin
        bit alone, someone;
        alone = 1; someone = 0;
        for (int j = 0; j < NM; j++) begin
          if (j != m && req[j].valid && bsel[j] == bsel[m]) alone = 0;
          if (j != m && gnt[m] && gnt[j] && bsel[j] == bsel[m]) check(0, "two grants one bank");
          if (req[j].valid && bsel[j] == bsel[m] && gnt[j]) someone = 1;
        end
        if (req[m].valid) begin
          if (alone) check(gnt[m], "lone request not granted");
          else if (!gnt[m]) conflicts++;
          check(someone, "bank in demand idle");
        end
        check(!gnt[m] || req[m].valid, "grant without request");
      end
      // reference: reads see the memory before this cycle's writes
      for (int m = 0; m < NM; m++) begin
        exp_v[m] = gnt[m] && !req[m].we;
        exp_rd[m] = rd_model(req[m].addr);
      end
      for (int m = 0; m < NM; m++) if (gnt[m] && req[m].we) model[req[m].addr] = req[m].wdata;
      for (int m = 0; m < NM; m++) begin
        wait_c[m] = (req[m].valid && !gnt[m]) ? wait_c[m] + 1 : 0;
        if (wait_c[m] > NM) check(0, $sformatf("port %0d starved", m));
      end
      @(posedge clk);
    end
    check(conflicts > 100, $sformatf("bank conflicts exercised: %0d", conflicts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
