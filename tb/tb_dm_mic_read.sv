// tb_dm_mic_read: self-checking test of dm_mic_read with a 2-deep data FIFO.
// A memory model grants requests at random and answers one cycle after the
// grant with a word derived from the address; the consumer pops the data
// FIFO at random. Checked: data order and values, that the data FIFO never
// overflows (the ORM reserves slots), that requests stop while all slots are
// reserved (counted), that a disabled channel makes no request and delivers
// zeros. (The one-word-per-cycle rate with a 1-deep FIFO is checked in the
// reader's testbench.)
module tb_dm_mic_read;
  import dm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic word_t memval(input addr_t a);
    return {32'hC0DE0000 ^ 32'(a), 15'(a) , 17'(a) ^ 17'h1ABCD};
  endfunction

  // DUT with a 2-deep FIFO, and a second with a 1-deep FIFO.
  localparam int DBF = 2;
  logic ch_en, af_push, af_pop, af_full, af_empty;
  addr_t af_din, af_head;
  mem_req_t req; logic gnt; mem_rsp_t rsp;
  logic popd, rpush, df_full, df_empty; word_t rdata, df_head;
  logic [1:0] df_count;

  dm_fifo #(.WIDTH(ADDR_W), .DEPTH(4)) af (.clk, .rst_n, .push(af_push), .din(af_din), .pop(af_pop),
    .dout(af_head), .count(), .full(af_full), .empty(af_empty));
  dm_mic_read #(.DBF(DBF)) dut (.clk, .rst_n, .ch_en, .addr_valid(!af_empty), .addr(af_head), .addr_pop(af_pop),
    .req, .gnt, .rsp, .data_popped(popd), .rsp_push(rpush), .rsp_data(rdata));
  dm_fifo #(.WIDTH(BANK_W), .DEPTH(DBF)) df (.clk, .rst_n, .push(rpush), .din(rdata), .pop(popd),
    .dout(df_head), .count(df_count), .full(df_full), .empty(df_empty));

  // memory model
  int gnt_pct = 70;
  always_ff @(posedge clk) begin
    rsp.valid <= req.valid && gnt;
    rsp.rdata <= memval(req.addr);
  end

  int throttled = 0, nreq = 0;
  always @(posedge clk) if (rst_n) begin
    if (rpush && df_full && !popd) begin failures++; $display("FAIL data FIFO overflow"); end
    if (!af_empty && !req.valid && ch_en) throttled++;
    if (req.valid) nreq++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t sent[$];
  int consumer_pct = 30;
  // address producer
  task automatic produce(input int n);
    for (int i = 0; i < n; ) begin
      @(negedge clk);
      af_push = !af_full && ($urandom_range(0, 99) < 80);
      af_din = addr_t'($urandom) & ~addr_t'(7);
      if (af_push) begin sent.push_back(af_din); i++; end
      @(posedge clk); #1; af_push = 0;
    end
  endtask

  task automatic consume(input int n, input bit zero);
    for (int i = 0; i < n; ) begin
      @(negedge clk);
      gnt = ($urandom_range(0, 99) < gnt_pct);
      popd = !df_empty && ($urandom_range(0, 99) < consumer_pct);
      #1;
      if (popd) begin
        addr_t a = sent.pop_front();
        check(df_head == (zero ? '0 : memval(a)), $sformatf("word %0d: %h", i, df_head));
        i++;
      end
      @(posedge clk); #1;
    end
    @(negedge clk); popd = 0;
  endtask

  initial begin
    af_push = 0; af_din = 0; gnt = 0; popd = 0; ch_en = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork produce(300); consume(300, 0); join
    check(throttled > 0, "ORM throttled the RSC at least once");
    // disabled channel: no requests, zero data
    ch_en = 0; nreq = 0; consumer_pct = 60;
    fork produce(50); consume(50, 1); join
    check(nreq == 0, "disabled channel issued no request");
    ch_en = 1;
    $display("throttled cycles: %0d", throttled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
