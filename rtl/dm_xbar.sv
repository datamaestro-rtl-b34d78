// dm_xbar: interleaved crossbar between the request ports and the banks.
//
// Every port can reach every bank. A port's bank is decoded from its
// physical address in fully interleaved order ([wordline | bank | byte]), so
// consecutive words fall in consecutive banks. Each cycle at most one port is
// granted per bank. Priority rotates: port (prio + k) mod NM has rank k, the
// rank-0 port advancing by one every cycle, and a requesting port is granted
// when no requesting port of lower rank asks for the same bank. This is the
// same outcome as a round-robin arbiter per bank, but is computed per port
// (NM*NM bank comparisons), which is far cheaper than NUM_BANKS arbiters when
// there are many more banks than ports. Granted ports drive the bank array
// (dm_spm) directly with their bank, row, write flag and data; a read's data
// returns on the same port one cycle after its grant. The lane outputs
// bank_sel, bank_row and bank_wdata are simply the port's request fields
// wired through; bank_en (the grant) decides whether a lane acts.
//
// The paper gives only the crossbar's function (full reachability with
// interleaved addressing); the arbitration scheme and the one-cycle latency
// are this design's choices.
module dm_xbar
  import dm_pkg::*;
#(
  parameter int unsigned NM = 89
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mem_req_t             req [NM],
  output logic     [NM-1:0]    gnt,
  output mem_rsp_t             rsp [NM],
  // bank array side, one lane per port
  output logic     [NM-1:0]    bank_en,
  output logic     [NM-1:0]    bank_we,
  output logic [BANK_BITS-1:0] bank_sel  [NM],
  output logic [WORD_BITS-1:0] bank_row  [NM],
  output word_t                bank_wdata[NM],
  input  word_t                bank_rdata[NM]
);
  localparam int unsigned PW = (NM > 1) ? $clog2(NM) : 1;

  logic [PW-1:0] prio;
  logic [PW-1:0] rank [NM];
  logic [NM-1:0] rd_q;

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      bank_sel[m] = req[m].addr[BYTE_BITS +: BANK_BITS];
      bank_row[m] = req[m].addr[BYTE_BITS + BANK_BITS +: WORD_BITS];
      rank[m]     = (PW'(m) >= prio) ? PW'(m) - prio : PW'(m) + PW'(NM) - prio;
    end
  end

  // A port loses when a requesting port of lower rank targets the same bank.
  for (genvar m = 0; m < NM; m++) begin : g_arb
    logic [NM-1:0] beaten;
    for (genvar j = 0; j < NM; j++) begin : g_vs
      if (j == m) begin : g_self
        assign beaten[j] = 1'b0;
      end else begin : g_other
        assign beaten[j] = req[j].valid && (bank_sel[j] == bank_sel[m]) && (rank[j] < rank[m]);
      end
    end
    assign gnt[m] = req[m].valid && !(|beaten);
  end

  for (genvar m = 0; m < NM; m++) begin : g_port
    assign bank_en[m]    = gnt[m];
    assign bank_we[m]    = req[m].we;
    assign bank_wdata[m] = req[m].wdata;
    assign rsp[m].valid  = rd_q[m];
    assign rsp[m].rdata  = bank_rdata[m];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio <= '0;
      rd_q <= '0;
    end else begin
      prio <= (prio == PW'(NM - 1)) ? '0 : prio + 1'b1;
      for (int m = 0; m < NM; m++) rd_q[m] <= gnt[m] && !req[m].we;
    end
  end

  // No two granted ports may share a bank.
  for (genvar a = 0; a < NM; a++) begin : g_chk
    always_ff @(posedge clk) begin
      if (rst_n) begin
        for (int b = a + 1; b < NM; b++)
          assert (!(gnt[a] && gnt[b] && bank_sel[a] == bank_sel[b]))
            else $error("dm_xbar: two grants to one bank");
      end
    end
  end
endmodule
