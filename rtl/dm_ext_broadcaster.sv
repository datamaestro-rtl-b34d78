// dm_ext_broadcaster: Broadcaster datapath extension.
//
// Duplicates data across channels: the lowest SRC_W bits of the incoming
// word are repeated DATA_W/SRC_W times to fill the outgoing word. In the
// evaluation system it feeds the GeMM core's initial value: one row of
// eight 32-bit values is fetched and copied to all eight rows of the tile,
// so the reader needs to fetch only SRC_W/64 of its DATA_W/64 channels.
// Runtime bypass and one pipeline
// cut, as for every extension.
//
// Function, bypass and pipeline cut follow the paper; which slice is
// duplicated is this design's choice.
//
// Interface: valid/ready stream in and out; bypass sampled with each word.
// Timing: one cycle of latency, one word per cycle.
module dm_ext_broadcaster #(
  parameter int unsigned DATA_W = 2048,
  parameter int unsigned SRC_W  = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bypass,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data
);
  localparam int unsigned REP = DATA_W / SRC_W;

  if (REP * SRC_W != DATA_W) begin : g_bad
    $error("dm_ext_broadcaster: DATA_W must be a multiple of SRC_W");
  end

  logic [DATA_W-1:0] sel;
  assign sel = bypass ? in_data : {REP{in_data[SRC_W-1:0]}};

  // Pipeline cut
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= sel;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> (out_valid && $stable(out_data)))
    else $error("dm_ext_broadcaster: output changed while stalled");
endmodule
