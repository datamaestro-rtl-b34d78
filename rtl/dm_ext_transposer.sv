// dm_ext_transposer: Transposer datapath extension.
//
// Sits between a read DataMaestro's gathered data word and the accelerator
// and transposes, on the fly, a ROWS x COLS tile of ELEM_W-bit elements:
// output element (c, r) = input element (r, c), element (r, c) being stored at
// bits [(r*COLS + c)*ELEM_W +: ELEM_W]. The transposition is pure wiring.
// Like every extension it has a runtime bypass (the select of a demux/mux
// pair around the custom logic) followed by one pipeline cut, a
// valid/ready register that sustains one word per cycle.
//
// The Transposer's function, its bypass and the pipeline cut follow the
// paper; the element layout is this design's choice.
//
// Interface: valid/ready stream in and out; bypass is sampled with each word.
// Timing: one cycle of latency, one word per cycle.
module dm_ext_transposer #(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned ELEM_W = 8,
  parameter int unsigned DATA_W = ROWS * COLS * ELEM_W
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
  logic [DATA_W-1:0] transposed, sel;

  always_comb begin
    transposed = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        transposed[(c*ROWS + r)*ELEM_W +: ELEM_W] = in_data[(r*COLS + c)*ELEM_W +: ELEM_W];
  end

  assign sel = bypass ? in_data : transposed;

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
    else $error("dm_ext_transposer: output changed while stalled");
endmodule
