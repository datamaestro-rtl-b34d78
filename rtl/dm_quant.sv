// dm_quant: quantization accelerator, E = Rescale(D).
//
// Each of the LANES 32-bit results of a D tile is rescaled to 8 bits:
//   y = sat8( ((x * cfg_mult) + 2^(cfg_shift-1)) >>> cfg_shift ) + cfg_zp )
// with a signed 32-bit multiplier, an arithmetic shift with round-half-up
// (no rounding term when cfg_shift = 0) and saturation to [-128, 127].
// One pipeline register with valid/ready; lane i of D maps to lane i of E.
// The paper gives only E_8 = Rescale(D_32) and draws adder and multiplier
// stages; the formula is this design's choice.
//
// Timing: one tile per cycle, one cycle of latency.
module dm_quant #(
  parameter int unsigned LANES = 64,
  parameter int unsigned IN_W  = 32,
  parameter int unsigned OUT_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [31:0]     cfg_mult,
  input  logic [5:0]             cfg_shift,
  input  logic signed [7:0]      cfg_zp,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [LANES*IN_W-1:0]  in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [LANES*OUT_W-1:0] out_data
);
  localparam int MAXV = (1 <<< (OUT_W - 1)) - 1;
  localparam int MINV = -(1 <<< (OUT_W - 1));

  logic [LANES*OUT_W-1:0] q;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [IN_W+32:0] p;
      p = $signed(in_data[i*IN_W +: IN_W]) * cfg_mult;
      if (cfg_shift != '0) p = p + ((IN_W+33)'(1) <<< (cfg_shift - 1'b1));
      p = (p >>> cfg_shift) + (IN_W+33)'(cfg_zp);
      if (p > (IN_W+33)'(MAXV))      q[i*OUT_W +: OUT_W] = OUT_W'(MAXV);
      else if (p < (IN_W+33)'(MINV)) q[i*OUT_W +: OUT_W] = OUT_W'(MINV);
      else               q[i*OUT_W +: OUT_W] = p[OUT_W-1:0];
    end
  end

  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= q;
    end
  end
endmodule
