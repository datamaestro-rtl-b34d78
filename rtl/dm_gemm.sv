// dm_gemm: tensor-core-like GeMM accelerator, D = A x B + C.
//
// An M x N x K array of multiply-accumulate units: each cycle it can take one
// M x K tile of A and one K x N tile of B (signed 8-bit elements) and add
// their product into an M x N tile of 32-bit accumulators. For each output
// tile the accumulators start from the C tile (initial value) at the first of
// cfg_k_tiles steps; after the last step the tile is copied to the output
// register as D. cfg_tiles output tiles are computed after a start pulse.
// A step is taken when A, B (and C on a first step) are all valid and, on a
// last step, the output register is free or being emptied, so the array
// stalls only on missing operands or a blocked result.
//
// Layouts (this design's choice): A[m][k] at bits (m*K+k)*8, B[k][n] at
// (k*N+n)*8, C and D [m][n] at (m*N+n)*32. The 8x8x8 size, the precisions
// and D = A x B + C are the paper's; the step protocol is this design's.
//
// Timing: one K step per cycle; D valid the cycle after the last step.
module dm_gemm #(
  parameter int unsigned M = 8,
  parameter int unsigned N = 8,
  parameter int unsigned K = 8,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [15:0]              cfg_k_tiles,
  input  logic [15:0]              cfg_tiles,
  input  logic                     a_valid,
  output logic                     a_ready,
  input  logic [M*K*IN_W-1:0]      a_data,
  input  logic                     b_valid,
  output logic                     b_ready,
  input  logic [K*N*IN_W-1:0]      b_data,
  input  logic                     c_valid,
  output logic                     c_ready,
  input  logic [M*N*ACC_W-1:0]     c_data,
  output logic                     d_valid,
  input  logic                     d_ready,
  output logic [M*N*ACC_W-1:0]     d_data,
  output logic                     busy
);
  logic [15:0] k_q, tile_q, k_tiles_q, tiles_q;
  logic        first, last, step;
  logic [M*N*ACC_W-1:0] acc_q, acc_d;

  assign first = (k_q == '0);
  assign last  = (k_q + 1'b1 >= k_tiles_q);

  assign step = busy && a_valid && b_valid && (!first || c_valid) &&
                (!last || !d_valid || d_ready);

  assign a_ready = step;
  assign b_ready = step;
  assign c_ready = step && first;

  // Multiply-accumulate array.
  always_comb begin
    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < N; n++) begin
        logic signed [ACC_W-1:0] s;
        s = first ? c_data[(m*N+n)*ACC_W +: ACC_W] : acc_q[(m*N+n)*ACC_W +: ACC_W];
        for (int k = 0; k < K; k++) begin
          s = s + ACC_W'($signed(a_data[(m*K+k)*IN_W +: IN_W]) * $signed(b_data[(k*N+n)*IN_W +: IN_W]));
        end
        acc_d[(m*N+n)*ACC_W +: ACC_W] = s;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      k_q       <= '0;
      tile_q    <= '0;
      k_tiles_q <= '0;
      tiles_q   <= '0;
      acc_q     <= '0;
      d_valid   <= 1'b0;
      d_data    <= '0;
    end else begin
      if (d_valid && d_ready) d_valid <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy      <= (cfg_tiles != '0);
          k_tiles_q <= cfg_k_tiles;
          tiles_q   <= cfg_tiles;
          k_q       <= '0;
          tile_q    <= '0;
        end
      end else if (step) begin
        acc_q <= acc_d;
        if (last) begin
          d_valid <= 1'b1;
          d_data  <= acc_d;
          k_q     <= '0;
          tile_q  <= tile_q + 1'b1;
          if (tile_q + 1'b1 >= tiles_q) busy <= 1'b0;
        end else begin
          k_q <= k_q + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (d_valid && !d_ready) |=> (d_valid && $stable(d_data)))
    else $error("dm_gemm: result changed while stalled");
endmodule
