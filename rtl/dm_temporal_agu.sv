// dm_temporal_agu: N-dimensional temporal address generator of a DataMaestro.
//
// It walks the loop nest
//   for x[DT-1] < B[DT-1] ... for x[0] < B[0]:  TA = base + sum_i S[i]*x[i]
// producing one temporal address per cycle. No multiplier or divider is used:
// each dimension is a dual counter, a bound counter holding the loop index
// and a stride counter holding S[i]*x[i] by adding S[i] on every step. The
// innermost dimension steps whenever an address is taken; dimension i+1 steps
// when every dimension below it overflows (index = B-1) in the same step, and
// an overflowing dimension returns to zero. An adder tree sums the base with
// all stride counters. This dual-counter structure and the overflow chaining
// follow the paper; counter widths, the start/finish handshake and treating a
// bound of 0 as 1 are this design's choices.
//
// Interface: a start pulse latches base, bounds and strides and begins
// generation (ignored while busy). ta/ta_valid present the current address;
// it is taken when ta_ready (QueueReady: every channel's address FIFO has
// room) is high. finish pulses for one cycle after the last address is taken.
// Timing: the first address is valid the cycle after start; then one address
// per cycle while ta_ready is high.
module dm_temporal_agu
  import dm_pkg::*;
#(
  parameter int unsigned DT = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  addr_t            cfg_base,
  input  logic [CNT_W-1:0] cfg_bound  [DT],
  input  addr_t            cfg_stride [DT],
  output logic             ta_valid,
  input  logic             ta_ready,
  output addr_t            ta,
  output logic             busy,
  output logic             finish
);
  addr_t            base_q;
  logic [CNT_W-1:0] bound_q  [DT];
  addr_t            stride_q [DT];
  logic [CNT_W-1:0] idx_q    [DT];   // bound counters
  addr_t            off_q    [DT];   // stride counters

  logic [DT-1:0] last;    // dimension at its final index
  logic [DT-1:0] enable;  // enable_D(i): dimension i steps this cycle
  logic          step;

  assign step = busy && ta_ready;

  always_comb begin
    for (int i = 0; i < DT; i++) begin
      last[i] = (idx_q[i] + 1'b1 >= bound_q[i]);
    end
  end

  // enable_D(i): dimension i steps when every lower dimension overflows.
  always_comb begin
    logic e;
    e = step;
    for (int i = 0; i < DT; i++) begin
      enable[i] = e;
      e = e && last[i];
    end
  end

  // Adder tree: base + all stride-counter offsets.
  always_comb begin
    addr_t sum;
    sum = base_q;
    for (int i = 0; i < DT; i++) sum = sum + off_q[i];
    ta = sum;
  end

  assign ta_valid = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      finish <= 1'b0;
      base_q <= '0;
      for (int i = 0; i < DT; i++) begin
        bound_q[i]  <= '0;
        stride_q[i] <= '0;
        idx_q[i]    <= '0;
        off_q[i]    <= '0;
      end
    end else begin
      finish <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          base_q <= cfg_base;
          for (int i = 0; i < DT; i++) begin
            bound_q[i]  <= cfg_bound[i];
            stride_q[i] <= cfg_stride[i];
            idx_q[i]    <= '0;
            off_q[i]    <= '0;
          end
        end
      end else begin
        for (int i = 0; i < DT; i++) begin
          if (enable[i]) begin
            if (last[i]) begin
              idx_q[i] <= '0;
              off_q[i] <= '0;
            end else begin
              idx_q[i] <= idx_q[i] + 1'b1;
              off_q[i] <= off_q[i] + stride_q[i];
            end
          end
        end
        // The whole nest is done when the outermost dimension overflows.
        if (enable[DT-1] && last[DT-1]) begin
          busy   <= 1'b0;
          finish <= 1'b1;
        end
      end
    end
  end
endmodule
