// dm_spatial_agu: multi-channel spatial address generator of a DataMaestro.
//
// From one temporal address TA it forms NC = prod(BS) channel addresses
//   SA[c] = TA + sum_j S_s[j] * x_s[j](c)
// where x_s[j](c) are the spatial loop indices of channel c: the mixed-radix
// digits of c with radices BS[0], BS[1], ... (BS[0] fastest). The indices are
// design-time constants per channel, so each product is a stride times a
// constant and the spatial bounds are fixed at design time while the strides
// are runtime inputs, as in the paper. Digit order is this design's choice
// and matches the paper's worked example (BS = [2,2], S_s = [1,2] gives
// offsets 0,1,2,3).
//
// Interface: purely combinational, ta and cfg_stride in, sa out.
module dm_spatial_agu
  import dm_pkg::*;
#(
  parameter int unsigned DS = 2,
  parameter int unsigned BS [MAX_DS] = '{8, 4},   // entries at DS and above are unused
  parameter int unsigned NC = 32
) (
  input  addr_t ta,
  input  addr_t cfg_stride [DS],
  output addr_t sa         [NC]
);
  // Loop index of spatial dimension j for channel c.
  function automatic int unsigned sidx(input int unsigned c, input int unsigned j);
    int unsigned r;
    r = c;
    for (int unsigned k = 0; k < j; k++) r = r / BS[k];
    return r % BS[j];
  endfunction

  for (genvar c = 0; c < NC; c++) begin : g_ch
    always_comb begin
      addr_t a;
      a = ta;
      for (int unsigned j = 0; j < DS; j++) begin
        a = a + addr_t'(cfg_stride[j] * addr_t'(sidx(c, j)));
      end
      sa[c] = a;
    end
  end
endmodule
