// hikonv_pkg -- constants and elaboration-time helpers shared by the HiKonv
// datapath.
//
// A HiKonv multiplier input is cut into slices of S bits. Each slice holds
// one low-bitwidth element in its low bits; the high bits are guard bits
// that absorb the growth of the summed partial products. The functions here
// give the slice size and the guard bits for the three uses of the
// multiplier:
//   single multiplier   Gb = ceil(log2(min(K, N)))
//   1-D convolution     Gb = ceil(log2(K))
//   DNN convolution     Gb = ceil(log2(M * min(K, N)))
// and S = q + Gb when p = 1, p + Gb when q = 1, p + q + Gb otherwise.
// These follow the paper's equations. N is the count of elements in the
// 27-bit multiplier port and K in the 18-bit port, as in the paper's
// search. The DSP port widths (27 x 18) are those of the DSP48E2
// multiplier. The mode encoding is this design's own choice.
package hikonv_pkg;

  localparam int unsigned DSP_A_W = 27;  // wide multiplier port
  localparam int unsigned DSP_B_W = 18;  // narrow multiplier port

  // Operating mode of the top-level compute unit.
  typedef enum logic [1:0] {
    MODE_SINGLE = 2'd0,  // one F_{N,K} partial convolution per input
    MODE_CONV1D = 2'd1,  // long 1-D convolution, chunk by chunk
    MODE_DNN    = 2'd2   // M input features summed per output row
  } hk_mode_e;

  function automatic int unsigned ceil_log2(input int unsigned v);
    int unsigned r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  function automatic int unsigned min_u(input int unsigned a, input int unsigned b);
    return (a < b) ? a : b;
  endfunction

  function automatic int unsigned gb_single(input int unsigned n, input int unsigned k);
    return ceil_log2(min_u(n, k));
  endfunction

  function automatic int unsigned gb_conv1d(input int unsigned k);
    return ceil_log2(k);
  endfunction

  function automatic int unsigned gb_dnn(input int unsigned m, input int unsigned n,
                                         input int unsigned k);
    return ceil_log2(m * min_u(n, k));
  endfunction

  // Slice size for p-bit elements in one port and q-bit in the other.
  function automatic int unsigned slice_bits(input int unsigned p, input int unsigned q,
                                             input int unsigned gb);
    if (p == 1) return q + gb;
    if (q == 1) return p + gb;
    return p + q + gb;
  endfunction

endpackage
