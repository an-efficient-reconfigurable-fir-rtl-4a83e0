// fir_da_pkg -- constants and types shared by the distributed-arithmetic FIR.
//
// The filter computes y(n) = sum_{k=0}^{K-1} h_k * x(n-k) bit-serially: in
// each of L clock cycles one bit plane of the K stored samples addresses a
// multiplexer-based partial product generator, whose result is shifted by the
// bit index and accumulated. The sizes below are those of the filter the
// design targets: 8 taps, 16-bit samples, 16-bit coefficients and a 34-bit
// output. The partial product is one bit wider (19) than a plain reading of
// "four 17-bit sums give 18 bits" would suggest, because the sum of eight
// 16-bit signed coefficients needs 19 bits; the shifted product is kept at the
// full accumulator width (34) for the same reason.
//
// bit_tag_t travels down the pipeline alongside each bit plane: a valid bit,
// the bit index (the shift amount) and flags marking the first plane (which
// restarts the accumulator) and the last one (the sign plane, subtracted).
package fir_da_pkg;

  localparam int unsigned K      = 8;    // taps processed in parallel
  localparam int unsigned L      = 16;   // input sample width = cycles per output
  localparam int unsigned COEF_W = 16;   // coefficient width
  localparam int unsigned PP_W   = COEF_W + $clog2(K);     // 19: partial product
  localparam int unsigned OUT_W  = 34;   // accumulator and output width
  localparam int unsigned IDX_W  = $clog2(L);              // bit index width

  typedef struct packed {
    logic             valid;  // this cycle carries a bit plane
    logic             first;  // bit plane 0 (LSBs)
    logic             last;   // bit plane L-1 (sign bits)
    logic [IDX_W-1:0] idx;    // bit index i, the shift amount
  } bit_tag_t;

endpackage
