// fir_da_top -- reconfigurable K-tap FIR filter using modified distributed
// arithmetic.
//
// Computes y(n) = sum_{k=0}^{K-1} h_k * x(n-k) without multipliers. The
// datapath is a four-stage chain, all on one clock:
//   input_buffer_addr_gen : tap delay line; stores bit plane i of the K
//                           samples as the address, one plane per cycle,
//                           LSB first (registered)
//   ppg                   : pairs of address bits select 0, h, h' or h+h'
//                           from multiplexers; a CLA tree sums them
//                           (registered)
//   shifter               : weights the plane's sum by 2^i
//   accumulator           : adds the L weighted sums, subtracting the sign
//                           plane, and registers y
//
// Interface: x_in is taken on a clock edge with in_valid && in_ready; in_ready
// is high when the filter is idle or finishing its current sample, so one
// sample (and one output) every L clocks is the peak rate. The output for a
// sample accepted at edge t is registered at edge t+L+2 and y_valid is high
// for the cycle that follows. coef[k] = h_k can be rewritten between outputs
// to reconfigure the filter; it must be held stable from the accepting edge
// until y_valid. All arithmetic is two's complement; reset is synchronous and
// active low and clears the sample history.
//
// The block chain, the multiplexer-based partial product generator, the sizes
// (8 taps, 16-bit samples and coefficients, 34-bit output) follow the
// filter's description; the handshake, the pipeline register positions and
// the 19-bit partial product width are this design's own.
module fir_da_top
  import fir_da_pkg::*;
#(
  parameter int unsigned NTAPS = fir_da_pkg::K,
  parameter int unsigned XW    = fir_da_pkg::L,
  parameter int unsigned CW    = fir_da_pkg::COEF_W,
  parameter int unsigned OW    = fir_da_pkg::OUT_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [CW-1:0] coef [NTAPS],
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [XW-1:0]        x_in,
  output logic [OW-1:0]        y,
  output logic                 y_valid
);

  localparam int unsigned PW = CW + $clog2(NTAPS);

  logic [NTAPS-1:0] addr;
  bit_tag_t         tag_addr, tag_pp;
  logic signed [PW-1:0] pp;
  logic signed [OW-1:0] sh;

  input_buffer_addr_gen #(.NTAPS(NTAPS), .XW(XW)) u_inbuf (
    .clk, .rst_n, .in_valid, .in_ready, .x_in, .addr, .tag(tag_addr)
  );

  ppg #(.NTAPS(NTAPS), .CW(CW), .PW(PW)) u_ppg (
    .clk, .rst_n, .coef, .addr, .tag_in(tag_addr), .pp, .tag_out(tag_pp)
  );

  shifter #(.PW(PW), .SW(OW), .XW(XW)) u_shift (
    .pp, .shamt(tag_pp.idx[$clog2(XW)-1:0]), .sh
  );

  accumulator #(.OW(OW)) u_acc (
    .clk, .rst_n, .sh(sh), .tag(tag_pp), .y, .y_valid
  );

endmodule
