// input_buffer_addr_gen -- tap delay line and bit-plane address generator.
//
// The buffer holds the K most recent input samples, buf[k] = x(n-k). When a
// sample is accepted it is shifted in at buf[0] and the oldest one drops out.
// For the next L clock cycles the block then presents one bit plane per cycle,
// least significant first: addr[k] = bit i of x(n-k), i = 0 .. L-1, together
// with a tag giving i and marking the first (i = 0) and last (i = L-1, the
// sign bits) planes. The bit counter selects the plane from the buffer and
// the resulting address is stored in an address register, so plane i of a
// sample accepted at clock edge t is presented after edge t+1+i.
//
// Interface: a sample x_in is taken on a rising clock edge with in_valid and
// in_ready both high. in_ready is high while idle and in the cycle that
// selects the last plane, so back-to-back samples are taken every L cycles,
// the filter's throughput of one output per L clocks. Reset (synchronous,
// active low) clears the delay line to zero history and makes the block idle.
//
// Feeding the taps one sample at a time, LSB-first bit order, the stored
// addresses and the L-cycle-per-sample schedule follow the filter's
// description; the
// valid/ready handshake and the reset behaviour are this design's own.
module input_buffer_addr_gen
  import fir_da_pkg::*;
#(
  parameter int unsigned NTAPS = fir_da_pkg::K,
  parameter int unsigned XW    = fir_da_pkg::L
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [XW-1:0]    x_in,
  output logic [NTAPS-1:0] addr,
  output bit_tag_t         tag
);

  localparam int unsigned CW = (XW > 1) ? $clog2(XW) : 1;

  logic [XW-1:0] taps_q [NTAPS];
  logic [CW-1:0] cnt_q;
  logic          busy_q;
  logic          accept;
  logic          last_plane;

  assign last_plane = (cnt_q == CW'(XW - 1));
  assign in_ready   = !busy_q || last_plane;
  assign accept     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cnt_q  <= '0;
      for (int k = 0; k < NTAPS; k++) taps_q[k] <= '0;
    end else if (accept) begin
      busy_q    <= 1'b1;
      cnt_q     <= '0;
      taps_q[0] <= x_in;
      for (int k = 1; k < NTAPS; k++) taps_q[k] <= taps_q[k-1];
    end else if (busy_q) begin
      if (last_plane) busy_q <= 1'b0;
      else            cnt_q  <= cnt_q + 1'b1;
    end
  end

  // Address of the plane selected by the bit counter, stored in the address
  // register on the next clock edge.
  logic [NTAPS-1:0] addr_d;
  bit_tag_t         tag_d;

  always_comb begin
    for (int k = 0; k < NTAPS; k++) addr_d[k] = taps_q[k][cnt_q];
    tag_d.valid = busy_q;
    tag_d.first = busy_q && (cnt_q == '0);
    tag_d.last  = busy_q && last_plane;
    tag_d.idx   = IDX_W'(cnt_q);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      addr <= '0;
      tag  <= '0;
    end else begin
      addr <= addr_d;
      tag  <= tag_d;
    end
  end

endmodule
