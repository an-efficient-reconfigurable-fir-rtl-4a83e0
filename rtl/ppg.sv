// ppg -- shared-memory partial product generator with a CLA adder tree.
//
// For one bit plane the block forms PP = sum_k h_k * a_k, where a_k is bit i
// of tap sample x(n-k). Instead of a 2^K-entry look-up table, the taps are
// taken in pairs: for pair j a four-input multiplexer, selected by the two
// address bits (a_{2j} as select bit 0, a_{2j+1} as select bit 1), picks one
// of the four "table entries" 0, h_{2j}, h_{2j+1} and h_{2j}+h_{2j+1}; the
// pair sum comes from a carry look-ahead adder on the coefficients. The K/2
// multiplexer outputs are summed by a binary tree of CLA adders (for K = 8:
// two adders, then one). The result, with the bit-plane tag, is registered:
// one pipeline stage, so PP appears one clock after its address.
//
// Interface: coef[k] = h_k, two's complement, COEF_W bits; they may be changed
// at any time (this is what makes the filter reconfigurable) but must be held
// while an output is being computed. pp is PP_W bits, two's complement.
//
// The multiplexer entries, their order and the CLA tree follow the filter's
// block diagram of the partial product generator. Carrying every tree adder at
// the full PP_W width (19 bits, enough for any eight 16-bit coefficients),
// and placing the single pipeline register after the tree, are this design's
// own choices. NTAPS must be a power of two, at least 2.
module ppg
  import fir_da_pkg::*;
#(
  parameter int unsigned NTAPS = fir_da_pkg::K,
  parameter int unsigned CW    = fir_da_pkg::COEF_W,
  parameter int unsigned PW    = fir_da_pkg::PP_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [CW-1:0] coef [NTAPS],
  input  logic [NTAPS-1:0]     addr,
  input  bit_tag_t             tag_in,
  output logic signed [PW-1:0] pp,
  output bit_tag_t             tag_out
);

  localparam int unsigned NPAIR  = NTAPS / 2;
  localparam int unsigned NNODE  = 2 * NPAIR - 1;   // tree nodes, heap order

  // node[0] is the root; node[NPAIR-1+j] is multiplexer j's output.
  logic [PW-1:0] node [NNODE];

  for (genvar j = 0; j < NPAIR; j++) begin : g_pair
    logic [PW-1:0] h_lo, h_hi, h_sum;
    assign h_lo = PW'(coef[2*j]);      // sign extension of a signed operand
    assign h_hi = PW'(coef[2*j+1]);

    cla_adder #(.W(PW)) u_pair_sum (
      .a(h_lo), .b(h_hi), .cin(1'b0), .sum(h_sum), .cout()
    );

    always_comb begin
      unique case ({addr[2*j+1], addr[2*j]})
        2'd0:    node[NPAIR-1+j] = '0;
        2'd1:    node[NPAIR-1+j] = h_lo;
        2'd2:    node[NPAIR-1+j] = h_hi;
        default: node[NPAIR-1+j] = h_sum;
      endcase
    end
  end

  for (genvar n = 0; n < NPAIR - 1; n++) begin : g_tree
    cla_adder #(.W(PW)) u_add (
      .a(node[2*n+1]), .b(node[2*n+2]), .cin(1'b0), .sum(node[n]), .cout()
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pp      <= '0;
      tag_out <= '0;
    end else begin
      pp      <= node[0];
      tag_out <= tag_in;
    end
  end

  initial begin
    assert (NTAPS >= 2 && (NTAPS & (NTAPS - 1)) == 0)
      else $error("ppg: NTAPS must be a power of two");
  end

endmodule
