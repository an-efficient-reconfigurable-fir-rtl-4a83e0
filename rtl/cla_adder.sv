// cla_adder -- carry look-ahead adder, W bits, with carry in and carry out.
//
// Used for every addition in the filter: the coefficient pair sums feeding the
// multiplexers, the partial product adder tree and the accumulator. The bits
// are split into 4-bit groups. Inside a group all carries are formed at once
// from the bit generate (a&b) and propagate (a^b) signals and the group's
// carry in; the groups are chained by their carry outs. The adder is purely
// combinational (no clock).
//
// The filter's adders are described only as "modified carry look-ahead"
// adders, without the modification; this is a plain group carry look-ahead
// adder, which is this design's own choice. A subtraction a-b is made by the
// caller as a + ~b with cin = 1.
module cla_adder #(
  parameter int unsigned W = 19
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);

  localparam int unsigned GROUPS = (W + 3) / 4;
  localparam int unsigned WP     = GROUPS * 4;   // width padded to whole groups

  logic [WP-1:0] ap, bp, g, p, s;
  logic [WP:0]   c;                              // c[j] = carry into bit j

  assign ap = WP'(a);
  assign bp = WP'(b);
  assign g  = ap & bp;
  assign p  = ap ^ bp;
  assign c[0] = cin;

  for (genvar gi = 0; gi < GROUPS; gi++) begin : g_group
    localparam int unsigned B = gi * 4;
    // Look-ahead carries of the group, all from c[B]:
    assign c[B+1] = g[B]   | (p[B]   & c[B]);
    assign c[B+2] = g[B+1] | (p[B+1] & g[B])   | (p[B+1] & p[B]   & c[B]);
    assign c[B+3] = g[B+2] | (p[B+2] & g[B+1]) | (p[B+2] & p[B+1] & g[B])
                  | (p[B+2] & p[B+1] & p[B] & c[B]);
    assign c[B+4] = g[B+3] | (p[B+3] & g[B+2]) | (p[B+3] & p[B+2] & g[B+1])
                  | (p[B+3] & p[B+2] & p[B+1] & g[B])
                  | (p[B+3] & p[B+2] & p[B+1] & p[B] & c[B]);
  end

  assign s    = p ^ c[WP-1:0];
  assign sum  = s[W-1:0];
  assign cout = c[W];

endmodule
