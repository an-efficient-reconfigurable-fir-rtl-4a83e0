// ppg_tb -- self-checking test of the partial product generator.
//
// Drives random coefficient sets (including all -32768 and all +32767, the
// extremes of the 19-bit sum) and every one of the 256 address patterns, and
// checks that one clock later pp = sum of h_k over the taps whose address bit
// is 1, and that the tag is delayed with it. A second instance with 4 taps
// checks the generic tree.
module ppg_tb;
  import fir_da_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [COEF_W-1:0] coef [K];
  logic signed [COEF_W-1:0] coef4 [4];
  logic [K-1:0]             addr;
  bit_tag_t                 tag_in, tag_out, tag_out4;
  logic signed [PP_W-1:0]   pp;
  logic signed [COEF_W+1:0] pp4;
  int checks = 0, failures = 0;

  ppg dut (.clk, .rst_n, .coef, .addr, .tag_in, .pp, .tag_out);
  ppg #(.NTAPS(4), .CW(COEF_W), .PW(COEF_W+2)) dut4 (
    .clk, .rst_n, .coef(coef4), .addr(addr[3:0]), .tag_in, .pp(pp4), .tag_out(tag_out4)
  );

  function automatic int ref_pp(input logic [K-1:0] a, input int n);
    int s = 0;
    for (int k = 0; k < n; k++) if (a[k]) s += (n == K) ? int'(coef[k]) : int'(coef4[k]);
    return s;
  endfunction

  task automatic apply_and_check(input logic [K-1:0] a);
    int e8, e4;
    bit_tag_t t;
    addr = a;
    t = bit_tag_t'($urandom);
    tag_in = t;
    e8 = ref_pp(a, K);
    e4 = ref_pp(a, 4);
    @(posedge clk); #1;
    checks += 3;
    if (pp !== PP_W'(e8)) begin
      failures++; $display("FAIL addr=%b pp=%0d expected %0d", a, pp, e8);
    end
    if (pp4 !== (COEF_W+2)'(e4)) begin
      failures++; $display("FAIL 4-tap addr=%b pp=%0d expected %0d", a[3:0], pp4, e4);
    end
    if (tag_out !== t || tag_out4 !== t) begin
      failures++; $display("FAIL tag not delayed");
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = '0; tag_in = '0;
    for (int k = 0; k < K; k++) coef[k] = '0;
    for (int k = 0; k < 4; k++) coef4[k] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int set = 0; set < 12; set++) begin
      for (int k = 0; k < K; k++) begin
        case (set)
          0:       coef[k] = -16'sd32768;
          1:       coef[k] = 16'sd32767;
          2:       coef[k] = COEF_W'(k + 1);      // distinct small values
          default: coef[k] = COEF_W'($urandom);
        endcase
      end
      for (int k = 0; k < 4; k++) coef4[k] = coef[k];
      for (int a = 0; a < 256; a++) apply_and_check(K'(a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
