// accumulator_tb -- self-checking test of the shift-accumulate stage.
//
// Feeds sequences of L shifted partial products with their tags (first on
// plane 0, last on plane L-1), sometimes with invalid cycles in between, and
// checks that y = sh_0 + ... + sh_{L-2} - sh_{L-1} modulo 2^34 appears on the
// clock edge that takes the last plane, with y_valid high for exactly one
// cycle. Sequences follow each other back to back, so the restart on the
// first plane is exercised.
module accumulator_tb;
  import fir_da_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [OUT_W-1:0] sh, y;
  logic             y_valid;
  bit_tag_t         tag;
  int checks = 0, failures = 0, outputs = 0, subtracted_neg = 0;

  accumulator dut (.clk, .rst_n, .sh, .tag, .y, .y_valid);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [OUT_W-1:0] expv;
    sh = '0; tag = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      expv = '0;
      for (int i = 0; i < L; i++) begin
        // random idle cycles between planes
        while (n % 3 == 1 && $urandom_range(0, 3) == 0) begin
          tag = '0; sh = OUT_W'({$urandom, $urandom});
          @(posedge clk); #1;
          checks++;
          if (y_valid) begin failures++; $display("FAIL y_valid on idle cycle"); end
        end
        sh = (n == 0) ? {1'b1, {(OUT_W-1){1'b0}}} : OUT_W'({$urandom, $urandom});
        tag.valid = 1; tag.first = (i == 0); tag.last = (i == L-1); tag.idx = IDX_W'(i);
        if (i == L-1) begin
          expv = expv - sh;
          if (sh[OUT_W-1]) subtracted_neg++;
        end else expv = expv + sh;
        @(posedge clk); #1;
        checks++;
        if (i == L-1) begin
          outputs++;
          if (!y_valid || y !== expv) begin
            failures++; $display("FAIL output %0d: y=%h valid=%b expected %h", n, y, y_valid, expv);
          end
        end else if (y_valid) begin
          failures++; $display("FAIL y_valid at plane %0d", i);
        end
      end
    end
    tag = '0;
    @(posedge clk); #1;
    checks++;
    if (y_valid) begin failures++; $display("FAIL y_valid longer than one cycle"); end
    $display("outputs=%0d negative sign planes=%0d", outputs, subtracted_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
