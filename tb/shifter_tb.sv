// shifter_tb -- self-checking test of the bit-weight shifter.
//
// Every shift amount 0..15 with corner partial products (most negative, most
// positive, -1, 1) and random ones; the output must equal pp * 2^shamt as a
// 34-bit two's complement number, computed here with a multiplication.
module shifter_tb;
  import fir_da_pkg::*;

  logic signed [PP_W-1:0]  pp;
  logic [IDX_W-1:0]        shamt;
  logic signed [OUT_W-1:0] sh;
  int checks = 0, failures = 0;

  shifter dut (.pp, .shamt, .sh);

  task automatic check_one();
    longint expv;
    #1;
    expv = longint'(pp) * (longint'(1) << shamt);
    checks++;
    if (sh !== OUT_W'(expv)) begin
      failures++;
      $display("FAIL pp=%0d shamt=%0d got %0d expected %0d", pp, shamt, sh, expv);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < L; s++) begin
      shamt = IDX_W'(s);
      pp = {1'b1, {(PP_W-1){1'b0}}}; check_one();
      pp = {1'b0, {(PP_W-1){1'b1}}}; check_one();
      pp = -1;                        check_one();
      pp = 1;                         check_one();
      for (int n = 0; n < 100; n++) begin
        pp = PP_W'($urandom);
        check_one();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
