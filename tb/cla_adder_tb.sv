// cla_adder_tb -- self-checking test of the carry look-ahead adder.
//
// Two instances, 19 and 34 bits wide (the partial product and accumulator
// widths), get corner operands (all ones plus carry in, alternating bits,
// zero) and random ones. Sum and carry out are compared with a + b + cin
// computed by the simulator's own arithmetic one bit wider.
module cla_adder_tb;
  localparam int unsigned WA = 19;
  localparam int unsigned WB = 34;

  logic [WA-1:0] a1, b1, s1;
  logic [WB-1:0] a2, b2, s2;
  logic          c1, c2, co1, co2;
  int checks = 0, failures = 0;

  cla_adder #(.W(WA)) dut_a (.a(a1), .b(b1), .cin(c1), .sum(s1), .cout(co1));
  cla_adder #(.W(WB)) dut_b (.a(a2), .b(b2), .cin(c2), .sum(s2), .cout(co2));

  task automatic check_one();
    logic [WA:0] ea;
    logic [WB:0] eb;
    #1;
    ea = {1'b0, a1} + {1'b0, b1} + (WA+1)'(c1);
    eb = {1'b0, a2} + {1'b0, b2} + (WB+1)'(c2);
    checks += 2;
    if ({co1, s1} !== ea) begin
      failures++;
      $display("FAIL W=%0d %h+%h+%0d: got %h expected %h", WA, a1, b1, c1, {co1, s1}, ea);
    end
    if ({co2, s2} !== eb) begin
      failures++;
      $display("FAIL W=%0d %h+%h+%0d: got %h expected %h", WB, a2, b2, c2, {co2, s2}, eb);
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
    // corners
    a1 = '1; b1 = '0; c1 = 1; a2 = '1; b2 = '0; c2 = 1; check_one();
    a1 = '1; b1 = '1; c1 = 1; a2 = '1; b2 = '1; c2 = 1; check_one();
    a1 = '0; b1 = '0; c1 = 0; a2 = '0; b2 = '0; c2 = 0; check_one();
    a1 = {WA{2'b10}} >> 1; b1 = ~a1; c1 = 1;
    a2 = {WB/2{2'b10}};    b2 = ~a2; c2 = 1; check_one();
    // every single-bit carry chain start position
    for (int i = 0; i < WB; i++) begin
      a1 = WA'(1) << (i % WA); b1 = '1 >> (i % WA) << (i % WA); c1 = 0;
      a2 = WB'(1) << i;        b2 = '1 >> i << i;               c2 = 0;
      check_one();
    end
    for (int n = 0; n < 3000; n++) begin
      a1 = WA'($urandom); b1 = WA'($urandom); c1 = 1'($urandom);
      a2 = {$urandom, $urandom}; b2 = {$urandom, $urandom}; c2 = 1'($urandom);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
