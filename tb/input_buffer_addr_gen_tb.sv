// input_buffer_addr_gen_tb -- self-checking test of the tap delay line and
// bit-plane address generator.
//
// A reference delay line in the testbench is shifted whenever the block
// accepts a sample. Every cycle in which the block is busy, addr[k] must equal
// bit i of the reference tap k, with i counting 0..L-1 from the edge after
// the accepting one (the address is registered), and the tag must carry i,
// first and last. Samples are offered both
// back to back (accepted every L cycles exactly) and with random idle gaps;
// in_ready must be high only when idle or on the last plane.
module input_buffer_addr_gen_tb;
  import fir_da_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid, in_ready;
  logic [L-1:0]  x_in;
  logic [K-1:0]  addr;
  bit_tag_t      tag;
  int checks = 0, failures = 0;

  input_buffer_addr_gen dut (.clk, .rst_n, .in_valid, .in_ready, .x_in, .addr, .tag);

  logic [L-1:0] ref_taps [K];
  int  plane = -1;           // plane the block should present, -1 = idle
  int  accepted = 0, back_to_back = 0, last_accept_cycle = -100, cycle = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected register contents, captured at each rising edge from the model
  // state before it is updated (address and tag are compared only when a
  // plane is expected, idle cycles need tag.valid = 0); in_ready is compared
  // with the model directly.
  logic [K-1:0] exp_addr;
  bit_tag_t     exp_tag;

  always @(negedge clk) if (rst_n) begin
    checks++;
    if ((exp_tag.valid ? (addr !== exp_addr || tag !== exp_tag) : tag.valid !== 1'b0) ||
        in_ready !== (plane < 0 || plane == L-1)) begin
      failures++;
      $display("FAIL plane %0d: addr=%b exp=%b tag=%p exp=%p ready=%b", plane, addr, exp_addr,
               tag, exp_tag, in_ready);
    end
  end

  always @(posedge clk) begin
    cycle++;
    exp_tag = '0;
    exp_addr = '0;
    if (rst_n && plane >= 0) begin
      for (int k = 0; k < K; k++) exp_addr[k] = ref_taps[k][plane];
      exp_tag.valid = 1'b1;
      exp_tag.first = (plane == 0);
      exp_tag.last  = (plane == L-1);
      exp_tag.idx   = IDX_W'(plane);
    end
    if (!rst_n) begin
      plane = -1;
      for (int k = 0; k < K; k++) ref_taps[k] = '0;
    end else if (in_valid && in_ready) begin
      for (int k = K-1; k > 0; k--) ref_taps[k] = ref_taps[k-1];
      ref_taps[0] = x_in;
      plane = 0;
      accepted++;
      if (cycle - last_accept_cycle == L) back_to_back++;
      else if (last_accept_cycle > 0 && cycle - last_accept_cycle < L) begin
        failures++; $display("FAIL accepted %0d cycles after the previous", cycle - last_accept_cycle);
      end
      last_accept_cycle = cycle;
    end else if (plane >= 0) begin
      plane = (plane == L-1) ? -1 : plane + 1;
    end
  end

  initial begin
    in_valid = 0; x_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // back to back: in_valid held high
    for (int n = 0; n < 20; n++) begin
      in_valid = 1; x_in = L'($urandom);
      @(posedge clk); #1;
      while (!(plane == 0 && ref_taps[0] == x_in)) begin
        @(posedge clk); #1;
      end
    end
    // with random gaps; in_valid is sometimes raised in mid-computation
    for (int n = 0; n < 30; n++) begin
      in_valid = 0;
      repeat ($urandom_range(0, 25)) @(posedge clk);
      #1 in_valid = 1; x_in = L'($urandom);
      do @(posedge clk); while (!(plane == 0 && ref_taps[0] == x_in));
      #1;
    end
    in_valid = 0;
    repeat (L + 2) @(posedge clk);
    checks++;
    if (back_to_back < 19) begin
      failures++; $display("FAIL only %0d back-to-back accepts", back_to_back);
    end
    $display("accepted=%0d back_to_back=%0d", accepted, back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
