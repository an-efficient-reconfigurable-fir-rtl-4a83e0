// fir_da_top_tb -- end-to-end test of the distributed-arithmetic FIR filter
// at its full size (8 taps, 16-bit samples and coefficients, 34-bit output).
//
// A reference model keeps its own sample history and computes
// y(n) = sum_k h_k x(n-k) modulo 2^34 with ordinary multiplication. Every
// accepted sample pushes the expected output and the clock edge it is due on
// (L+2 edges after acceptance); every y_valid pops one and compares value and
// timing. The run goes through these phases, and counts how often each
// mechanism of the filter occurred, failing if one never did:
//   impulse responses   a unit (and negative unit) impulse must read the
//                       coefficients back, one per output
//   back-to-back        samples accepted on the last plane of the previous one
//   idle gaps           samples arriving after the filter went idle
//   reconfiguration     coefficient sets changed between outputs
//   sign plane          samples with the sign bit set (subtracted plane)
//   multiplexer selects every pair multiplexer used with all four selects
//   extremes            -32768 / +32767 samples and coefficients
//   reset               history cleared by a reset in mid-stream
module fir_da_top_tb;
  import fir_da_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [COEF_W-1:0] coef [K];
  logic                     in_valid, in_ready, y_valid;
  logic [L-1:0]             x_in;
  logic [OUT_W-1:0]         y;

  fir_da_top dut (.clk, .rst_n, .coef, .in_valid, .in_ready, .x_in, .y, .y_valid);

  int checks = 0, failures = 0, cycle = 0;
  int n_impulse = 0, n_b2b = 0, n_gap = 0, n_reconf = 0, n_sign = 0;
  int n_extreme = 0, n_reset = 0, n_outputs = 0;
  int sel_seen [K/2][4];

  // reference model state
  logic signed [L-1:0] hist [K];
  logic [OUT_W-1:0]    exp_q [$];
  int                  due_q [$];
  int                  last_accept = -100;
  bit                  busy_model;

  function automatic logic [OUT_W-1:0] model_y();
    longint s = 0;
    for (int k = 0; k < K; k++) s += longint'(coef[k]) * longint'(hist[k]);
    return OUT_W'(s);
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update and bookkeeping on each rising edge
  always @(posedge clk) begin
    cycle++;
    if (!rst_n) begin
      for (int k = 0; k < K; k++) hist[k] = '0;
      exp_q.delete(); due_q.delete();
      last_accept = -100;
    end else if (in_valid && in_ready) begin
      for (int k = K-1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = x_in;
      exp_q.push_back(model_y());
      due_q.push_back(cycle + L + 2);
      if (cycle - last_accept == L) n_b2b++;
      else if (cycle - last_accept > L + 2) n_gap++;
      if (x_in[L-1]) n_sign++;
      for (int i = 0; i < L; i++)
        for (int j = 0; j < K/2; j++)
          sel_seen[j][{hist[2*j+1][i], hist[2*j][i]}]++;
      last_accept = cycle;
    end
  end

  // output check in mid-cycle
  always @(negedge clk) if (rst_n && y_valid) begin
    checks++;
    n_outputs++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected output %h", y);
    end else begin
      logic [OUT_W-1:0] e;
      int d;
      e = exp_q.pop_front();
      d = due_q.pop_front();
      if (y !== e || d != cycle) begin
        failures++;
        $display("FAIL output y=%h expected %h at edge %0d due %0d", y, e, cycle, d);
      end
    end
  end

  task automatic send(input logic [L-1:0] x);
    in_valid = 1; x_in = x;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  task automatic drain();
    while (exp_q.size() != 0) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic set_coefs(input int mode);
    for (int k = 0; k < K; k++) begin
      case (mode)
        0: coef[k] = COEF_W'(100 * (k + 1) - 350);      // small, mixed signs
        1: coef[k] = -16'sd32768;
        2: coef[k] = 16'sd32767;
        default: coef[k] = COEF_W'($urandom);
      endcase
    end
  endtask

  initial begin
    in_valid = 0; x_in = '0;
    set_coefs(0);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // impulse responses: y must equal h_0 .. h_7, then zero
    for (int sgn = 0; sgn < 2; sgn++) begin
      send((sgn != 0) ? L'(-1) : L'(1));
      for (int k = 1; k < K + 2; k++) send('0);
      drain();
      n_impulse++;
    end
    checks++;
    begin
      // direct check of a read-back, independent of the queue
      send(L'(1));
      drain();
      if (y !== OUT_W'(coef[0])) begin
        failures++; $display("FAIL impulse read-back y=%h h0=%h", y, coef[0]);
      end
    end

    // random samples, several coefficient sets, back to back and with gaps
    for (int set = 0; set < 6; set++) begin
      drain();
      set_coefs(set == 0 ? 0 : 3);
      if (set != 0) n_reconf++;
      fork
        begin
          in_valid = 1;
          for (int n = 0; n < 60; n++) begin
            x_in = L'($urandom);
            do @(posedge clk); while (!in_ready);
            #1;
          end
          in_valid = 0;
        end
      join
      for (int n = 0; n < 20; n++) begin
        repeat ($urandom_range(0, 24)) @(posedge clk);
        #1 send(L'($urandom));
      end
    end

    // extremes
    for (int m = 1; m <= 2; m++) begin
      drain();
      set_coefs(m);
      n_reconf++;
      for (int n = 0; n < 2 * K; n++) begin
        send((n % 2 != 0) ? 16'h8000 : 16'h7fff);
        n_extreme++;
      end
      for (int n = 0; n < K; n++) send(16'h8001);
    end

    // reset in mid-stream clears the history
    drain();
    set_coefs(3);
    for (int n = 0; n < 5; n++) send(L'($urandom));
    @(posedge clk); #1 rst_n = 0;
    @(posedge clk); #1 rst_n = 1;
    n_reset++;
    for (int n = 0; n < 3 * K; n++) send(L'($urandom));
    drain();

    // mechanism coverage
    checks++;
    if (n_impulse == 0 || n_b2b == 0 || n_gap == 0 || n_reconf == 0 ||
        n_sign == 0 || n_extreme == 0 || n_reset == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    for (int j = 0; j < K/2; j++)
      for (int s = 0; s < 4; s++) begin
        checks++;
        if (sel_seen[j][s] == 0) begin
          failures++; $display("FAIL multiplexer %0d never saw select %0d", j, s);
        end
      end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL outputs missing"); end
    $display("outputs=%0d impulse=%0d back_to_back=%0d after_gap=%0d reconfig=%0d sign_plane=%0d extreme=%0d reset=%0d",
             n_outputs, n_impulse, n_b2b, n_gap, n_reconf, n_sign, n_extreme, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
