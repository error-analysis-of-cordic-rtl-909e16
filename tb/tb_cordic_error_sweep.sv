// tb_cordic_error_sweep -- error measurement of the CORDIC processor over its
// whole input range, at the default size (16 stages, Q1.15).
//
// Every 8th Q1.15 angle from -0.9579 to +0.9579 rad (7848 angles) is issued
// back to back, one per clock.  For each result the 2-D error
// e = (cos_theta, sine_theta) - (cos, sin)(theta) is taken against $cos/$sin,
// and the residual angle z(N) leaving the last stage is recorded.
// Reported: the mean square error E|e|^2, the part of it that the angle
// approximation error alone explains, E[4 sin^2(delta/2)] with delta = z(N),
// the final-scaling term 2^-2b/12 of the uniform quantisation model, and the
// largest |e|.
// Checked:
//  * throughput: all results arrive in consecutive clocks, the first one
//    17 clocks after the first angle;
//  * every |e| is below a worst-case bound made of the largest residual angle,
//    the rounding of the 16 stored angles (sum of their rounding errors),
//    the per-stage rounding sqrt(2)*eps propagated through the remaining
//    stages and scaled by 1/K, and the rounding of the final scaling, with
//    eps = 2^-16 (half an LSB of Q1.15);
//  * E|e|^2 is below the square of that bound.
module tb_cordic_error_sweep;
  import cordic_pkg::*;

  localparam longint LATENCY = 17;
  localparam int STEP    = 8;
  localparam int TMAX    = 31388;

  logic   clk = 0, rst_n = 0;
  logic   theta_valid;
  angle_t theta_d;
  out_t   cos_theta, sine_theta;
  logic   valid;
  angle_t residual_angle;

  int checks = 0, failures = 0;

  cordic_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int     q [$];
  int     n_out = 0, n_gap = 0;
  longint cyc = 0, first_in = -1, first_out = -1, last_out = -1;
  real    sum_e2 = 0.0, sum_a = 0.0, sum_r = 0.0, max_e = 0.0, max_d = 0.0;

  // Rounding term of Theorem 3, (4 eps^2 / 3) * sum_j [1 - prod_{i<=j} sigma(i) 2^-i]^2,
  // with the directions sigma(i) of an exact (real-valued) rotation of angle a.
  function automatic real theorem3(real a);
    real z = a, p = 1.0, acc = 0.0, sg, eps = 2.0 ** (-16);
    for (int i = 0; i < 16; i++) begin
      sg  = (z >= 0.0) ? 1.0 : -1.0;
      z   = z - sg * $atan(2.0 ** (-i));
      p   = p * sg * (2.0 ** (-i));
      acc = acc + (1.0 - p) * (1.0 - p);
    end
    return 4.0 * eps * eps / 3.0 * acc;
  endfunction
  angle_t z_prev;

  always @(posedge clk) begin
    cyc    <= cyc + 1;
    z_prev <= residual_angle;   // z(N) of the vector now in the scaling register
    if (rst_n && theta_valid && first_in < 0) first_in = cyc;
    if (rst_n && valid) begin
      automatic int  th = q.pop_front();
      automatic real a  = real'(th) / 32768.0;
      automatic real ex = real'(cos_theta) / 1048576.0 - $cos(a);
      automatic real ey = real'(sine_theta) / 1048576.0 - $sin(a);
      automatic real e2 = ex * ex + ey * ey;
      automatic real d  = real'(z_prev) / 32768.0;
      sum_e2 += e2;
      sum_r  += theorem3(a);
      sum_a  += 4.0 * $sin(d / 2.0) * $sin(d / 2.0);
      if ($sqrt(e2) > max_e) max_e = $sqrt(e2);
      if (d > max_d) max_d = d;
      if (-d > max_d) max_d = -d;
      // latency: edges from the one that takes the angle to the first one
      // that samples its result
      if (first_out < 0) first_out = cyc;
      else if (cyc != last_out + 1) n_gap++;
      last_out = cyc;
      n_out++;
    end
  end

  initial begin
    int  n_in;
    real eps, bound, kinv, bnorm, sum_b, sum_dq, mse;
    eps = 2.0 ** (-16);
    theta_valid = 0;
    theta_d     = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    n_in = 0;
    for (int th = -TMAX; th <= TMAX; th += STEP) begin
      theta_valid <= 1;
      theta_d     <= angle_t'(th);
      @(posedge clk);
      q.push_back(th);
      n_in++;
    end
    theta_valid <= 0;
    repeat (21) @(posedge clk);

    // worst-case bound
    kinv = 1.0;
    for (int i = 0; i < 16; i++) kinv = kinv / $sqrt(1.0 + 2.0 ** (-2 * i));
    sum_b  = 0.0;
    sum_dq = 0.0;
    for (int i = 0; i < 16; i++) begin
      automatic real at = $atan(2.0 ** (-i));
      bnorm = 1.0;
      for (int j = i + 1; j < 16; j++) bnorm = bnorm * $sqrt(1.0 + 2.0 ** (-2 * j));
      sum_b  += bnorm;
      sum_dq += ((at * 32768.0 - $floor(at * 32768.0 + 0.5)) < 0.0 ?
                 -(at * 32768.0 - $floor(at * 32768.0 + 0.5)) :
                  (at * 32768.0 - $floor(at * 32768.0 + 0.5))) / 32768.0;
    end
    bound = max_d + sum_dq + $sqrt(2.0) * eps * sum_b * kinv + $sqrt(2.0) * 2.0 ** (-21);
    mse   = sum_e2 / n_out;

    $display("angles %0d, results %0d", n_in, n_out);
    $display("E|e|^2 measured            %e", mse);
    $display("angle approximation term   %e  (E 4 sin^2(delta/2), delta = z(N))", sum_a / n_out);
    $display("final scaling term         %e  (2^-2b/12, b = 15)", 2.0 ** (-30) / 12.0);
    $display("rounding term, Theorem 3   %e", sum_r / n_out);
    $display("sum of the three terms     %e  (Theorem 4)",
             sum_a / n_out + 2.0 ** (-30) / 12.0 + sum_r / n_out);
    $display("max |e| %e, max |delta| %e, worst-case bound %e", max_e, max_d, bound);

    checks++;
    if (n_out != n_in) begin
      failures++;
      $display("FAIL %0d of %0d results", n_out, n_in);
    end
    checks++;
    if (n_gap != 0 || first_out - first_in != LATENCY) begin
      failures++;
      $display("FAIL throughput/latency: gaps %0d, first latency %0d", n_gap, first_out - first_in);
    end
    checks++;
    if (max_e > bound) begin
      failures++;
      $display("FAIL max error above worst-case bound");
    end
    checks++;
    if (mse > bound * bound) begin
      failures++;
      $display("FAIL mean square error above bound");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
