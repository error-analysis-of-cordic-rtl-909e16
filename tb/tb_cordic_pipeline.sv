// tb_cordic_pipeline -- checks the 16-stage rotation chain (and an 8-stage
// one) bit for bit.
//
// Angles over the full accepted range (|theta| <= 0.9579 rad) enter with the
// vector (1.0, 0), one per clock with random idle clocks.  A reference
// model here repeats the iteration in integer/real arithmetic:
// shifted = floor(v / 2^i + 0.5), sigma from the sign of z, angles
// round(atan(2^-i) * 2^15).  The outputs x, y, z and valid must match it
// exactly, N_STAGES clocks after the input.  In addition x, y must lie
// within 16 LSB of K * cos(theta), K * sin(theta) computed with $cos/$sin.
module tb_cordic_pipeline;
  import cordic_pkg::*;

  localparam int N16 = 16;
  localparam int N8  = 8;
  localparam int NV  = 600;

  logic        clk = 0, rst_n = 0;
  cordic_vec_t in, out16, out8;
  logic [N16-1:0] sn16;
  logic [N8-1:0]  sn8;
  int checks = 0, failures = 0;

  cordic_pipeline                 dut16 (.clk(clk), .rst_n(rst_n), .in(in), .out(out16), .sigma_neg(sn16));
  cordic_pipeline #(.N_STAGES(N8)) dut8 (.clk(clk), .rst_n(rst_n), .in(in), .out(out8),  .sigma_neg(sn8));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sh(int v, int i);
    return $rtoi($floor(real'(v) / (2.0 ** i) + 0.5));
  endfunction

  // Reference: n iterations starting from (32768, 0, theta).
  function automatic void model(int theta, int n, output int xo, output int yo, output int zo);
    int x, y, z, xn, yn, a, s;
    x = 32768; y = 0; z = theta;
    for (int i = 0; i < n; i++) begin
      a  = $rtoi($floor($atan(2.0 ** (-i)) * 32768.0 + 0.5));
      s  = (z >= 0) ? 1 : -1;
      xn = x - s * sh(y, i);
      yn = y + s * sh(x, i);
      z  = z - s * a;
      x  = xn; y = yn;
    end
    xo = x; yo = y; zo = z;
  endfunction

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  int  th [NV];
  bit  vv [NV];
  real kgain;

  initial begin
    int ex, ey, ez, nvalid;
    kgain = 1.0;
    for (int i = 0; i < N16; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2 * i));
    for (int n = 0; n < NV; n++) begin
      th[n] = int'($urandom_range(2 * 31388)) - 31388;
      vv[n] = ($urandom_range(3) != 0);
    end
    th[0] = 31388; th[1] = -31388; th[2] = 0; th[3] = 1; th[4] = -1;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nvalid = 0;
    for (int n = 0; n < NV + N16; n++) begin
      if (n < NV) begin
        in.valid <= vv[n];
        in.x     <= xy_t'(32768);
        in.y     <= '0;
        in.z     <= angle_t'(th[n]);
      end else begin
        in <= '0;
      end
      @(posedge clk);
      #1;
      // 16-stage chain: result of input n-15 (entered 16 clocks ago)
      if (n >= N16 - 1) begin
        automatic int m = n - (N16 - 1);
        checks++;
        if (out16.valid != vv[m]) begin
          failures++;
          $display("FAIL n16 %0d: valid %0b expected %0b", m, out16.valid, vv[m]);
        end
        if (vv[m]) begin
          nvalid++;
          model(th[m], N16, ex, ey, ez);
          checks++;
          if (int'(out16.x) != ex || int'(out16.y) != ey || int'(out16.z) != ez) begin
            failures++;
            $display("FAIL n16 theta %0d: %0d %0d %0d expected %0d %0d %0d", th[m],
                     int'(out16.x), int'(out16.y), int'(out16.z), ex, ey, ez);
          end
          checks++;
          if (fabs(real'(int'(out16.x)) - 32768.0 * kgain * $cos(real'(th[m]) / 32768.0)) > 16.0 ||
              fabs(real'(int'(out16.y)) - 32768.0 * kgain * $sin(real'(th[m]) / 32768.0)) > 16.0) begin
            failures++;
            $display("FAIL n16 theta %0d: %0d %0d far from K*cos, K*sin", th[m],
                     int'(out16.x), int'(out16.y));
          end
        end
      end
      if (n >= N8 - 1 && n - (N8 - 1) < NV) begin
        automatic int m = n - (N8 - 1);
        checks++;
        if (out8.valid != vv[m]) failures++;
        if (vv[m]) begin
          model(th[m], N8, ex, ey, ez);
          checks++;
          if (int'(out8.x) != ex || int'(out8.y) != ey || int'(out8.z) != ez) begin
            failures++;
            $display("FAIL n8 theta %0d: %0d %0d %0d expected %0d %0d %0d", th[m],
                     int'(out8.x), int'(out8.y), int'(out8.z), ex, ey, ez);
          end
        end
      end
    end
    checks++;
    if (nvalid < NV / 2) begin
      failures++;
      $display("FAIL only %0d results seen", nvalid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
