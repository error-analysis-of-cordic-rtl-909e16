// tb_cordic_stage -- checks single micro-rotation stages (i = 0, 1, 5, 15).
//
// Random vectors and residual angles of both signs, within the ranges
// the pipeline produces, are applied one per
// clock.  The expected result is worked out here in real arithmetic:
// shifted = floor(v / 2^i + 0.5), direction from the sign of z, and
// atan(2^-i) rounded to Q1.15.  Latency (one clock) and valid are checked.
module tb_cordic_stage;
  import cordic_pkg::*;

  localparam int NS = 4;
  localparam int unsigned ST [NS] = '{0, 1, 5, 15};

  logic        clk = 0, rst_n = 0;
  cordic_vec_t in;
  cordic_vec_t out [NS];
  logic        sneg [NS];
  int checks = 0, failures = 0;
  int n_cw = 0, n_ccw = 0;

  for (genvar g = 0; g < NS; g++) begin : g_dut
    cordic_stage #(.STAGE(ST[g])) dut (
      .clk(clk), .rst_n(rst_n), .in(in), .out(out[g]), .sigma_neg(sneg[g]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sh(int v, int i);
    return $rtoi($floor(real'(v) / (2.0 ** i) + 0.5));
  endfunction

  initial begin
    int xv, yv, zv, a, ex, ey, ez, s, st;
    bit vv;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 800; n++) begin
      // Inputs stay inside what the pipeline can produce: |x|,|y| below
      // 0.8 so no sum overflows Q2.15, |z| small enough that z -/+ atan fits.
      xv = int'($urandom_range(52000)) - 26000;
      yv = int'($urandom_range(52000)) - 26000;
      zv = int'($urandom_range(14000)) - 7000;
      if (n == 0) zv = 0;
      vv = ($urandom_range(4) != 0);
      in.valid <= vv;
      in.x <= xy_t'(xv);
      in.y <= xy_t'(yv);
      in.z <= angle_t'(zv);
      @(posedge clk);
      #1;
      s = (zv >= 0) ? 1 : -1;
      if (s > 0) n_ccw++; else n_cw++;
      for (int g = 0; g < NS; g++) begin
        st = int'(ST[g]);
        a  = $rtoi($floor($atan(2.0 ** (-st)) * 32768.0 + 0.5));
        ex = xv - s * sh(yv, st);
        ey = yv + s * sh(xv, st);
        ez = zv - s * a;
        checks++;
        if (out[g].valid != vv || int'(out[g].x) != ex || int'(out[g].y) != ey ||
            int'(out[g].z) != ez) begin
          failures++;
          $display("FAIL stage %0d: in %0d %0d %0d out %0b %0d %0d %0d expected %0b %0d %0d %0d",
                   st, xv, yv, zv, out[g].valid, out[g].x, out[g].y, out[g].z, vv, ex, ey, ez);
        end
      end
      // direction output is combinational on the current input
      in.z <= angle_t'(-zv - 1);
      #1;
      checks++;
      if (sneg[0] != ((-zv - 1) < 0)) begin
        failures++;
        $display("FAIL sigma_neg for z %0d", -zv - 1);
      end
    end
    checks++;
    if (n_cw == 0 || n_ccw == 0) begin
      failures++;
      $display("FAIL both rotation directions not exercised: cw %0d ccw %0d", n_cw, n_ccw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
