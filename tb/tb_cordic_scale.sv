// tb_cordic_scale -- checks the final K^-1 scaling against real arithmetic.
//
// Random Q2.15 coordinates (covering the whole range the rotation stages can
// produce, |x|,|y| < 1.65) plus the extremes are applied one per clock.  The
// expected output is round(v * 19898 / 2^10) worked out in real numbers,
// where 19898 = round(2^15 * 0.6072529).  Latency (one clock) and the valid
// flag are checked as well.
module tb_cordic_scale;
  import cordic_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  xy_t  x, y;
  logic out_valid;
  out_t cos_o, sin_o;
  int checks = 0, failures = 0;

  cordic_scale dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_of(int v);
    return $rtoi($floor(real'(v) * 19898.0 / 1024.0 + 0.5));
  endfunction

  initial begin
    int xv [1000], yv [1000];
    bit vv [1000];
    in_valid = 0; x = '0; y = '0;
    for (int n = 0; n < 1000; n++) begin
      if (n < 4) begin
        xv[n] = (n[0]) ? 53960 : -53960;
        yv[n] = (n[1]) ? 32768 : -32768;
      end else begin
        xv[n] = int'($urandom_range(107920)) - 53960;
        yv[n] = int'($urandom_range(107920)) - 53960;
      end
      vv[n] = ($urandom_range(3) != 0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 1000; n++) begin
      in_valid <= vv[n];
      x <= xy_t'(xv[n]);
      y <= xy_t'(yv[n]);
      @(posedge clk);
      #1;
      checks++;
      if (out_valid != vv[n]) begin
        failures++;
        $display("FAIL %0d: valid %0b expected %0b", n, out_valid, vv[n]);
      end
      if (vv[n]) begin
        checks++;
        if (int'(cos_o) != expect_of(xv[n]) || int'(sin_o) != expect_of(yv[n])) begin
          failures++;
          $display("FAIL %0d: x %0d y %0d -> %0d %0d expected %0d %0d", n, xv[n], yv[n],
                   cos_o, sin_o, expect_of(xv[n]), expect_of(yv[n]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
