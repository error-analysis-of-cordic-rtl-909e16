// tb_cordic_top -- end-to-end test of the CORDIC processor at its default
// (published) size: 16 rotation stages, Q1.15 angles, 22-bit outputs.
//
// Sequence: reset; the example angle 0x8CBD (-0.90048 rad) alone, whose
// expected outputs 0x09F08B / 0x337641 are the values printed for the
// published design; a back-to-back burst of random angles (one per clock);
// random angles with idle clocks between them; the range limits
// +-0.9579 rad; a reset in the middle of a burst, after which nothing in
// flight may come out.
// Every result is checked against $cos/$sin of the input angle (within
// TOL_LSB of 2^-20), and against its input clock: latency must be exactly 17
// clocks.  Each mechanism (counter-clockwise and clockwise first rotation,
// back-to-back issue, idle clocks, range limits, reset flush) is counted and
// must occur at least once.
module tb_cordic_top;
  import cordic_pkg::*;

  localparam int LATENCY = 17;
  localparam int TOL_LSB = 160;       // 2^-20 units, about 5 LSB of Q1.15
  // published outputs for theta_d = 0x8CBD, as signed integers
  localparam int FIG_COS = 'sh09f08b;              //  651403 =  0.62122
  localparam int FIG_SIN = 'sh337641 - (1 << 22);   // -821695 = -0.78363

  logic   clk = 0, rst_n = 0;
  logic   theta_valid;
  angle_t theta_d;
  out_t   cos_theta, sine_theta;
  logic   valid;
  angle_t residual_angle;

  int checks = 0, failures = 0;
  int n_ccw = 0, n_cw = 0, n_b2b = 0, n_idle = 0, n_limit = 0, n_flush = 0, n_fig = 0;
  int n_results = 0;
  real max_err = 0.0;

  cordic_top dut (.*);

  always #5 clk = ~clk;

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard of issued angles with their issue clock
  int     q_theta [$];
  longint q_cycle [$];
  bit     expect_none = 0;   // set after a reset: nothing may come out

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Output checker, sampled just after each rising edge.
  always @(posedge clk) begin
    #2;
    if (rst_n && valid) begin
      checks++;
      if (expect_none || q_theta.size() == 0) begin
        failures++;
        $display("FAIL unexpected result cos %h sin %h", cos_theta, sine_theta);
      end else begin
        automatic int     th = q_theta.pop_front();
        automatic longint ic = q_cycle.pop_front();
        automatic real    a  = real'(th) / 32768.0;
        automatic real    ec = fabs(real'(cos_theta) - $cos(a) * 1048576.0);
        automatic real    es = fabs(real'(sine_theta) - $sin(a) * 1048576.0);
        n_results++;
        if (ec > max_err) max_err = ec;
        if (es > max_err) max_err = es;
        if (ec > TOL_LSB || es > TOL_LSB) begin
          failures++;
          $display("FAIL theta %0d: cos %0d sin %0d, expected %0.1f %0.1f", th,
                   cos_theta, sine_theta, $cos(a) * 1048576.0, $sin(a) * 1048576.0);
        end
        checks++;
        if (cycle - ic != longint'(LATENCY)) begin
          failures++;
          $display("FAIL theta %0d: latency %0d expected %0d", th, cycle - ic, LATENCY);
        end
        if (th == -29507) begin
          n_fig++;
          checks++;
          if (fabs(real'(cos_theta) - real'(FIG_COS)) > 64.0 ||
              fabs(real'(sine_theta) - real'(FIG_SIN)) > 64.0) begin
            failures++;
            $display("FAIL example angle: %h %h, published 09f08b 337641", cos_theta, sine_theta);
          end
        end
      end
    end
  end

  // Drive one clock: issue theta (v = 1) or idle (v = 0).
  bit last_v = 0;
  task automatic drive(bit v, int th);
    theta_valid <= v;
    theta_d     <= angle_t'(th);
    @(posedge clk);
    if (v) begin
      q_theta.push_back(th);
      q_cycle.push_back(cycle);
      if (th >= 0) n_ccw++; else n_cw++;
      if (th == 31388 || th == -31388) n_limit++;
      if (last_v) n_b2b++;
    end else if (q_theta.size() != 0) begin
      n_idle++;
    end
    last_v = v;
  endtask

  function automatic int rand_theta();
    return int'($urandom_range(2 * 31388)) - 31388;
  endfunction

  initial begin
    theta_valid = 0;
    theta_d     = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // example angle of the published waveform
    drive(1, -29507);
    repeat (LATENCY + 3) drive(0, 0);
    // range limits and zero
    drive(1, 31388); drive(1, -31388); drive(1, 0); drive(1, 1); drive(1, -1);
    // back-to-back burst
    repeat (300) drive(1, rand_theta());
    // random idle clocks
    repeat (700) drive($urandom_range(2) != 0, rand_theta());
    repeat (LATENCY + 3) drive(0, 0);
    checks++;
    if (q_theta.size() != 0) begin
      failures++;
      $display("FAIL %0d results never came out", q_theta.size());
    end
    // reset in the middle of a burst: everything in flight is dropped
    repeat (10) drive(1, rand_theta());
    rst_n <= 0;
    theta_valid <= 0;
    @(posedge clk);
    q_theta.delete();
    q_cycle.delete();
    expect_none = 1;
    @(posedge clk);
    rst_n <= 1;
    repeat (LATENCY + 3) begin
      @(posedge clk);
      #3;
      checks++;
      if (valid) failures++;
    end
    n_flush++;
    expect_none = 0;
    // the pipeline works again after the reset
    drive(1, 12345);
    repeat (LATENCY + 3) drive(0, 0);
    checks++;
    if (q_theta.size() != 0) begin
      failures++;
      $display("FAIL result after reset missing");
    end

    $display("results %0d, max |error| %0.1f LSB of 2^-20", n_results, max_err);
    $display("mechanisms: ccw %0d cw %0d back-to-back %0d idle %0d limits %0d flush %0d example %0d",
             n_ccw, n_cw, n_b2b, n_idle, n_limit, n_flush, n_fig);
    checks += 7;
    if (n_ccw == 0)   begin failures++; $display("FAIL no counter-clockwise first rotation"); end
    if (n_cw == 0)    begin failures++; $display("FAIL no clockwise first rotation"); end
    if (n_b2b == 0)   begin failures++; $display("FAIL no back-to-back issue"); end
    if (n_idle == 0)  begin failures++; $display("FAIL no idle clock"); end
    if (n_limit == 0) begin failures++; $display("FAIL range limits not used"); end
    if (n_flush == 0) begin failures++; $display("FAIL no reset flush"); end
    if (n_fig == 0)   begin failures++; $display("FAIL example angle result missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
