// cordic_top -- pipelined CORDIC processor computing cos and sin of an angle.
//
// An angle theta_d (Q1.15 radians, |theta_d| <= 0.9579) enters with
// theta_valid.  The vector (1, 0) is rotated by theta_d in 16 pipelined
// shift-add micro-rotations (cordic_pipeline) and the result is scaled once
// by K^-1 (cordic_scale), so cos_theta/sine_theta = cos/sin(theta_d) in
// Q2.20 (22 bits, 20 fractional bits).  The port names theta_d, cos_theta,
// sine_theta, valid and clk, the 16-bit angle and 22-bit outputs are those of
// the published design; theta_valid, the active-low asynchronous reset and
// the residual-angle output are this design's additions.
//
// Timing: latency 17 clocks from theta_valid to valid (16 rotation stages and
// the scaling register), one angle per clock, no back-pressure.
// residual_angle is z(N), the angle approximation error delta of the result
// leaving the last rotation stage (one clock ahead of valid).
module cordic_top
  import cordic_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   theta_valid,
  input  angle_t theta_d,
  output out_t   cos_theta,
  output out_t   sine_theta,
  output logic   valid,
  output angle_t residual_angle
);

  cordic_vec_t        v_in, v_out;

  always_comb begin
    v_in.valid = theta_valid;
    v_in.x     = xy_t'(1) <<< FRAC_W;  // 1.0
    v_in.y     = '0;
    v_in.z     = theta_d;
  end

  cordic_pipeline #(.N_STAGES(N_ITER)) u_pipe (
    .clk      (clk),
    .rst_n    (rst_n),
    .in       (v_in),
    .out      (v_out),
    .sigma_neg()
  );

  cordic_scale u_scale (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (v_out.valid),
    .x        (v_out.x),
    .y        (v_out.y),
    .out_valid(valid),
    .cos_o    (cos_theta),
    .sin_o    (sine_theta)
  );

  assign residual_angle = v_out.z;

  // The published design accepts angles only in [-0.9579, +0.9579] rad.
  a_theta_range: assert property (@(posedge clk) disable iff (!rst_n)
    theta_valid |-> (theta_d <= THETA_MAX && theta_d >= -THETA_MAX))
    else $error("cordic_top: theta_d %0d outside +-0.9579 rad", theta_d);

endmodule
