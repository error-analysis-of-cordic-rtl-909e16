// cordic_pipeline -- the chain of N_STAGES micro-rotation stages.
//
// Stage i performs iteration i of the circular rotation-mode CORDIC
// (see cordic_stage), so after the last stage x and y hold K * (cos, sin) of
// the input angle times the input vector, and z holds the angle that the
// finite set of rotations could not reach (the angle approximation error).
// The published design uses 16 stages; N_STAGES may be lowered (up to 16
// angles are stored) for experiments on the angle approximation error.
//
// Timing: latency N_STAGES clocks, one new vector accepted every clock, no
// stall.  sigma_neg[i] is the direction chosen by stage i for the vector it
// is processing this clock (1 = clockwise).
module cordic_pipeline
  import cordic_pkg::*;
#(
  parameter int unsigned N_STAGES = N_ITER
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cordic_vec_t         in,
  output cordic_vec_t         out,
  output logic [N_STAGES-1:0] sigma_neg
);

  initial begin
    if (N_STAGES < 1 || N_STAGES > N_ITER)
      $error("cordic_pipeline: N_STAGES must be 1..%0d", N_ITER);
  end

  cordic_vec_t chain [N_STAGES+1];

  assign chain[0] = in;

  for (genvar i = 0; i < N_STAGES; i++) begin : g_stage
    cordic_stage #(.STAGE(i)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in       (chain[i]),
      .out      (chain[i+1]),
      .sigma_neg(sigma_neg[i])
    );
  end

  assign out = chain[N_STAGES];

endmodule
