// cordic_stage -- one pipelined micro-rotation (iteration i = STAGE).
//
// Rotation mode, circular coordinates.  The rotation direction is the sign
// of the residual angle: sigma = +1 (counter-clockwise) when z >= 0, else -1.
// Then, without the 1/k(i) factor, which is applied once at the end:
//   x' = x - sigma * (y >> i)
//   y' = y + sigma * (x >> i)
//   z' = z - sigma * atan(2^-i)
// The shifted terms are rounded to nearest (half rounds up) rather than
// truncated, so each iteration adds a rounding error of at most half an LSB
// per coordinate -- the rounding model the error analysis assumes.  The
// rounding method itself, and taking sigma from the sign of z, are this
// design's choices.  atan(2^-i) is read from cordic_rom at the fixed address
// STAGE.
//
// Interface: in/out are cordic_vec_t (valid, x, y, z).  Timing: one register,
// so out is in one clock later; a new input can enter every clock.  rst_n is
// asynchronous, active low, and clears the register.
module cordic_stage
  import cordic_pkg::*;
#(
  parameter int unsigned STAGE = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cordic_vec_t in,
  output cordic_vec_t out,
  output logic        sigma_neg  // direction of this stage: 1 = clockwise
);

  initial begin
    if (STAGE >= N_ITER) $error("cordic_stage: STAGE %0d has no stored angle", STAGE);
  end

  logic [CONST_W-1:0] atan_word;
  cordic_rom u_rom (.addr(ROM_AW'(STAGE)), .data(atan_word));

  // Round-to-nearest arithmetic right shift by STAGE.
  function automatic xy_t shift_round(xy_t v);
    logic signed [XY_W:0] wide;
    if (STAGE == 0) return v;
    wide = {v[XY_W-1], v} + ((XY_W+1)'(1) <<< (STAGE - 1));
    return xy_t'(wide >>> STAGE);
  endfunction

  xy_t         xs, ys;
  angle_t      atan_val;
  cordic_vec_t nxt;

  always_comb begin
    xs        = shift_round(in.x);
    ys        = shift_round(in.y);
    atan_val  = angle_t'(atan_word);
    sigma_neg = in.z[ANGLE_W-1];
    nxt.valid = in.valid;
    if (!sigma_neg) begin
      nxt.x = in.x - ys;
      nxt.y = in.y + xs;
      nxt.z = in.z - atan_val;
    end else begin
      nxt.x = in.x + ys;
      nxt.y = in.y - xs;
      nxt.z = in.z + atan_val;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= nxt;
  end

endmodule
