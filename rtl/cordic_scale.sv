// cordic_scale -- the one-time final scaling by K^-1.
//
// The rotation stages leave out the factor 1/k(i) of every iteration; this
// block applies their product K^-1 = 0.607253 once, after the last
// iteration, as the published design does for speed.  K^-1 is read from
// cordic_rom (Q1.15).  Each coordinate, Q2.15, is multiplied by it, giving
// 30 fractional bits, and rounded to nearest into the 22-bit Q2.20 output:
//   cos = round(x * K^-1 * 2^-10),  sin = round(y * K^-1 * 2^-10)
// in integer LSB terms.  The output format (22 bits, read here as 20
// fractional bits) matches the 22-bit outputs of the published design; the
// rounding and the register after the multiplier are this design's choices.
//
// Timing: one register; out_valid follows in_valid one clock later.  rst_n is
// asynchronous, active low.
// Since |x * K^-1| < 2, the product bits above the 22 kept are copies of the
// sign bit; lint reports them as unused.
module cordic_scale
  import cordic_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  xy_t  x,
  input  xy_t  y,
  output logic out_valid,
  output out_t cos_o,
  output out_t sin_o
);

  localparam int unsigned PROD_W = XY_W + CONST_W + 1;
  localparam int unsigned SHIFT  = 2 * FRAC_W - OUT_FRAC;  // 30 -> 20 bits

  logic [CONST_W-1:0] kinv_word;
  cordic_rom u_rom (.addr(ROM_AW'(ROM_KINV_ADDR)), .data(kinv_word));

  logic signed [CONST_W:0]   kinv;   // positive, one sign bit added
  logic signed [PROD_W-1:0]  px, py;
  out_t                      cx, sy;

  function automatic out_t round_out(logic signed [PROD_W-1:0] p);
    logic signed [PROD_W-1:0] r;
    r = (p + (PROD_W'(1) <<< (SHIFT - 1))) >>> SHIFT;
    return out_t'(r);
  endfunction

  always_comb begin
    kinv = {1'b0, kinv_word};
    px   = PROD_W'(x) * PROD_W'(kinv);
    py   = PROD_W'(y) * PROD_W'(kinv);
    cx   = round_out(px);
    sy   = round_out(py);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      cos_o     <= '0;
      sin_o     <= '0;
    end else begin
      out_valid <= in_valid;
      cos_o     <= cx;
      sin_o     <= sy;
    end
  end

endmodule
