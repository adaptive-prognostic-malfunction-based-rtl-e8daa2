// fls_mf: one trapezoidal membership function unit of the fuzzifier.
//
// The grade rises linearly from 0 at LEFT_FOOT to full scale at
// LEFT_FOOT + 2**RAMP_SHIFT, stays at full scale up to RIGHT_SHOULDER and
// falls back to 0 at RIGHT_SHOULDER + 2**RAMP_SHIFT.  Both ramps are
// computed the same way, as the distance to the nearer foot scaled to the
// grade range, so a triangle is symmetric: d units inside a foot the grade
// is d*256/2**RAMP_SHIFT (capped at 255), the grade is the smaller of the
// left and right ramp values.  OPEN_LEFT and OPEN_RIGHT turn the outer
// ramps into shoulders that stay at full scale to the end of the input
// range.  Ramps are powers of two wide, so a grade is a subtraction and a
// shift.  Purely combinational.
// The paper gives the term names only; shapes and breakpoints are this
// design's choice.
module fls_mf #(
  parameter int unsigned IN_W           = 11,
  parameter int unsigned LEFT_FOOT      = 0,
  parameter int unsigned RIGHT_SHOULDER = 256,
  parameter int unsigned RAMP_SHIFT     = 8,
  parameter bit          OPEN_LEFT      = 1'b0,
  parameter bit          OPEN_RIGHT     = 1'b0
) (
  input  logic [IN_W-1:0]             x,
  output logic [algas4_pkg::GRADE_W-1:0] grade
);
  import algas4_pkg::*;

  localparam int FULL       = (1 << GRADE_W) - 1;
  localparam int RAMP       = 1 << RAMP_SHIFT;
  localparam int RIGHT_FOOT = int'(RIGHT_SHOULDER) + RAMP;

  // grade at distance d inside a ramp, d = 1 .. RAMP: d * 2**GRADE_W / RAMP,
  // capped at full scale
  function automatic int ramp(input int d);
    int g;
    g = (d >= RAMP) ? FULL : (d << GRADE_W) >>> RAMP_SHIFT;
    return (g > FULL) ? FULL : g;
  endfunction

  int xv, dl, dr, gl, gr;
  always_comb begin
    xv = int'(x);
    dl = xv - int'(LEFT_FOOT);     // distance past the left foot
    dr = RIGHT_FOOT - xv;          // distance before the right foot
    gl = OPEN_LEFT  ? FULL : (dl <= 0) ? 0 : ramp(dl);
    gr = OPEN_RIGHT ? FULL : (dr <= 0) ? 0 : ramp(dr);
    grade = grade_t'((gl < gr) ? gl : gr);
  end
endmodule
