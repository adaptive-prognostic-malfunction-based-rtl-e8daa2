// fls_defuzzifier: converts the four output-term weights to a crisp value.
//
// Height (weighted-average) defuzzification over singleton output terms:
// crisp = sum(w[o] * OUT_CENTER[o]) / sum(w[o]), truncated.  When no rule
// fires (all weights zero) the output is 0.  The divide is a single
// combinational stage feeding the output register; out_valid ("finish
// signal to the next unit") follows in_valid by one cycle.
// The paper names a defuzzification unit; the method, centres and output
// scale are this design's choice.
module fls_defuzzifier (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  algas4_pkg::w_vec_t   w,
  output logic                 out_valid,
  output algas4_pkg::fls_out_t crisp
);
  import algas4_pkg::*;

  localparam int unsigned DEN_W = GRADE_W + $clog2(NUM_OUT_TERMS);
  localparam int unsigned NUM_W = DEN_W + FLS_OUT_W;

  logic [NUM_W-1:0] num;
  logic [DEN_W-1:0] den;
  logic [NUM_W-1:0] quo;

  always_comb begin
    num = '0;
    den = '0;
    for (int o = 0; o < NUM_OUT_TERMS; o++) begin
      num = num + NUM_W'(w[o]) * NUM_W'(OUT_CENTER[o]);
      den = den + DEN_W'(w[o]);
    end
    quo = (den == '0) ? '0 : num / NUM_W'(den);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      crisp     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) crisp <= fls_out_t'(quo);
    end
  end
endmodule
