// fir15: systolic 15-tap FIR smoothing filter for one sensor stream.
//
// Transposed (systolic) form: each new input sample is broadcast to all
// taps, every tap multiplies it by its constant coefficient and adds the
// partial sum handed on by its right neighbour, and the partial sums move
// one register per sample toward tap 0.  y[n] = sum_k h[k] * x[n-k].
// The coefficients are the binomial row C(TAPS-1, k), a Gaussian-like
// low-pass that sums to 2**(TAPS-1); the output is the accumulator shifted
// right by TAPS-1 with round-half-up, so the DC gain is exactly one and
// out_data has the input's width.  Multiplications are by constants and
// map to adders (soft DSP), no hard multipliers are needed.
//
// Interface: in_valid/in_data once per sample, no back-pressure; the
// pipeline advances only on in_valid.  out_valid follows in_valid by one
// cycle.  The filter's group delay is (TAPS-1)/2 samples.
// The tap count and the systolic structure are the paper's; it gives no
// coefficients, so the binomial set is this design's choice.
module fir15 #(
  parameter int unsigned W    = 11,
  parameter int unsigned TAPS = 15
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  import algas4_pkg::binom;

  localparam int unsigned SHIFT = TAPS - 1;
  localparam int unsigned ACC_W = W + SHIFT + 1;

  logic [ACC_W-1:0] acc [1:TAPS-1];   // partial sums handed toward tap 0
  logic [ACC_W-1:0] y_full;

  assign y_full = ACC_W'(binom(TAPS-1, 0)) * ACC_W'(in_data) + acc[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k < TAPS; k++) acc[k] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 1; k < TAPS - 1; k++)
          acc[k] <= ACC_W'(binom(TAPS-1, k)) * ACC_W'(in_data) + acc[k+1];
        acc[TAPS-1] <= ACC_W'(binom(TAPS-1, TAPS-1)) * ACC_W'(in_data);
        out_data <= W'((y_full + (ACC_W'(1) << (SHIFT - 1))) >> SHIFT);
      end
    end
  end
endmodule
