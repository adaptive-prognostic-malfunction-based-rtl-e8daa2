// fls_inference: Mamdani inference engine with the eleven landing rules.
//
// Every rule's firing strength is the minimum of its lidar and radar
// grades (fuzzy AND); the strengths of rules sharing a consequent are
// combined by maximum (fuzzy OR), giving one weight per output term
// (L, M, H, EH).  All eleven rules evaluate in parallel in one cycle and
// the weights are registered; out_valid ("inference finished") follows
// in_valid by one cycle.
// The rule base is the paper's; min/max operators are the standard
// Mamdani choice and this design's assumption.
module fls_inference (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  algas4_pkg::mu_vec_t  mu_lidar,
  input  algas4_pkg::mu_vec_t  mu_radar,
  output logic                 out_valid,
  output algas4_pkg::w_vec_t   w
);
  import algas4_pkg::*;

  w_vec_t w_next;
  grade_t strength;

  always_comb begin
    for (int o = 0; o < NUM_OUT_TERMS; o++) w_next[o] = '0;
    strength = '0;
    for (int r = 0; r < NUM_RULES; r++) begin
      strength = (mu_lidar[RULES[r].l] < mu_radar[RULES[r].r]) ? mu_lidar[RULES[r].l]
                                                                 : mu_radar[RULES[r].r];
      if (strength > w_next[RULES[r].o]) w_next[RULES[r].o] = strength;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < NUM_OUT_TERMS; o++) w[o] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) w <= w_next;
    end
  end
endmodule
