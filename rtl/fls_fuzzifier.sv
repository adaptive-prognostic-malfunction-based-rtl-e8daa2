// fls_fuzzifier: membership function units for the two crisp inputs.
//
// Five membership function units per input (EN, N, M, F, EF) all fire in
// parallel; term k peaks at k*MF_STEP distance units and overlaps its
// neighbours so that adjacent grades always sum to full scale.  Lidar and
// radar use the same breakpoints because both report the same distance
// unit.  The grades are registered: out_valid follows in_valid by one cycle.
// The term names are the paper's; breakpoints are this design's choice.
module fls_fuzzifier (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  algas4_pkg::lidar_t   lidar,
  input  algas4_pkg::radar_t   radar,
  output logic                 out_valid,
  output algas4_pkg::mu_vec_t  mu_lidar,
  output algas4_pkg::mu_vec_t  mu_radar
);
  import algas4_pkg::*;

  mu_vec_t gl, gr;

  for (genvar k = 0; k < NUM_IN_TERMS; k++) begin : g_term
    localparam int unsigned LF = (k == 0) ? 0 : (k - 1) * MF_STEP;
    localparam int unsigned RS = k * MF_STEP;
    fls_mf #(.IN_W(LIDAR_W), .LEFT_FOOT(LF), .RIGHT_SHOULDER(RS), .RAMP_SHIFT(MF_SHIFT),
             .OPEN_LEFT(k == 0), .OPEN_RIGHT(k == NUM_IN_TERMS - 1))
      u_mf_lidar (.x(lidar), .grade(gl[k]));
    fls_mf #(.IN_W(RADAR_W), .LEFT_FOOT(LF), .RIGHT_SHOULDER(RS), .RAMP_SHIFT(MF_SHIFT),
             .OPEN_LEFT(k == 0), .OPEN_RIGHT(k == NUM_IN_TERMS - 1))
      u_mf_radar (.x(radar), .grade(gr[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < NUM_IN_TERMS; k++) begin
        mu_lidar[k] <= '0;
        mu_radar[k] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        mu_lidar <= gl;
        mu_radar <= gr;
      end
    end
  end
endmodule
