// fls_core: one systolic Mamdani fuzzy logic processing node.
//
// Follows the four steps of the landing procedure:
//  1. a new radar or lidar sample (lidar_valid / radar_valid) is stored;
//     the engine stays idle until both sensors have delivered at least one
//     sample ("reasonable input activity"), after which every new sample
//     activates the fuzzifier on the latest pair;
//  2. fls_fuzzifier: all ten membership function units fire in parallel;
//  3. fls_inference: all eleven rules fire in parallel;
//  4. fls_defuzzifier: crisp command and a one-cycle finish pulse.
// Each step is one register stage and a new pair can enter every cycle,
// so crisp/out_valid follow the sample's valid by 4 cycles.
// Inputs lidar (11 bit) and radar (10 bit) are crisp distances, output a
// 7-bit command to the drone's central processor (higher = nearer ground).
// Stage split and enabling rule are this design's reading of the paper's
// procedure; all registers reset to zero as the procedure requires.
module fls_core (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lidar_valid,
  input  algas4_pkg::lidar_t   lidar,
  input  logic                 radar_valid,
  input  algas4_pkg::radar_t   radar,
  output logic                 out_valid,
  output algas4_pkg::fls_out_t crisp,
  output logic                 engine_active
);
  import algas4_pkg::*;

  lidar_t  lidar_q;
  radar_t  radar_q;
  logic    lidar_seen, radar_seen;
  logic    activate;
  logic    fz_valid, inf_valid;
  mu_vec_t mu_l, mu_r;
  w_vec_t  w;

  assign engine_active = lidar_seen & radar_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lidar_q    <= '0;
      radar_q    <= '0;
      lidar_seen <= 1'b0;
      radar_seen <= 1'b0;
      activate   <= 1'b0;
    end else begin
      if (lidar_valid) begin
        lidar_q    <= lidar;
        lidar_seen <= 1'b1;
      end
      if (radar_valid) begin
        radar_q    <= radar;
        radar_seen <= 1'b1;
      end
      activate <= (lidar_valid | radar_valid) &
                  (lidar_seen | lidar_valid) & (radar_seen | radar_valid);
    end
  end

  fls_fuzzifier u_fuzz (
    .clk, .rst_n, .in_valid(activate), .lidar(lidar_q), .radar(radar_q),
    .out_valid(fz_valid), .mu_lidar(mu_l), .mu_radar(mu_r)
  );

  fls_inference u_inf (
    .clk, .rst_n, .in_valid(fz_valid), .mu_lidar(mu_l), .mu_radar(mu_r),
    .out_valid(inf_valid), .w(w)
  );

  fls_defuzzifier u_defuzz (
    .clk, .rst_n, .in_valid(inf_valid), .w(w), .out_valid(out_valid), .crisp(crisp)
  );
endmodule
