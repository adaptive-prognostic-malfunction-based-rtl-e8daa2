// algas4_corner: one spatial corner of the ALGAS4 system.
//
// HOA unit (two sensor interface units, one per range sensor), the ALGAS4
// processing core (two FIR filters, FLS node, APMU), the Differential
// Inclination Control unit and the HSDCI link to the opposite corner,
// wired as: sensors -> SIU -> FIR -> {FLS, APMU} -> DIC <-> HSDCI <-> peer.
// The lidar and radar sensors themselves are outside the chip; their
// data/strobe pins are ports here.  CORE_ID names the corner in the
// packets it sends.  All logic runs on the corner's own clk.
// The core's filt_valid, fls_active and apmu_valid strobes and the HSDCI's
// tx_busy flag are left unconnected here: the results they qualify are
// held levels at the corner's ports (the FLS command has its own
// fls_valid), so the drone's processor does not need them.
// Composition follows the paper's corner diagram; port grouping is this
// design's.
module algas4_corner #(
  parameter logic [1:0]  CORE_ID      = 2'd0,
  parameter int unsigned LINK_TIMEOUT = 100000
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // HOA sensor pins
  input  algas4_pkg::lidar_t           lidar_data,
  input  logic                         lidar_strobe,
  input  algas4_pkg::radar_t           radar_data,
  input  logic                         radar_strobe,
  // configuration from the drone's main processor
  input  logic                         win_we,
  input  logic [algas4_pkg::WIN_W-1:0] win_n,
  input  logic                         thr_we,
  input  logic [$clog2(algas4_pkg::APMU_SLOTS)-1:0] thr_addr,
  input  algas4_pkg::phi_t             thr_data,
  input  algas4_pkg::lidar_t           tolerance,
  input  logic [1:0]                   link_speed,
  // HSDCI lanes to and from the opposite corner
  output logic                         line_tx,
  input  logic                         line_rx,
  output logic                         fc_out,
  input  logic                         fc_in,
  // results to the drone's main processor
  output logic                         fls_valid,
  output algas4_pkg::fls_out_t         fls_out,
  output logic                         apmu_alarm,
  output algas4_pkg::phi_t             apmu_phi,
  output logic [algas4_pkg::WIN_W-1:0] apmu_window,
  output algas4_pkg::dic_pkt_t         peer,
  output logic                         peer_lost,
  output logic signed [algas4_pkg::LIDAR_W:0] incl_diff,
  output logic                         incl_warn,
  output logic [15:0]                  rx_errors,
  output logic [15:0]                  fc_stalls,
  output logic [15:0]                  pkts_replaced
);
  import algas4_pkg::*;

  logic     l_valid, r_valid;
  lidar_t   l_sample, l_filt;
  radar_t   r_sample, r_filt;
  logic     filt_valid, fls_active, apmu_valid;
  dic_pkt_t tx_pkt, rx_pkt;
  logic     tx_valid, tx_ready, rx_valid, rx_ready, tx_busy;

  siu #(.W(LIDAR_W)) u_siu_lidar (
    .clk, .rst_n, .sensor_data(lidar_data), .sensor_strobe(lidar_strobe),
    .sample(l_sample), .sample_valid(l_valid)
  );
  siu #(.W(RADAR_W)) u_siu_radar (
    .clk, .rst_n, .sensor_data(radar_data), .sensor_strobe(radar_strobe),
    .sample(r_sample), .sample_valid(r_valid)
  );

  algas4_core u_core (
    .clk, .rst_n,
    .lidar_valid(l_valid), .lidar(l_sample), .radar_valid(r_valid), .radar(r_sample),
    .win_we, .win_n, .thr_we, .thr_addr, .thr_data,
    .filt_valid, .lidar_filt(l_filt), .radar_filt(r_filt),
    .fls_valid, .fls_out, .fls_active,
    .apmu_valid, .apmu_alarm, .apmu_phi, .apmu_window
  );

  dic #(.CORE_ID(CORE_ID), .LINK_TIMEOUT(LINK_TIMEOUT)) u_dic (
    .clk, .rst_n,
    .fls_valid, .fls_out, .apmu_alarm, .lidar_filt(l_filt), .radar_filt(r_filt), .tolerance,
    .tx_pkt, .tx_valid, .tx_ready, .rx_pkt, .rx_valid, .rx_ready,
    .peer, .peer_lost, .incl_diff, .incl_warn, .pkts_replaced
  );

  hsdci #(.PKT_W(PKT_W)) u_hsdci (
    .clk, .rst_n, .speed(link_speed),
    .tx_pkt, .tx_valid, .tx_ready, .rx_pkt, .rx_valid, .rx_ready,
    .line_tx, .line_rx, .fc_out, .fc_in,
    .rx_errors, .fc_stalls, .tx_busy
  );
endmodule
