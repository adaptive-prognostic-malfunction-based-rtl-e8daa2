// algas4_top: the four-corner ALGAS4 landing guidance system.
//
// Four corners sit under the drone: 0 front, 1 right, 2 back, 3 left.
// The spatially opposed corners form two differential pairs, front/back
// (0-2) and right/left (1-3); the HSDCI lanes of each pair are wired
// to each other here, so every corner compares its distance to the ground
// with the distance measured on the opposite side.  Each corner runs on
// its own clock clk[i] and reset rst_n[i], as on four separate FPGAs;
// the links are asynchronous and tolerate that.  All sensor pins,
// configuration inputs and results are per-corner arrays indexed by the
// corner number.  The pairing follows the paper's system diagram; the
// corner numbering is this design's.
module algas4_top #(
  parameter int unsigned LINK_TIMEOUT = 100000
) (
  input  logic [algas4_pkg::NUM_CORNERS-1:0] clk,
  input  logic [algas4_pkg::NUM_CORNERS-1:0] rst_n,
  input  algas4_pkg::lidar_t           lidar_data   [algas4_pkg::NUM_CORNERS],
  input  logic [algas4_pkg::NUM_CORNERS-1:0] lidar_strobe,
  input  algas4_pkg::radar_t           radar_data   [algas4_pkg::NUM_CORNERS],
  input  logic [algas4_pkg::NUM_CORNERS-1:0] radar_strobe,
  input  logic [algas4_pkg::NUM_CORNERS-1:0] win_we,
  input  logic [algas4_pkg::WIN_W-1:0] win_n        [algas4_pkg::NUM_CORNERS],
  input  logic [algas4_pkg::NUM_CORNERS-1:0] thr_we,
  input  logic [$clog2(algas4_pkg::APMU_SLOTS)-1:0] thr_addr [algas4_pkg::NUM_CORNERS],
  input  algas4_pkg::phi_t             thr_data     [algas4_pkg::NUM_CORNERS],
  input  algas4_pkg::lidar_t           tolerance    [algas4_pkg::NUM_CORNERS],
  input  logic [1:0]                   link_speed,
  output logic [algas4_pkg::NUM_CORNERS-1:0] fls_valid,
  output algas4_pkg::fls_out_t         fls_out      [algas4_pkg::NUM_CORNERS],
  output logic [algas4_pkg::NUM_CORNERS-1:0] apmu_alarm,
  output algas4_pkg::phi_t             apmu_phi     [algas4_pkg::NUM_CORNERS],
  output logic [algas4_pkg::WIN_W-1:0] apmu_window  [algas4_pkg::NUM_CORNERS],
  output algas4_pkg::dic_pkt_t         peer         [algas4_pkg::NUM_CORNERS],
  output logic [algas4_pkg::NUM_CORNERS-1:0] peer_lost,
  output logic signed [algas4_pkg::LIDAR_W:0] incl_diff [algas4_pkg::NUM_CORNERS],
  output logic [algas4_pkg::NUM_CORNERS-1:0] incl_warn,
  output logic [15:0]                  rx_errors    [algas4_pkg::NUM_CORNERS],
  output logic [15:0]                  fc_stalls    [algas4_pkg::NUM_CORNERS],
  output logic [15:0]                  pkts_replaced [algas4_pkg::NUM_CORNERS]
);
  import algas4_pkg::*;

  logic [NUM_CORNERS-1:0] line_tx, fc_out;

  for (genvar i = 0; i < NUM_CORNERS; i++) begin : g_corner
    localparam int unsigned OPP = (i + NUM_CORNERS / 2) % NUM_CORNERS;   // spatially opposite corner
    algas4_corner #(.CORE_ID(2'(i)), .LINK_TIMEOUT(LINK_TIMEOUT)) u_corner (
      .clk(clk[i]), .rst_n(rst_n[i]),
      .lidar_data(lidar_data[i]), .lidar_strobe(lidar_strobe[i]),
      .radar_data(radar_data[i]), .radar_strobe(radar_strobe[i]),
      .win_we(win_we[i]), .win_n(win_n[i]),
      .thr_we(thr_we[i]), .thr_addr(thr_addr[i]), .thr_data(thr_data[i]),
      .tolerance(tolerance[i]), .link_speed,
      .line_tx(line_tx[i]), .line_rx(line_tx[OPP]),
      .fc_out(fc_out[i]), .fc_in(fc_out[OPP]),
      .fls_valid(fls_valid[i]), .fls_out(fls_out[i]),
      .apmu_alarm(apmu_alarm[i]), .apmu_phi(apmu_phi[i]), .apmu_window(apmu_window[i]),
      .peer(peer[i]), .peer_lost(peer_lost[i]), .incl_diff(incl_diff[i]),
      .incl_warn(incl_warn[i]), .rx_errors(rx_errors[i]), .fc_stalls(fc_stalls[i]),
      .pkts_replaced(pkts_replaced[i])
    );
  end
endmodule
