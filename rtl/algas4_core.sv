// algas4_core: one ALGAS4 processing core (the digital part of a corner).
//
// Two systolic 15-tap FIR filters smooth the lidar and radar samples from
// the sensor interface units.  Their outputs feed, side by side, the
// localized systolic FLS node (landing command) and the APMU (sensor
// discrepancy alarm).  The core keeps the latest filtered value of each
// sensor; whenever either filter produces a new value the APMU receives
// the latest pair, so both units always judge the same pair of readings.
//
// Timing from a sensor sample_valid: filtered value +1 cycle, FLS command
// +5 cycles, APMU decision +6 cycles (both pipelines accept a sample every
// cycle).  Configuration ports of the APMU pass straight through.
// The composition (2 FIR, 1 FLS, 1 APMU) is the paper's; the pairing of
// the two asynchronous sample streams is this design's choice.
module algas4_core (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         lidar_valid,
  input  algas4_pkg::lidar_t           lidar,
  input  logic                         radar_valid,
  input  algas4_pkg::radar_t           radar,
  input  logic                         win_we,
  input  logic [algas4_pkg::WIN_W-1:0] win_n,
  input  logic                         thr_we,
  input  logic [$clog2(algas4_pkg::APMU_SLOTS)-1:0] thr_addr,
  input  algas4_pkg::phi_t             thr_data,
  // filtered distances (to the DIC)
  output logic                         filt_valid,
  output algas4_pkg::lidar_t           lidar_filt,
  output algas4_pkg::radar_t           radar_filt,
  // FLS landing command
  output logic                         fls_valid,
  output algas4_pkg::fls_out_t         fls_out,
  output logic                         fls_active,
  // APMU decision
  output logic                         apmu_valid,
  output logic                         apmu_alarm,
  output algas4_pkg::phi_t             apmu_phi,
  output logic [algas4_pkg::WIN_W-1:0] apmu_window
);
  import algas4_pkg::*;

  logic   fl_valid, fr_valid;
  lidar_t fl_data;
  radar_t fr_data;

  fir15 #(.W(LIDAR_W), .TAPS(15)) u_fir_lidar (
    .clk, .rst_n, .in_valid(lidar_valid), .in_data(lidar),
    .out_valid(fl_valid), .out_data(fl_data)
  );
  fir15 #(.W(RADAR_W), .TAPS(15)) u_fir_radar (
    .clk, .rst_n, .in_valid(radar_valid), .in_data(radar),
    .out_valid(fr_valid), .out_data(fr_data)
  );

  // latest pair of filtered readings
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lidar_filt <= '0;
      radar_filt <= '0;
      filt_valid <= 1'b0;
    end else begin
      filt_valid <= fl_valid | fr_valid;
      if (fl_valid) lidar_filt <= fl_data;
      if (fr_valid) radar_filt <= fr_data;
    end
  end

  fls_core u_fls (
    .clk, .rst_n,
    .lidar_valid(fl_valid), .lidar(fl_data),
    .radar_valid(fr_valid), .radar(fr_data),
    .out_valid(fls_valid), .crisp(fls_out), .engine_active(fls_active)
  );

  apmu #(.SLOTS(APMU_SLOTS), .MIN_SLOTS(APMU_MIN_SLOTS), .THR_PER_SLOT(THR_PER_SLOT)) u_apmu (
    .clk, .rst_n,
    .in_valid(filt_valid), .s1(lidar_filt), .s2(radar_filt),
    .win_we, .win_n, .thr_we, .thr_addr, .thr_data,
    .out_valid(apmu_valid), .alarm(apmu_alarm), .phi_eff(apmu_phi), .n_active(apmu_window)
  );
endmodule
