// apmu: Adaptive Prognostic Malfunction Unit.
//
// Watches the agreement of the two filtered range readings and raises
// alarm when their accumulated discrepancy over an adjustable window
// exceeds a threshold, a sign of a failed, jammed or spoofed sensor.
//
// Pipeline (one register stage each, a new pair may enter every cycle):
//  1. signal subtractor and absolute error function: |S1 - S2|;
//  2. FIFO-like buffer of SLOTS memory storage elements; a new |dS|
//     enters slot 0 and every slot moves one place on;
//  3. effective discrepancy weight: phi_eff = sum of the slots enabled
//     by the FSAU mask (eq. 2, the MAE without its divide by n); all
//     slots keep shifting, the mask only selects what is summed, so a
//     widened window covers real history at once;
//  4. comparator: alarm = (phi_eff - phi_threshold) > 0, the threshold
//     coming from the LUT entry of the active window size.
// Stages 3 and 4 recompute every cycle, so a change of window or
// threshold shows on alarm two cycles later; after a new sample alarm and
// phi_eff are updated 4 cycles after in_valid, marked by out_valid.
// S1 is the lidar (11 bit), S2 the radar (10 bit, zero extended).
// Structure, 16 slots and the 4..16 window follow the paper; widths,
// latency and the strict ">" comparison are this design's choice.
module apmu #(
  parameter int unsigned SLOTS        = 16,
  parameter int unsigned MIN_SLOTS    = 4,
  parameter int unsigned THR_PER_SLOT = 20
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // paired samples
  input  logic                         in_valid,
  input  algas4_pkg::lidar_t           s1,
  input  algas4_pkg::radar_t           s2,
  // configuration from the drone's main processor
  input  logic                         win_we,
  input  logic [$clog2(SLOTS):0]       win_n,
  input  logic                         thr_we,
  input  logic [$clog2(SLOTS)-1:0]     thr_addr,
  input  logic [algas4_pkg::ABS_W+$clog2(SLOTS)-1:0] thr_data,
  // decision
  output logic                         out_valid,
  output logic                         alarm,
  output logic [algas4_pkg::ABS_W+$clog2(SLOTS)-1:0] phi_eff,
  output logic [$clog2(SLOTS):0]       n_active
);
  import algas4_pkg::*;

  localparam int unsigned PW = ABS_W + $clog2(SLOTS);

  logic signed [ABS_W:0] delta;
  abs_t                  abs_q;
  abs_t                  slot [SLOTS];
  logic [SLOTS-1:0]      slot_en;
  logic [PW-1:0]         phi_next, phi_sum, threshold;
  logic signed [PW:0]    margin;
  logic [2:0]            vpipe;

  // stage 1: signal subtractor and absolute error function
  assign delta = $signed({1'b0, s1}) - $signed({1'b0, (ABS_W)'(s2)});

  // stage 3 combinational part: sum of the active slots
  always_comb begin
    phi_next = '0;
    for (int i = 0; i < SLOTS; i++)
      if (slot_en[i]) phi_next = phi_next + PW'(slot[i]);
  end

  // stage 4 combinational part: subtract-compare
  assign margin = $signed({1'b0, phi_sum}) - $signed({1'b0, threshold});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      abs_q   <= '0;
      for (int i = 0; i < SLOTS; i++) slot[i] <= '0;
      phi_sum <= '0;
      phi_eff <= '0;
      alarm   <= 1'b0;
      vpipe   <= '0;
      out_valid <= 1'b0;
    end else begin
      vpipe     <= {vpipe[1:0], in_valid};
      out_valid <= vpipe[2];
      if (in_valid) abs_q <= abs_t'(delta[ABS_W] ? -delta : delta);
      if (vpipe[0]) begin
        slot[0] <= abs_q;
        for (int i = 1; i < SLOTS; i++) slot[i] <= slot[i-1];
      end
      phi_sum <= phi_next;
      phi_eff <= phi_sum;      // published with the decision it produced
      alarm   <= (margin > 0);
    end
  end

  apmu_fsau #(.SLOTS(SLOTS), .MIN_SLOTS(MIN_SLOTS)) u_fsau (
    .clk, .rst_n, .win_we, .win_n, .slot_en, .n_active
  );

  apmu_threshold_lut #(.SLOTS(SLOTS), .PHI_W(PW), .THR_PER_SLOT(THR_PER_SLOT)) u_lut (
    .clk, .rst_n, .thr_we, .thr_addr, .thr_data, .n_active, .threshold
  );
endmodule
