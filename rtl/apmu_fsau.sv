// apmu_fsau: Frame Size Activator Unit of the APMU.
//
// Holds the window size n (the "depth of decision") chosen by the drone's
// main processor and drives an m-bit mask that activates memory slots
// 0..n-1 of the APMU buffer (a thermometer code).  A request outside the
// supported range is clamped to [MIN_SLOTS, SLOTS].  win_n is loaded when
// win_we is high and takes effect on the next cycle; after reset the full
// window (SLOTS) is active.
// The m-bit mask and the 4..16 range are the paper's; the load port and
// clamping are this design's choice.
module apmu_fsau #(
  parameter int unsigned SLOTS     = 16,
  parameter int unsigned MIN_SLOTS = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       win_we,
  input  logic [$clog2(SLOTS):0]     win_n,
  output logic [SLOTS-1:0]           slot_en,
  output logic [$clog2(SLOTS):0]     n_active
);
  localparam int unsigned NW = $clog2(SLOTS) + 1;

  logic [NW-1:0] n_clamped;

  always_comb begin
    if (win_n < NW'(MIN_SLOTS))  n_clamped = NW'(MIN_SLOTS);
    else if (win_n > NW'(SLOTS)) n_clamped = NW'(SLOTS);
    else                         n_clamped = win_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      n_active <= NW'(SLOTS);
    else if (win_we) n_active <= n_clamped;
  end

  always_comb begin
    for (int i = 0; i < SLOTS; i++) slot_en[i] = (NW'(i) < n_active);
  end
endmodule
