// apmu_threshold_lut: table of discrepancy thresholds, one per window size.
//
// Entry n-1 holds the threshold used while n memory slots are active; the
// entry is selected by the FSAU's active window size.  The entries are
// registers that experts may rewrite at run time through thr_we/thr_addr/
// thr_data; after reset entry n-1 holds n * THR_PER_SLOT.  Read is
// combinational.
// The paper says thresholds sit in a LUT addressed by the FSAU setting and
// are left to experts; the reset contents and the write port are this
// design's choice.
module apmu_threshold_lut #(
  parameter int unsigned SLOTS        = 16,
  parameter int unsigned PHI_W        = 15,
  parameter int unsigned THR_PER_SLOT = 20
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       thr_we,
  input  logic [$clog2(SLOTS)-1:0]   thr_addr,
  input  logic [PHI_W-1:0]           thr_data,
  input  logic [$clog2(SLOTS):0]     n_active,
  output logic [PHI_W-1:0]           threshold
);
  logic [PHI_W-1:0] lut [SLOTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SLOTS; i++) lut[i] <= PHI_W'((i + 1) * THR_PER_SLOT);
    end else if (thr_we) begin
      lut[thr_addr] <= thr_data;
    end
  end

  assign threshold = (n_active == '0) ? lut[0] : lut[$clog2(SLOTS)'(n_active - 1'b1)];
endmodule
