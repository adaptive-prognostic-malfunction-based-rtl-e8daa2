// siu: Sensor Interface Unit, the digital front of one HOA range sensor.
//
// The sensor presents a distance word on sensor_data and raises
// sensor_strobe while that word is valid.  The strobe comes from the
// sensor's own clock domain, so it passes through a two-flop synchroniser;
// its rising edge captures sensor_data into sample and gives a one-cycle
// sample_valid pulse ("new signal activity" in the processing procedure).
// The data word must be stable from the strobe's rising edge until it has
// been captured, three clock cycles later.
//
// Timing: sample_valid rises 3 cycles after sensor_strobe rises.
// The paper names this unit and its place between sensor and FIR filter;
// the strobe protocol and synchroniser are this design's choice.
module siu #(
  parameter int unsigned W = 11
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] sensor_data,
  input  logic         sensor_strobe,
  output logic [W-1:0] sample,
  output logic         sample_valid
);
  logic [2:0] strobe_sync;   // [0],[1] synchroniser, [2] edge history

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      strobe_sync  <= '0;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      strobe_sync  <= {strobe_sync[1:0], sensor_strobe};
      sample_valid <= strobe_sync[1] & ~strobe_sync[2];
      if (strobe_sync[1] & ~strobe_sync[2]) sample <= sensor_data;
    end
  end
endmodule
