// tb_fir15: self-checking test of the 15-tap FIR filter.
// Feeds random samples with random gaps (plus a step to full scale) and
// compares every output with a direct-form convolution using taps taken
// from Pascal's triangle; also checks the one-cycle output latency.
module tb_fir15;
  import algas4_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [10:0] in_data = '0, out_data;
  int checks = 0, failures = 0;
  longint h [32];
  longint hist [15];

  always #5 clk = ~clk;

  fir15 #(.W(11), .TAPS(15)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc;
    int expected;
    ref_taps(15, h);
    for (int i = 0; i < 15; i++) hist[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_data  = (n >= 100 && n < 130) ? 11'd2047 : 11'($urandom);
      for (int i = 14; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = longint'(in_data);
      acc = 0;
      for (int i = 0; i < 15; i++) acc += h[i] * hist[i];
      expected = int'((acc + 8192) >>> 14);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || int'(out_data) != expected) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d valid=%0b got %0d expected %0d", n, out_valid, out_data, expected);
      end
      repeat ($urandom_range(0, 2)) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin
          failures++;
          $display("FAIL spurious out_valid");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
