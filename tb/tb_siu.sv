// tb_siu: self-checking test of the sensor interface unit.
// Sends strobed samples with random spacing and strobe length and checks
// that each gives exactly one sample_valid pulse, 3 cycles after the
// strobe rises, carrying the presented word.
module tb_siu;
  logic clk = 0, rst_n = 0;
  logic [10:0] sensor_data = '0, sample;
  logic sensor_strobe = 0, sample_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  siu #(.W(11)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pulses = 0;
  always @(posedge clk) if (rst_n && sample_valid) pulses++;

  initial begin
    logic [10:0] word;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 100; n++) begin
      word = 11'($urandom);
      @(negedge clk);
      sensor_data   = word;
      sensor_strobe = 1;
      cyc = 0;
      do begin
        @(posedge clk); #1; cyc++;
      end while (!sample_valid && cyc < 10);
      checks++;
      if (!sample_valid || cyc != 3 || sample != word) begin
        failures++;
        $display("FAIL sample %0d: valid=%0b after %0d cycles, got %h expected %h", n, sample_valid, cyc, sample, word);
      end
      repeat ($urandom_range(0, 6)) @(posedge clk);
      @(negedge clk);
      sensor_strobe = 0;
      sensor_data   = 11'($urandom);
      repeat ($urandom_range(3, 8)) @(posedge clk);
    end
    checks++;
    if (pulses != 100) begin
      failures++;
      $display("FAIL %0d pulses for 100 strobes", pulses);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
