// tb_apmu_fsau: self-checking test of the frame size activator.
// Checks the reset window (16), every request 0..31 (clamped to 4..16)
// and that the mask enables exactly the first n slots; a request without
// win_we must not change anything.
module tb_apmu_fsau;
  logic clk = 0, rst_n = 0;
  logic win_we = 0;
  logic [4:0] win_n = '0, n_active;
  logic [15:0] slot_en;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  apmu_fsau #(.SLOTS(16), .MIN_SLOTS(4)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_n(input int n);
    logic [15:0] mask;
    mask = 16'((32'd1 << n) - 1);
    checks++;
    if (int'(n_active) != n || slot_en != mask) begin
      failures++;
      $display("FAIL n_active=%0d slot_en=%b expected n=%0d mask=%b", n_active, slot_en, n, mask);
    end
  endtask

  initial begin
    int n;
    repeat (2) @(posedge clk);
    #1 expect_n(16);
    rst_n = 1;
    for (int req = 0; req < 32; req++) begin
      @(negedge clk);
      win_we = 1; win_n = 5'(req);
      @(negedge clk);
      win_we = 0;
      n = (req < 4) ? 4 : (req > 16) ? 16 : req;
      expect_n(n);
      win_n = 5'(req ^ 5'h0a);      // no write enable: must be ignored
      @(negedge clk);
      expect_n(n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
