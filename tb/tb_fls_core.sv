// tb_fls_core: self-checking test of the fuzzy logic processing node.
// Checks that the engine stays idle until both sensors have reported,
// then sweeps a grid of lidar/radar distances plus random points, with
// the two samples arriving together or apart, and compares every crisp
// output with the reference Mamdani model, 4 cycles after the sample.
// Every output is also compared with the same fuzzy system computed in
// real arithmetic: the fixed-point datapath (8-bit grades, truncating
// divide) may deviate by at most 5 % of the output scale (the largest
// output centre, 110), the accuracy loss the published design reports
// against its floating-point model.
module tb_fls_core;
  import algas4_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lidar_valid = 0, radar_valid = 0, out_valid, engine_active;
  logic [10:0] lidar = '0;
  logic [9:0]  radar = '0;
  logic [6:0]  crisp;
  int checks = 0, failures = 0;
  int cyc = 0;
  int exp_cyc [$];
  int exp_val [$];
  real exp_real [$];
  real max_dev = 0.0;
  int cur_l = 0, cur_r = 0;
  bit seen_l = 0, seen_r = 0;
  int n_outputs = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  fls_core dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      n_outputs++;
      checks++;
      if (exp_cyc.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %0d at cycle %0d", crisp, cyc);
      end else begin
        int ec, ev;
        ec = exp_cyc.pop_front();
        ev = exp_val.pop_front();
        begin
          real dev;
          dev = real'(crisp) - exp_real.pop_front();
          if (dev < 0.0) dev = -dev;
          if (dev > max_dev) max_dev = dev;
          checks++;
          if (dev > 0.05 * 110.0) begin
            failures++;
            $display("FAIL crisp %0d deviates %0.2f from the real-valued model", crisp, dev);
          end
        end
        if (ec != cyc || int'(crisp) != ev) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d (exp %0d): crisp %0d expected %0d", cyc, ec, crisp, ev);
        end
      end
    end else if (exp_cyc.size() != 0 && exp_cyc[0] < cyc) begin
      failures++;
      $display("FAIL missing output due at cycle %0d", exp_cyc[0]);
      void'(exp_cyc.pop_front());
      void'(exp_val.pop_front());
      void'(exp_real.pop_front());
    end
  end

  task automatic drive(input bit vl, input int l, input bit vr, input int r);
    @(negedge clk);
    lidar_valid = vl; lidar = 11'(l);
    radar_valid = vr; radar = 10'(r);
    if (vl) begin cur_l = l; seen_l = 1; end
    if (vr) begin cur_r = r; seen_r = 1; end
    if ((vl || vr) && seen_l && seen_r) begin
      exp_cyc.push_back(cyc + 4);
      exp_val.push_back(ref_fls(cur_l, cur_r));
      exp_real.push_back(ref_fls_real(cur_l, cur_r));
    end
    @(negedge clk);
    lidar_valid = 0; radar_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // lidar only: engine must stay idle
    for (int i = 0; i < 3; i++) drive(1, 100 * i, 0, 0);
    repeat (6) @(negedge clk);
    checks++;
    if (engine_active || n_outputs != 0) begin
      failures++;
      $display("FAIL engine active before radar activity");
    end
    drive(0, 0, 1, 50);
    // grid sweep, both samples together
    for (int l = 0; l <= 1344; l += 64)
      for (int r = 0; r <= 1023; r += 64)
        drive(1, l, 1, r);
    // random points, samples apart and back to back
    for (int i = 0; i < 600; i++) begin
      case ($urandom_range(0, 2))
        0: drive(1, $urandom_range(0, 2047), 0, 0);
        1: drive(0, 0, 1, $urandom_range(0, 1023));
        default: drive(1, $urandom_range(0, 1200), 1, $urandom_range(0, 1023));
      endcase
    end
    // back-to-back samples every cycle
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      lidar_valid = 1; lidar = 11'($urandom_range(0, 1200)); cur_l = int'(lidar);
      radar_valid = 1; radar = 10'($urandom_range(0, 1023)); cur_r = int'(radar);
      exp_cyc.push_back(cyc + 4);
      exp_val.push_back(ref_fls(cur_l, cur_r));
      exp_real.push_back(ref_fls_real(cur_l, cur_r));
    end
    @(negedge clk);
    lidar_valid = 0; radar_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_cyc.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs never came", exp_cyc.size());
    end
    $display("largest deviation from the real-valued model: %0.2f of 110", max_dev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
