// tb_apmu: self-checking test of the Adaptive Prognostic Malfunction Unit.
// A reference model keeps the last 16 |S1-S2| values, the window size and
// the threshold table.  The test runs a descending-landing scenario in
// which one sensor misreads for a while (as in the paper's simulated
// example), random pairs with random window sizes and threshold writes,
// and a burst of one pair per cycle.  After every pair it checks
// out_valid, phi_eff and alarm 4 cycles later.
module tb_apmu;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [10:0] s1 = '0;
  logic [9:0]  s2 = '0;
  logic win_we = 0, thr_we = 0;
  logic [4:0] win_n = '0, n_active;
  logic [3:0] thr_addr = '0;
  logic [14:0] thr_data = '0, phi_eff;
  logic out_valid, alarm;
  int checks = 0, failures = 0;
  int cyc = 0;

  int hist [16];
  int lut [16];
  int n_model = 16;
  int exp_cyc [$], exp_phi [$], exp_alarm [$];
  int alarms_raised = 0, alarms_cleared = 0;
  logic alarm_d = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  apmu #(.SLOTS(16), .MIN_SLOTS(4), .THR_PER_SLOT(20)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_phi();
    int s = 0;
    for (int i = 0; i < n_model; i++) s += hist[i];
    return s;
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (alarm && !alarm_d) alarms_raised++;
    if (!alarm && alarm_d) alarms_cleared++;
    alarm_d = alarm;
    if (out_valid) begin
      checks++;
      if (exp_cyc.size() == 0) begin
        failures++;
        $display("FAIL unexpected out_valid at %0d", cyc);
      end else begin
        int ec, ep, ea;
        ec = exp_cyc.pop_front(); ep = exp_phi.pop_front(); ea = exp_alarm.pop_front();
        if (ec != cyc || int'(phi_eff) != ep || int'(alarm) != ea) begin
          failures++;
          if (failures < 10) $display("FAIL cyc %0d (exp %0d) phi %0d/%0d alarm %0d/%0d", cyc, ec, phi_eff, ep, alarm, ea);
        end
      end
    end
  end

  // one pair, sampled at the next rising edge; the model moves the window
  task automatic pair_now(input int a, input int b);
    int d;
    s1 = 11'(a); s2 = 10'(b); in_valid = 1;
    d = (a > b) ? a - b : b - a;
    for (int i = 15; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = d;
    exp_cyc.push_back(cyc + 4);
    exp_phi.push_back(model_phi());
    exp_alarm.push_back(model_phi() > lut[n_model-1]);
  endtask

  task automatic pair(input int a, input int b);
    @(negedge clk);
    pair_now(a, b);
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
  endtask

  task automatic set_window(input int req);
    @(negedge clk);
    win_we = 1; win_n = 5'(req);
    @(negedge clk);
    win_we = 0;
    n_model = (req < 4) ? 4 : (req > 16) ? 16 : req;
    repeat (3) @(negedge clk);
    checks++;
    if (int'(n_active) != n_model || int'(phi_eff) != model_phi() || int'(alarm) != (model_phi() > lut[n_model-1])) begin
      failures++;
      $display("FAIL after window %0d: n=%0d phi=%0d alarm=%0d", req, n_active, phi_eff, alarm);
    end
  endtask

  task automatic set_thr(input int idx, input int val);
    @(negedge clk);
    thr_we = 1; thr_addr = 4'(idx); thr_data = 15'(val);
    @(negedge clk);
    thr_we = 0;
    lut[idx] = val;
    repeat (3) @(negedge clk);
    checks++;
    if (int'(alarm) != (model_phi() > lut[n_model-1])) begin
      failures++;
      $display("FAIL after threshold write: alarm=%0d", alarm);
    end
  endtask

  initial begin
    int base, noise1, noise2;
    for (int i = 0; i < 16; i++) begin hist[i] = 0; lut[i] = 20 * (i + 1); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // descending landing: both sensors agree, then lidar misreads, then agree
    set_window(8);
    for (int t = 0; t < 300; t++) begin
      base   = 1000 - 3 * t;
      noise1 = $urandom_range(0, 8);
      noise2 = $urandom_range(0, 8);
      if (t >= 120 && t < 160) pair(base / 3 + noise1, base + noise2);   // malfunction
      else                     pair(base + noise1, base + noise2);
    end
    checks++;
    if (alarms_raised == 0 || alarms_cleared == 0) begin
      failures++;
      $display("FAIL malfunction window not flagged: raised %0d cleared %0d", alarms_raised, alarms_cleared);
    end
    // threshold boundary: phi equal to the threshold is not a malfunction
    set_window(4);
    for (int i = 0; i < 4; i++) pair(500, 490);          // phi = 40
    set_thr(3, 40);
    checks++;
    if (alarm !== 1'b0) begin failures++; $display("FAIL alarm at phi == threshold"); end
    set_thr(3, 39);
    checks++;
    if (alarm !== 1'b1) begin failures++; $display("FAIL no alarm at phi > threshold"); end
    // random pairs, windows and thresholds
    for (int i = 0; i < 300; i++) begin
      case ($urandom_range(0, 9))
        0: set_window($urandom_range(0, 31));
        1: set_thr($urandom_range(0, 15), $urandom_range(0, 3000));
        default: pair($urandom_range(0, 2047), $urandom_range(0, 1023));
      endcase
    end
    // one pair per cycle
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      pair_now($urandom_range(0, 400), $urandom_range(0, 400));
    end
    @(negedge clk);
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (exp_cyc.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_cyc.size());
    end
    $display("alarm raised %0d times, cleared %0d times", alarms_raised, alarms_cleared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
