// tb_apmu_eww: the effective-window-width trade-off of the APMU on a
// simulated descending landing.
//
// Both sensors report a scaled distance falling from 150 to 0 over 400
// samples with a few units of noise.  Two faults are injected: a short
// spike (two samples where the lidar reads 45 units high) and a sustained
// discrepancy (80 samples where the lidar reads 40 units high, the
// stretch where a sensor has actually failed).  The run is repeated with
// window sizes of 4, 10 and 16 slots, each time with the reset threshold
// table (20 per active slot).
// Expected behaviour: the small window is the sensitive setting and flags
// the spike as well as the failure; the large window ignores the spike and
// flags only the sustained failure, a few samples later.  Every decision is
// also checked against a software window sum, and the alarm must be
// cleared again once the sensors agree.
module tb_apmu_eww;
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

  localparam int N_SAMPLES   = 400;
  localparam int SPIKE_AT    = 100;   // two samples
  localparam int FAIL_FROM   = 240;   // 80 samples
  localparam int FAIL_TO     = 320;

  int hist [16];
  int n_model;

  always #5 clk = ~clk;

  apmu dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_phi();
    int s = 0;
    for (int i = 0; i < n_model; i++) s += hist[i];
    return s;
  endfunction

  // apply one pair, wait for its decision and check it; returns the alarm
  task automatic pair(input int a, input int b, output bit al);
    @(negedge clk);
    s1 = 11'(a); s2 = 10'(b); in_valid = 1;
    for (int i = 15; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = (a > b) ? a - b : b - a;
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);   // decision 4 cycles after the pair
    checks++;
    if (!out_valid || int'(phi_eff) != model_phi() || int'(alarm) != int'(model_phi() > 20 * n_model)) begin
      failures++;
      $display("FAIL n=%0d: valid=%0d phi=%0d (exp %0d) alarm=%0d", n_model, out_valid, phi_eff,
               model_phi(), alarm);
    end
    al = alarm;
  endtask

  initial begin
    automatic int wins [3] = '{4, 10, 16};
    bit al;
    int spike_alarms, fail_alarms, quiet_alarms, first_fail_alarm;
    int latency [3];
    for (int i = 0; i < 16; i++) hist[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      n_model = wins[w];
      @(negedge clk);
      win_we = 1; win_n = 5'(n_model);
      @(negedge clk);
      win_we = 0;
      // flush the slots with agreeing readings (the window change itself is
      // checked with the leftovers of the previous pass still in the slots)
      for (int i = 0; i < 16; i++) pair(150, 150, al);
      spike_alarms = 0; fail_alarms = 0; quiet_alarms = 0; first_fail_alarm = -1;
      for (int t = 0; t < N_SAMPLES; t++) begin
        int d, l, r;
        d = 150 - (150 * t) / N_SAMPLES;
        r = d + $urandom_range(0, 3);
        l = d + $urandom_range(0, 3);
        if (t >= SPIKE_AT && t < SPIKE_AT + 2) l = d + 45;
        if (t >= FAIL_FROM && t < FAIL_TO)     l = d + 40;
        pair(l, r, al);
        if (t >= SPIKE_AT && t < SPIKE_AT + n_model + 2) spike_alarms += al;
        else if (t >= FAIL_FROM && t < FAIL_TO + n_model) begin
          fail_alarms += al;
          if (al && first_fail_alarm < 0) first_fail_alarm = t - FAIL_FROM;
        end
        else quiet_alarms += al;
      end
      latency[w] = first_fail_alarm;
      $display("eww=%0d: spike alarms %0d, failure alarms %0d (first after %0d samples), other alarms %0d",
               n_model, spike_alarms, fail_alarms, first_fail_alarm, quiet_alarms);
      checks++;
      if (fail_alarms == 0) begin failures++; $display("FAIL eww=%0d missed the sensor failure", n_model); end
      checks++;
      if (quiet_alarms != 0) begin failures++; $display("FAIL eww=%0d alarm while sensors agree", n_model); end
      checks++;
      if ((spike_alarms != 0) != (n_model == 4)) begin
        failures++;
        $display("FAIL eww=%0d spike alarms %0d", n_model, spike_alarms);
      end
      checks++;
      if (alarm !== 1'b0) begin failures++; $display("FAIL eww=%0d alarm not cleared", n_model); end
    end
    // a wider window needs more evidence before it reacts
    checks++;
    if (!(latency[0] <= latency[1] && latency[1] <= latency[2] && latency[0] < latency[2])) begin
      failures++;
      $display("FAIL detection latency not growing with the window: %0d %0d %0d",
               latency[0], latency[1], latency[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
