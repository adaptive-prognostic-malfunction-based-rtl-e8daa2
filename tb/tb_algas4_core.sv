// tb_algas4_core: self-checking test of one ALGAS4 processing core.
// Plays a descending landing (distance 1200 -> 0) with sensor noise and a
// stretch where the lidar misreads, sometimes updating only one sensor.
// Reference models of the two FIR filters, the fuzzy node and the APMU
// window predict every filtered value, landing command and alarm; the
// FLS and APMU results must appear 5 and 6 cycles after the sample.
// The window is switched from 16 to 6 slots half-way through.
module tb_algas4_core;
  import algas4_pkg::*;
  import algas4_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lidar_valid = 0, radar_valid = 0;
  lidar_t lidar = '0, lidar_filt;
  radar_t radar = '0, radar_filt;
  logic win_we = 0, thr_we = 0;
  logic [4:0] win_n = '0, apmu_window;
  logic [3:0] thr_addr = '0;
  phi_t thr_data = '0, apmu_phi;
  logic filt_valid, fls_valid, fls_active, apmu_valid, apmu_alarm;
  fls_out_t fls_out;
  int checks = 0, failures = 0;
  int cyc = 0;
  int fls_cyc = -1, apmu_cyc = -1;
  int n_alarm_rise = 0;
  longint h [32];
  longint hl [15], hr [15];
  int hist [16];
  int n_win = 16;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (fls_valid) fls_cyc = cyc;
    if (apmu_valid) apmu_cyc = cyc;
  end

  algas4_core dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fir_out(ref longint hh [15]);
    longint acc = 0;
    for (int i = 0; i < 15; i++) acc += h[i] * hh[i];
    return int'((acc + 8192) >>> 14);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  int fl = 0, fr = 0;
  bit seen_l = 0, seen_r = 0;

  task automatic sample(input bit vl, input int l, input bit vr, input int r);
    int c0, phi, d;
    @(negedge clk);
    lidar_valid = vl; lidar = 11'(l); radar_valid = vr; radar = 10'(r);
    c0 = cyc;
    if (vl) begin
      for (int i = 14; i > 0; i--) hl[i] = hl[i-1];
      hl[0] = l; fl = fir_out(hl); seen_l = 1;
    end
    if (vr) begin
      for (int i = 14; i > 0; i--) hr[i] = hr[i-1];
      hr[0] = r; fr = fir_out(hr); seen_r = 1;
    end
    d = (fl > fr) ? fl - fr : fr - fl;
    for (int i = 15; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = d;
    phi = 0;
    for (int i = 0; i < n_win; i++) phi += hist[i];
    @(negedge clk);
    lidar_valid = 0; radar_valid = 0;
    repeat (8) @(negedge clk);
    check(int'(lidar_filt) == fl && int'(radar_filt) == fr,
          $sformatf("filtered %0d/%0d expected %0d/%0d", lidar_filt, radar_filt, fl, fr));
    if (seen_l && seen_r) begin
      check(fls_cyc == c0 + 5, $sformatf("FLS latency %0d", fls_cyc - c0));
      check(int'(fls_out) == ref_fls(fl, fr), $sformatf("FLS %0d expected %0d (l=%0d r=%0d)", fls_out, ref_fls(fl, fr), fl, fr));
    end
    check(apmu_cyc == c0 + 6, $sformatf("APMU latency %0d", apmu_cyc - c0));
    check(int'(apmu_phi) == phi && apmu_alarm == (phi > 20 * n_win),
          $sformatf("APMU phi %0d alarm %0d expected %0d", apmu_phi, apmu_alarm, phi));
  endtask

  initial begin
    int range_now, nl, nr;
    logic prev_alarm;
    prev_alarm = 0;
    ref_taps(15, h);
    for (int i = 0; i < 15; i++) begin hl[i] = 0; hr[i] = 0; end
    for (int i = 0; i < 16; i++) hist[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      range_now = 1200 - 3 * t;
      nl = $urandom_range(0, 6); nr = $urandom_range(0, 6);
      if (t == 200) begin
        @(negedge clk); win_we = 1; win_n = 5'd6;
        @(negedge clk); win_we = 0; n_win = 6;
      end
      if (t >= 140 && t < 190)
        sample(1, range_now / 2 + nl, 1, (range_now + nr > 1023 ? 1023 : range_now + nr));    // lidar misreads
      else if (t % 7 == 3)
        sample(1, range_now + nl, 0, 0);
      else
        sample(1, range_now + nl, 1, (range_now + nr > 1023 ? 1023 : range_now + nr));
      if (apmu_alarm && !prev_alarm) n_alarm_rise++;
      prev_alarm = apmu_alarm;
    end
    check(n_alarm_rise > 0, "malfunction never flagged");
    check(apmu_window == 5'd6, "window switch");
    $display("alarm raised %0d times", n_alarm_rise);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
