// tb_algas4_top: end-to-end test of the four-corner ALGAS4 system at its
// default parameters.
// The four corners run on four slightly different clocks.  A landing is
// played as a series of steady sensor levels, 1100 distance units down to
// touch-down, each held for 32 strobed samples so that the filters and the
// APMU windows settle to values that can be predicted exactly.  At each
// level every corner is checked: landing command against the fuzzy
// reference, APMU sum and alarm, the packet received from the opposite
// corner, the tilt difference and its warning.  Along the way the test
// makes each mechanism happen and counts it: a tilt warning (front/back
// pair tilted), a sensor malfunction alarm (corner 1 lidar misreads), a
// window switch (corner 1 to 4 slots), a threshold rewrite (corner 3),
// all four link speeds, packets replaced while a link is busy, and finally
// the loss of corner 2, which corner 0 must detect after the default
// 100000-cycle time-out while its transmitter stalls on flow control.
module tb_algas4_top;
  import algas4_pkg::*;
  import algas4_ref_pkg::*;
  logic [3:0] clk = '0, rst_n = '0;
  lidar_t lidar_data [4];
  radar_t radar_data [4];
  logic [3:0] strobe = '0;
  logic [3:0] win_we = '0, thr_we = '0;
  logic [4:0] win_n [4];
  logic [3:0] thr_addr [4];
  phi_t thr_data [4];
  lidar_t tolerance [4];
  logic [1:0] link_speed = 2'd0;
  logic [3:0] fls_valid, apmu_alarm, peer_lost, incl_warn;
  fls_out_t fls_out [4];
  phi_t apmu_phi [4];
  logic [4:0] apmu_window [4];
  dic_pkt_t peer [4];
  logic signed [11:0] incl_diff [4];
  logic [15:0] rx_errors [4], fc_stalls [4], pkts_replaced [4];
  int checks = 0, failures = 0;

  // model state
  int n_win [4] = '{16, 16, 16, 16};
  int thr16 [4] = '{320, 320, 320, 320};
  // mechanism counters
  int ev_alarm = 0, ev_tilt = 0, ev_window = 0, ev_thr = 0, ev_speed = 0, ev_lost = 0, ev_stall = 0;
  int ev_replaced = 0, ev_fls = 0, ev_eh = 0, ev_low = 0;

  always #5    clk[0] = ~clk[0];
  always #5.02 clk[1] = ~clk[1];
  always #4.98 clk[2] = ~clk[2];
  always #5.01 clk[3] = ~clk[3];
  always @(posedge clk[0]) if (fls_valid[0]) ev_fls++;

  algas4_top dut (
    .clk, .rst_n, .lidar_data, .lidar_strobe(strobe), .radar_data, .radar_strobe(strobe),
    .win_we, .win_n, .thr_we, .thr_addr, .thr_data, .tolerance, .link_speed,
    .fls_valid, .fls_out, .apmu_alarm, .apmu_phi, .apmu_window, .peer, .peer_lost,
    .incl_diff, .incl_warn, .rx_errors, .fc_stalls, .pkts_replaced
  );

  initial begin
    repeat (400000) @(posedge clk[0]);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int thr_of(input int c);
    return (n_win[c] == 16) ? thr16[c] : 20 * n_win[c];
  endfunction

  // hold one level on all corners and check every corner afterwards
  task automatic level(input int l [4], input int r [4]);
    int d, o, tilt, ref_cmd;
    for (int c = 0; c < 4; c++) begin
      lidar_data[c] = 11'(l[c]);
      radar_data[c] = 10'(r[c]);
    end
    for (int i = 0; i < 32; i++) begin
      repeat (20) @(posedge clk[0]);
      strobe = '1;
      repeat (10) @(posedge clk[0]);
      strobe = '0;
    end
    repeat (40 * (4 << link_speed) + 400) @(posedge clk[0]);
    for (int c = 0; c < 4; c++) begin
      o = (c + 2) % 4;
      d = (l[c] > r[c]) ? l[c] - r[c] : r[c] - l[c];
      tilt = l[c] - l[o];
      ref_cmd = ref_fls(l[c], r[c]);
      check(int'(fls_out[c]) == ref_cmd, $sformatf("corner %0d command %0d expected %0d", c, fls_out[c], ref_cmd));
      check(int'(apmu_phi[c]) == n_win[c] * d && apmu_alarm[c] == (n_win[c] * d > thr_of(c)),
            $sformatf("corner %0d APMU phi %0d alarm %0b", c, apmu_phi[c], apmu_alarm[c]));
      check(int'(peer[c].core_id) == o && int'(peer[c].lidar) == l[o] && int'(peer[c].radar) == r[o] &&
            peer[c].fls == fls_out[o] && peer[c].alarm == apmu_alarm[o],
            $sformatf("corner %0d peer packet", c));
      check(int'(incl_diff[c]) == tilt && incl_warn[c] == ((tilt > 0 ? tilt : -tilt) > int'(tolerance[c])),
            $sformatf("corner %0d tilt %0d warn %0b", c, incl_diff[c], incl_warn[c]));
      if (apmu_alarm[c]) ev_alarm++;
      if (incl_warn[c]) ev_tilt++;
      if (ref_cmd >= 100) ev_eh++;
      if (ref_cmd <= 15) ev_low++;
    end
  endtask

  initial begin
    int h;
    logic [15:0] s0;
    for (int c = 0; c < 4; c++) begin
      lidar_data[c] = '0; radar_data[c] = '0; win_n[c] = 5'd16; thr_addr[c] = '0;
      thr_data[c] = '0; tolerance[c] = 11'd40;
    end
    repeat (5) @(posedge clk[0]);
    rst_n = '1;
    // descent, nose down by 60 units on the front/back pair
    for (int step = 0; step < 4; step++) begin
      h = 1100 - 250 * step;
      link_speed = 2'(step);
      ev_speed++;
      level('{h, h, h + 60, h}, '{(h > 1023 ? 1023 : h), (h > 1023 ? 1023 : h), (h + 60 > 1023 ? 1023 : h + 60), (h > 1023 ? 1023 : h)});
    end
    link_speed = 2'd0;
    // corner 1: lidar misreads, alarm expected
    level('{300, 300, 300, 300}, '{300, 250, 300, 300});
    // corner 1 switches to a 4-slot window: same misreading, sum 4 x 50 = 200 > 80
    @(negedge clk[1]); win_we[1] = 1; win_n[1] = 5'd4;
    @(negedge clk[1]); win_we[1] = 0; n_win[1] = 4;
    repeat (5) @(posedge clk[1]);
    check(apmu_window[1] == 5'd4, "window switch on corner 1");
    ev_window++;
    // corner 3: experts lower the 16-slot threshold to 100
    @(negedge clk[3]); thr_we[3] = 1; thr_addr[3] = 4'd15; thr_data[3] = 15'd100;
    @(negedge clk[3]); thr_we[3] = 0; thr16[3] = 100;
    ev_thr++;
    level('{200, 200, 200, 200}, '{200, 190, 200, 193});     // corner 3: 16 x 7 = 112 > 100
    check(apmu_alarm[3] && !apmu_alarm[0], "lowered threshold raises corner 3 alarm only");
    // final approach and touch-down
    level('{120, 118, 125, 121}, '{122, 120, 121, 119});
    level('{30, 28, 25, 31}, '{28, 30, 27, 29});
    level('{0, 0, 0, 0}, '{0, 0, 0, 0});
    for (int c = 0; c < 4; c++) begin
      check(rx_errors[c] == 0, $sformatf("corner %0d link errors", c));
      ev_replaced += pkts_replaced[c];
    end
    // corner 2 fails; corner 0 must notice and stall
    s0 = fc_stalls[0];
    rst_n[2] = 1'b0;
    for (int i = 0; i < 3400; i++) begin      // sensors keep sampling: 102000 cycles
      repeat (20) @(posedge clk[0]); strobe = '1;
      repeat (10) @(posedge clk[0]); strobe = '0;
    end
    if (peer_lost[0]) ev_lost++;
    if (fc_stalls[0] != s0) ev_stall++;
    check(peer_lost[0] && !incl_warn[0] && !peer_lost[1] && !peer_lost[3], "loss of corner 2 seen by corner 0 only");
    // every mechanism must have happened
    check(ev_fls > 0,      "FLS never produced a command");
    check(ev_eh > 0,       "extremely-near command never produced");
    check(ev_low > 0,      "far (low) command never produced");
    check(ev_alarm > 0,    "APMU alarm never raised");
    check(ev_tilt > 0,     "tilt warning never raised");
    check(ev_window > 0,   "window never switched");
    check(ev_thr > 0,      "threshold never rewritten");
    check(ev_speed == 4,   "not all link speeds used");
    check(ev_replaced > 0, "no packet replaced while a link was busy");
    check(ev_lost > 0,     "peer loss never detected");
    check(ev_stall > 0,    "flow control never stalled a transmitter");
    $display("events: fls=%0d eh=%0d low=%0d alarm=%0d tilt=%0d window=%0d thr=%0d speeds=%0d replaced=%0d lost=%0d stall=%0d",
             ev_fls, ev_eh, ev_low, ev_alarm, ev_tilt, ev_window, ev_thr, ev_speed, ev_replaced, ev_lost, ev_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
