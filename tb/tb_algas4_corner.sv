// tb_algas4_corner: self-checking test of one corner and its link.
// Two corners, A (front, id 0) and B (back, id 2), on slightly different
// clocks, are wired lane to lane as a differential pair.  For a series of
// steady sensor levels each sensor strobes 32 samples through its SIU, so
// the FIR outputs settle to the input level exactly (unity DC gain) and
// the APMU window holds only settled values.  Then
// each corner's landing command must match the fuzzy reference, its APMU
// sum must be 16 x |lidar - radar| with the alarm above 320, and its DIC
// must hold the other corner's packet and flag a tilt larger than the
// tolerance.  Finally B is held in reset: A must declare the peer lost
// (time-out shortened to 3000 cycles) and its transmitter must stall on
// flow control.
module tb_algas4_corner;
  import algas4_pkg::*;
  import algas4_ref_pkg::*;
  logic clk_a = 0, clk_b = 0, rst_a = 0, rst_b = 0;
  lidar_t la = '0, lb = '0;
  radar_t ra = '0, rb = '0;
  logic stb = 0;
  logic [1:0] speed = 2'd0;
  lidar_t tol = 11'd50;
  logic a_tx, b_tx, a_fc, b_fc;
  logic a_fv, b_fv, a_al, b_al, a_lost, b_lost, a_warn, b_warn;
  fls_out_t a_fls, b_fls;
  phi_t a_phi, b_phi;
  logic [4:0] a_win, b_win;
  dic_pkt_t a_peer, b_peer;
  logic signed [11:0] a_diff, b_diff;
  logic [15:0] a_err, b_err, a_stall, b_stall, a_rep, b_rep;
  int checks = 0, failures = 0;

  always #5    clk_a = ~clk_a;
  always #5.02 clk_b = ~clk_b;

  algas4_corner #(.CORE_ID(2'd0), .LINK_TIMEOUT(3000)) u_a (
    .clk(clk_a), .rst_n(rst_a), .lidar_data(la), .lidar_strobe(stb), .radar_data(ra), .radar_strobe(stb),
    .win_we(1'b0), .win_n(5'd16), .thr_we(1'b0), .thr_addr(4'd0), .thr_data(15'd0),
    .tolerance(tol), .link_speed(speed),
    .line_tx(a_tx), .line_rx(b_tx), .fc_out(a_fc), .fc_in(b_fc),
    .fls_valid(a_fv), .fls_out(a_fls), .apmu_alarm(a_al), .apmu_phi(a_phi), .apmu_window(a_win),
    .peer(a_peer), .peer_lost(a_lost), .incl_diff(a_diff), .incl_warn(a_warn),
    .rx_errors(a_err), .fc_stalls(a_stall), .pkts_replaced(a_rep));
  algas4_corner #(.CORE_ID(2'd2), .LINK_TIMEOUT(3000)) u_b (
    .clk(clk_b), .rst_n(rst_b), .lidar_data(lb), .lidar_strobe(stb), .radar_data(rb), .radar_strobe(stb),
    .win_we(1'b0), .win_n(5'd16), .thr_we(1'b0), .thr_addr(4'd0), .thr_data(15'd0),
    .tolerance(tol), .link_speed(speed),
    .line_tx(b_tx), .line_rx(a_tx), .fc_out(b_fc), .fc_in(a_fc),
    .fls_valid(b_fv), .fls_out(b_fls), .apmu_alarm(b_al), .apmu_phi(b_phi), .apmu_window(b_win),
    .peer(b_peer), .peer_lost(b_lost), .incl_diff(b_diff), .incl_warn(b_warn),
    .rx_errors(b_err), .fc_stalls(b_stall), .pkts_replaced(b_rep));

  initial begin
    repeat (400000) @(posedge clk_a);
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

  task automatic level(input int pla, input int pra, input int plb, input int prb, input int sp);
    int d_a, d_b, tilt;
    speed = 2'(sp);
    la = 11'(pla); ra = 10'(pra); lb = 11'(plb); rb = 10'(prb);
    for (int i = 0; i < 32; i++) begin
      repeat (20) @(posedge clk_a);
      stb = 1;
      repeat (10) @(posedge clk_a);
      stb = 0;
    end
    repeat (40 * (4 << sp) + 400) @(posedge clk_a);
    d_a = (pla > pra) ? pla - pra : pra - pla;
    d_b = (plb > prb) ? plb - prb : prb - plb;
    tilt = pla - plb;
    check(int'(a_fls) == ref_fls(pla, pra) && int'(b_fls) == ref_fls(plb, prb),
          $sformatf("FLS A %0d/%0d B %0d/%0d", a_fls, ref_fls(pla, pra), b_fls, ref_fls(plb, prb)));
    check(int'(a_phi) == 16 * d_a && a_al == (16 * d_a > 320) &&
          int'(b_phi) == 16 * d_b && b_al == (16 * d_b > 320),
          $sformatf("APMU A %0d,%0b B %0d,%0b", a_phi, a_al, b_phi, b_al));
    check(a_peer.core_id == 2'd2 && int'(a_peer.lidar) == plb && int'(a_peer.radar) == prb &&
          a_peer.fls == b_fls && a_peer.alarm == b_al, "A's copy of B's packet");
    check(b_peer.core_id == 2'd0 && int'(b_peer.lidar) == pla && b_peer.fls == a_fls, "B's copy of A's packet");
    check(int'(a_diff) == tilt && int'(b_diff) == -tilt, $sformatf("tilt %0d/%0d expected %0d", a_diff, b_diff, tilt));
    check(a_warn == ((tilt > 0 ? tilt : -tilt) > 50) && b_warn == a_warn, "tilt warning");
  endtask

  initial begin
    logic [15:0] s0;
    repeat (4) @(posedge clk_a);
    rst_a = 1; rst_b = 1;
    level(900, 900, 900, 900, 0);    // level, far
    level(600, 610, 520, 515, 1);    // tilted by 80
    level(300, 200, 310, 305, 2);    // A's sensors disagree
    level(60, 40, 70, 60, 3);        // near ground
    level(30, 30, 20, 25, 0);        // touching down
    check(a_err == 0 && b_err == 0, "link errors");
    check(a_rep != 0, "no packet was ever replaced while the link was busy");
    $display("packets replaced: A %0d B %0d", a_rep, b_rep);
    // B fails
    s0 = a_stall;
    rst_b = 0;
    for (int i = 0; i < 8; i++) begin
      repeat (20) @(posedge clk_a); stb = 1;
      repeat (10) @(posedge clk_a); stb = 0;
    end
    repeat (3200) @(posedge clk_a);
    check(a_lost && !a_warn, "peer loss not detected");
    check(a_stall != s0, "no flow-control stall while the peer is down");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
