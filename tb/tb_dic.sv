// tb_dic: self-checking test of the Differential Inclination Control unit.
// Checks packet contents and the valid/ready hold rule, replacement of a
// waiting packet by a newer result, the inclination difference and
// warning against the tolerance for random own/peer distances, and the
// peer-lost time-out (shortened to 200 cycles) and its recovery.
module tb_dic;
  import algas4_pkg::*;
  logic clk = 0, rst_n = 0;
  logic fls_valid = 0, apmu_alarm = 0;
  fls_out_t fls_out = '0;
  lidar_t lidar_filt = '0, tolerance = 11'd40;
  radar_t radar_filt = '0;
  dic_pkt_t tx_pkt, rx_pkt = '0, peer;
  logic tx_valid, tx_ready = 0, rx_valid = 0, rx_ready, peer_lost, incl_warn;
  logic signed [11:0] incl_diff;
  logic [15:0] pkts_replaced;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dic #(.CORE_ID(2'd1), .LINK_TIMEOUT(200)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
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

  task automatic result(input int f, input bit a, input int l, input int r);
    @(negedge clk);
    fls_valid = 1; fls_out = 7'(f); apmu_alarm = a; lidar_filt = 11'(l); radar_filt = 10'(r);
    @(negedge clk);
    fls_valid = 0;
  endtask

  task automatic peer_pkt(input int l);
    @(negedge clk);
    rx_valid = 1;
    rx_pkt = '{core_id: 2'd3, alarm: 1'b1, fls: 7'd55, lidar: 11'(l), radar: 10'd7, seq: 1'b0};
    @(negedge clk);
    rx_valid = 0;
  endtask

  initial begin
    int own, oth, d;
    logic s0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // outbound packet, link busy
    result(70, 1, 300, 290);
    check(tx_valid && tx_pkt.core_id == 2'd1 && tx_pkt.alarm && tx_pkt.fls == 7'd70 &&
          tx_pkt.lidar == 11'd300 && tx_pkt.radar == 10'd290, "packet contents");
    s0 = tx_pkt.seq;
    repeat (5) @(negedge clk);
    check(tx_valid, "packet held while link busy");
    result(40, 0, 600, 610);
    check(tx_valid && tx_pkt.fls == 7'd40 && tx_pkt.lidar == 11'd600 && tx_pkt.seq != s0 &&
          pkts_replaced == 16'd1, "waiting packet replaced by newer result");
    tx_ready = 1;
    @(negedge clk);
    check(!tx_valid, "packet released after handshake");
    // inclination check
    for (int i = 0; i < 200; i++) begin
      own = $urandom_range(0, 1500);
      oth = (i % 2) ? own + $urandom_range(0, 80) - 40 : $urandom_range(0, 1500);
      if (oth < 0) oth = 0;
      tolerance = 11'($urandom_range(0, 60));
      result(1, 0, own, 0);
      peer_pkt(oth);
      @(negedge clk);
      d = own - oth;
      check(int'(incl_diff) == d, $sformatf("incl_diff %0d expected %0d", incl_diff, d));
      check(incl_warn == ((d > 0 ? d : -d) > int'(tolerance)), $sformatf("incl_warn for diff %0d tol %0d", d, tolerance));
      check(peer.lidar == 11'(oth) && peer.core_id == 2'd3 && !peer_lost, "peer record");
    end
    // link silent: peer lost, no warning
    result(1, 0, 1000, 0);
    peer_pkt(100);
    repeat (3) @(negedge clk);
    check(incl_warn, "warning before time-out");
    repeat (198) @(negedge clk);
    check(peer_lost && !incl_warn, "peer lost after time-out");
    peer_pkt(990);
    @(negedge clk);
    check(!peer_lost, "peer recovered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
