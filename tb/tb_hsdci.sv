// tb_hsdci: self-checking test of the HSDCI serial link.
// Two link ends, A and B, on clocks of 10 ns and 10.04 ns, are wired lane
// to lane.  At every link speed, random packets flow both ways at once and
// each must arrive intact and in order.  Then B's consumer stops taking
// packets, so A must stall on flow control (fc_stalls grows, nothing is
// lost), and finally a bit flipped on the A-to-B lane must be caught as a
// parity error and the frame dropped.  Frame time is also checked: a
// packet takes 35 bit periods from acceptance to delivery, within a few
// cycles of synchroniser delay.
module tb_hsdci;
  logic clk_a = 0, clk_b = 0, rst_n = 0;
  logic [1:0] speed = 2'd0;
  logic [31:0] a_tx_pkt = '0, b_tx_pkt = '0, a_rx_pkt, b_rx_pkt;
  logic a_tx_valid = 0, b_tx_valid = 0, a_tx_ready, b_tx_ready;
  logic a_rx_valid, b_rx_valid, a_rx_ready = 1, b_rx_ready = 1;
  logic a_line, b_line, a_fc, b_fc, a_busy, b_busy;
  logic flip = 0;
  logic [15:0] a_err, b_err, a_stall, b_stall;
  int checks = 0, failures = 0;
  logic [31:0] to_b [$], to_a [$];
  int a_cyc = 0, b_cyc = 0, start_cyc = 0, frame_cycles = -1;

  always #5    clk_a = ~clk_a;
  always #5.02 clk_b = ~clk_b;
  always @(posedge clk_a) a_cyc++;
  always @(posedge clk_b) b_cyc++;

  hsdci u_a (.clk(clk_a), .rst_n, .speed, .tx_pkt(a_tx_pkt), .tx_valid(a_tx_valid), .tx_ready(a_tx_ready),
             .rx_pkt(a_rx_pkt), .rx_valid(a_rx_valid), .rx_ready(a_rx_ready),
             .line_tx(a_line), .line_rx(b_line), .fc_out(a_fc), .fc_in(b_fc),
             .rx_errors(a_err), .fc_stalls(a_stall), .tx_busy(a_busy));
  hsdci u_b (.clk(clk_b), .rst_n, .speed, .tx_pkt(b_tx_pkt), .tx_valid(b_tx_valid), .tx_ready(b_tx_ready),
             .rx_pkt(b_rx_pkt), .rx_valid(b_rx_valid), .rx_ready(b_rx_ready),
             .line_tx(b_line), .line_rx(a_line ^ flip), .fc_out(b_fc), .fc_in(a_fc),
             .rx_errors(b_err), .fc_stalls(b_stall), .tx_busy(b_busy));

  initial begin
    repeat (400000) @(posedge clk_a);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receivers: compare with what was sent
  always @(posedge clk_b) if (rst_n && b_rx_valid && b_rx_ready) begin
    checks++;
    if (frame_cycles < 0) frame_cycles = b_cyc - start_cyc;
    if (to_b.size() == 0 || b_rx_pkt != to_b[0]) begin
      failures++;
      $display("FAIL B received %h", b_rx_pkt);
    end
    if (to_b.size() != 0) void'(to_b.pop_front());
  end
  always @(posedge clk_a) if (rst_n && a_rx_valid && a_rx_ready) begin
    checks++;
    if (to_a.size() == 0 || a_rx_pkt != to_a[0]) begin
      failures++;
      $display("FAIL A received %h", a_rx_pkt);
    end
    if (to_a.size() != 0) void'(to_a.pop_front());
  end

  task automatic send_a(input logic [31:0] p);
    @(negedge clk_a);
    a_tx_pkt = p; a_tx_valid = 1;
    do @(posedge clk_a); while (!a_tx_ready);
    to_b.push_back(p);
    #1 a_tx_valid = 0;
  endtask
  task automatic send_b(input logic [31:0] p);
    @(negedge clk_b);
    b_tx_pkt = p; b_tx_valid = 1;
    do @(posedge clk_b); while (!b_tx_ready);
    to_a.push_back(p);
    #1 b_tx_valid = 0;
  endtask

  task automatic drain();
    int t = 0;
    while ((to_a.size() != 0 || to_b.size() != 0 || a_busy || b_busy) && t < 20000) begin
      @(posedge clk_a); t++;
    end
    repeat (20) @(posedge clk_a);
  endtask

  initial begin
    int div, lo, hi;
    logic [15:0] stalls0, err0;
    repeat (4) @(posedge clk_a);
    rst_n = 1;
    repeat (4) @(posedge clk_a);
    for (int sp = 0; sp < 4; sp++) begin
      speed = 2'(sp);
      // one packet timed on its own
      frame_cycles = -1;
      @(negedge clk_b); start_cyc = b_cyc;
      send_a($urandom);
      drain();
      div = 4 << sp;
      lo = 34 * div + div / 2; hi = 35 * div + 8;
      checks++;
      if (frame_cycles < lo || frame_cycles > hi) begin
        failures++;
        $display("FAIL speed %0d: frame took %0d cycles, expected %0d..%0d", sp, frame_cycles, lo, hi);
      end
      fork
        for (int i = 0; i < 12; i++) send_a($urandom);
        for (int i = 0; i < 12; i++) send_b($urandom);
      join
      drain();
    end
    // flow control: B stops consuming
    speed = 2'd0;
    stalls0 = a_stall;
    @(negedge clk_b); b_rx_ready = 0;
    send_a(32'hcafe_0001);
    send_a(32'hcafe_0002);
    repeat (2000) @(posedge clk_a);
    checks++;
    if (a_stall == stalls0 || to_b.size() != 2) begin
      failures++;
      $display("FAIL flow control: stalls %0d -> %0d, pending %0d", stalls0, a_stall, to_b.size());
    end
    @(negedge clk_b); b_rx_ready = 1;
    drain();
    checks++;
    if (to_b.size() != 0) begin failures++; $display("FAIL packets lost after stall"); end
    // a corrupted frame is dropped and counted
    err0 = b_err;
    @(negedge clk_a); a_tx_pkt = 32'h1234_5678; a_tx_valid = 1;
    do @(posedge clk_a); while (!a_tx_ready);
    #1 a_tx_valid = 0;
    repeat (4 * 10) @(posedge clk_a);          // into the data bits
    flip = 1;
    repeat (4) @(posedge clk_a);               // one bit period
    flip = 0;
    repeat (400) @(posedge clk_a);
    checks++;
    if (b_err != err0 + 1) begin failures++; $display("FAIL parity error not counted (%0d)", b_err); end
    checks++;
    if (a_err != 0) begin failures++; $display("FAIL spurious errors at A"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
