// dic: Differential Inclination Control unit of one corner.
//
// Outbound: every FLS result of the local core is packed with the latest
// filtered distances and the APMU decision into a dic_pkt_t (core id,
// alarm, command, lidar, radar, sequence bit) and offered to the HSDCI
// with a valid/ready handshake.  If the link is still busy when a newer
// result arrives, the waiting packet is replaced by the newer one
// (only the latest state is worth sending); such replacements are counted
// in pkts_replaced.
// Inbound: a packet from the spatially opposite corner updates the peer
// record.  Each cycle the unit compares its own filtered lidar distance
// with the peer's: incl_diff = own - peer, and incl_warn is raised when
// |incl_diff| > tolerance, i.e. the drone is not level above the landing
// spot.  If no packet has arrived for LINK_TIMEOUT cycles the peer is
// declared lost (peer_lost) and incl_warn is held low, so the corner keeps
// working on its own.
// Timing: incl_diff/incl_warn are registered, one cycle after their
// inputs change.  The paper gives the duties (gather, packetize, confirm
// the opposite distance is within a tolerance); packet layout, the choice
// of lidar as the compared distance and the time-out are this design's.
// rx_ready is tied high (the peer record can always be overwritten) and
// the core id bits of tx_pkt are the constant CORE_ID; both are kept as
// ports so the handshake and packet stay uniform across corners.  The
// assertion at the end samples rst_n synchronously in its disable
// condition, which lint reports as a reset used both ways; the flops
// themselves all use the asynchronous reset.
module dic #(
  parameter logic [1:0]  CORE_ID      = 2'd0,
  parameter int unsigned LINK_TIMEOUT = 100000
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // from the local core
  input  logic                         fls_valid,
  input  algas4_pkg::fls_out_t         fls_out,
  input  logic                         apmu_alarm,
  input  algas4_pkg::lidar_t           lidar_filt,
  input  algas4_pkg::radar_t           radar_filt,
  input  algas4_pkg::lidar_t           tolerance,
  // to the HSDCI transmitter
  output algas4_pkg::dic_pkt_t         tx_pkt,
  output logic                         tx_valid,
  input  logic                         tx_ready,
  // from the HSDCI receiver
  input  algas4_pkg::dic_pkt_t         rx_pkt,
  input  logic                         rx_valid,
  output logic                         rx_ready,
  // results
  output algas4_pkg::dic_pkt_t         peer,
  output logic                         peer_lost,
  output logic signed [algas4_pkg::LIDAR_W:0] incl_diff,
  output logic                         incl_warn,
  output logic [15:0]                  pkts_replaced
);
  import algas4_pkg::*;

  localparam int unsigned TW = $clog2(LINK_TIMEOUT + 1);

  logic          seq;
  logic [TW-1:0] silence;
  logic          peer_seen;
  logic signed [LIDAR_W:0] diff;
  lidar_t        diff_abs;

  assign rx_ready = 1'b1;   // the peer record is always free to update

  assign diff     = $signed({1'b0, lidar_filt}) - $signed({1'b0, peer.lidar});
  assign diff_abs = lidar_t'(diff[LIDAR_W] ? -diff : diff);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_pkt        <= '0;
      tx_valid      <= 1'b0;
      seq           <= 1'b0;
      peer          <= '0;
      peer_seen     <= 1'b0;
      silence       <= '0;
      incl_diff     <= '0;
      incl_warn     <= 1'b0;
      pkts_replaced <= '0;
    end else begin
      // outbound
      if (fls_valid) begin
        tx_pkt   <= '{core_id: CORE_ID, alarm: apmu_alarm, fls: fls_out,
                      lidar: lidar_filt, radar: radar_filt, seq: ~seq};
        seq      <= ~seq;
        tx_valid <= 1'b1;
        if (tx_valid && !tx_ready && pkts_replaced != '1) pkts_replaced <= pkts_replaced + 1'b1;
      end else if (tx_valid && tx_ready) begin
        tx_valid <= 1'b0;
      end
      // inbound
      if (rx_valid) begin
        peer      <= rx_pkt;
        peer_seen <= 1'b1;
        silence   <= '0;
      end else if (silence != TW'(LINK_TIMEOUT)) begin
        silence <= silence + 1'b1;
      end
      // differential inclination check
      incl_diff <= diff;
      incl_warn <= peer_seen && !peer_lost && (diff_abs > tolerance);
    end
  end

  assign peer_lost = (silence == TW'(LINK_TIMEOUT));

  // a packet offered to the link stays offered until it is taken
  property p_tx_hold;
    @(posedge clk) disable iff (!rst_n) tx_valid && !tx_ready |=> tx_valid;
  endproperty
  assert property (p_tx_hold);
endmodule
