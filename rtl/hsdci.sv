// hsdci: High-Speed Differential Communications Interface of one corner.
//
// A full-duplex serial link to the spatially opposite corner: one data
// lane each way plus one flow-control line each way.  Each corner may run
// on its own clock; everything arriving from the peer passes a two-flop
// synchroniser.  As the receiver re-times only on the start bit, the two
// clocks must agree within about 0.5 % at the fastest link speed.
//
// Frame (LSB first, line idles high):
//   start(0) | PKT_W data bits | even parity | stop(1)
// followed by GAP_BITS idle bit times before the next start.
// Link speed: the bit period is 4 << speed bit times of clk (4, 8, 16 or 32
// cycles), latched at the start of each frame; both ends must use the same
// setting.  The receiver re-times on the start edge and samples each bit
// in its middle.
// Flow control: the receiver drives fc_out high while its one-packet
// buffer is empty (registered, and low in reset, so a corner that is held
// in reset or has failed is never sent to); the transmitter starts a frame only when the peer's
// fc_in (synchronised) is high, otherwise it stalls and counts the stall
// cycles in fc_stalls.
// Local side: tx_pkt/tx_valid/tx_ready and rx_pkt/rx_valid/rx_ready are
// valid/ready handshakes.  A frame with a parity or stop-bit error is
// dropped and counted in rx_errors.
// The paper states only that this unit links the cores and sets link
// speed and flow control; framing, parity and the handshakes are this
// design's choice.  The LVDS pad pair that makes the lane differential is
// a vendor I/O buffer and lies outside this module: line_tx/line_rx are
// the single-ended lane seen by the fabric.
module hsdci #(
  parameter int unsigned PKT_W    = 32,
  parameter int unsigned GAP_BITS = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       speed,
  // local transmit side
  input  logic [PKT_W-1:0] tx_pkt,
  input  logic             tx_valid,
  output logic             tx_ready,
  // local receive side
  output logic [PKT_W-1:0] rx_pkt,
  output logic             rx_valid,
  input  logic             rx_ready,
  // lanes to and from the peer
  output logic             line_tx,
  input  logic             line_rx,
  output logic             fc_out,
  input  logic             fc_in,
  // status
  output logic [15:0]      rx_errors,
  output logic [15:0]      fc_stalls,
  output logic             tx_busy
);
  localparam int unsigned FRAME_BITS = PKT_W + 3;       // start, data, parity, stop
  localparam int unsigned BCW = $clog2(FRAME_BITS + GAP_BITS + 1);
  localparam int unsigned DIVW = 6;

  // ---------------------------------------------------------------- TX
  typedef enum logic [1:0] {TX_IDLE, TX_WAIT, TX_SEND} tx_state_e;
  tx_state_e             tx_state;
  logic [FRAME_BITS-1:0] tx_shift;
  logic [BCW-1:0]        tx_bits;
  logic [DIVW-1:0]       tx_div, tx_cnt;
  logic [1:0]            fc_sync;

  assign tx_ready = (tx_state == TX_IDLE);
  assign tx_busy  = (tx_state != TX_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_state  <= TX_IDLE;
      tx_shift  <= '1;
      tx_bits   <= '0;
      tx_div    <= DIVW'(4);
      tx_cnt    <= '0;
      line_tx   <= 1'b1;
      fc_sync   <= '0;
      fc_stalls <= '0;
    end else begin
      fc_sync <= {fc_sync[0], fc_in};
      unique case (tx_state)
        TX_IDLE: begin
          line_tx <= 1'b1;
          if (tx_valid) begin
            tx_shift <= {1'b1, ^tx_pkt, tx_pkt, 1'b0};
            tx_state <= TX_WAIT;
          end
        end
        TX_WAIT: begin
          if (fc_sync[1]) begin
            tx_div   <= DIVW'(4) << speed;
            tx_cnt   <= (DIVW'(4) << speed) - 1'b1;
            tx_bits  <= BCW'(FRAME_BITS + GAP_BITS - 1);
            line_tx  <= tx_shift[0];
            tx_shift <= {1'b1, tx_shift[FRAME_BITS-1:1]};
            tx_state <= TX_SEND;
          end else if (fc_stalls != '1) begin
            fc_stalls <= fc_stalls + 1'b1;
          end
        end
        TX_SEND: begin
          if (tx_cnt != '0) begin
            tx_cnt <= tx_cnt - 1'b1;
          end else if (tx_bits == '0) begin
            tx_state <= TX_IDLE;
          end else begin
            tx_cnt   <= tx_div - 1'b1;
            tx_bits  <= tx_bits - 1'b1;
            line_tx  <= tx_shift[0];          // shifts in 1s: stop and gap bits
            tx_shift <= {1'b1, tx_shift[FRAME_BITS-1:1]};
          end
        end
        default: tx_state <= TX_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- RX
  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_BITS} rx_state_e;
  rx_state_e             rx_state;
  logic [2:0]            rx_sync;          // [1] synchronised, [2] previous
  logic [FRAME_BITS-2:0] rx_shift;         // data, parity, stop
  logic [BCW-1:0]        rx_bits;
  logic [DIVW-1:0]       rx_div, rx_cnt;
  logic                  frame_ok;
  logic                  rx_done;          // stop bit sampled last cycle

  // rx_shift after the stop bit: {stop, parity, data}
  assign frame_ok = rx_shift[FRAME_BITS-2] & ~(^rx_shift[FRAME_BITS-3:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_state  <= RX_IDLE;
      rx_sync   <= '1;
      rx_shift  <= '0;
      rx_bits   <= '0;
      rx_div    <= DIVW'(4);
      rx_cnt    <= '0;
      rx_pkt    <= '0;
      rx_valid  <= 1'b0;
      rx_errors <= '0;
      rx_done   <= 1'b0;
      fc_out    <= 1'b0;
    end else begin
      rx_sync <= {rx_sync[1:0], line_rx};
      rx_done <= 1'b0;
      fc_out  <= ~rx_valid;
      if (rx_valid && rx_ready) rx_valid <= 1'b0;
      unique case (rx_state)
        RX_IDLE: begin
          if (!rx_sync[1] && rx_sync[2]) begin          // falling edge: start bit
            rx_div   <= DIVW'(4) << speed;
            rx_cnt   <= (DIVW'(2) << speed) - DIVW'(2);     // to the middle of the start bit
            rx_state <= RX_START;
          end
        end
        RX_START: begin
          if (rx_cnt != '0) rx_cnt <= rx_cnt - 1'b1;
          else if (rx_sync[1]) rx_state <= RX_IDLE;     // glitch, not a start bit
          else begin
            rx_cnt   <= rx_div - 1'b1;
            rx_bits  <= BCW'(FRAME_BITS - 1);
            rx_state <= RX_BITS;
          end
        end
        RX_BITS: begin
          if (rx_cnt != '0) rx_cnt <= rx_cnt - 1'b1;
          else begin
            rx_shift <= {rx_sync[1], rx_shift[FRAME_BITS-2:1]};
            rx_bits  <= rx_bits - 1'b1;
            rx_cnt   <= rx_div - 1'b1;
            if (rx_bits == BCW'(1)) begin
              rx_state <= RX_IDLE;
              rx_done  <= 1'b1;
            end
          end
        end
        default: rx_state <= RX_IDLE;
      endcase
      // deliver the frame one cycle after its stop bit was sampled
      if (rx_done) begin
        if (frame_ok && !(rx_valid && !rx_ready)) begin
          rx_pkt   <= rx_shift[PKT_W-1:0];
          rx_valid <= 1'b1;
        end else if (rx_errors != '1) begin
          rx_errors <= rx_errors + 1'b1;
        end
      end
    end
  end
endmodule
