// can_bit_timing: CAN bit timing logic.
//
// Divides the clock into time quanta (BRP+1 clocks each) and every bit into a
// one-quantum synchronisation segment, TSEG1+1 quanta before the sample point
// and TSEG2+1 quanta after it. The bus input is synchronised with two flops.
// A recessive-to-dominant edge restarts the bit (hard synchronisation) while
// hard_sync_en is high, which the bit processor raises while the bus is idle.
// Inside a frame such an edge resynchronises the bit: an edge inside TSEG1
// lengthens it, an edge inside TSEG2 shortens the bit, by at most SJW+1
// quanta, once per bit. Edges the node causes itself, while it drives the bus
// dominant (no_resync), are not used for resynchronisation: the loop delay
// through the transceiver and the input synchroniser would otherwise stretch
// every bit it sends.
//
// Outputs, all one-clock pulses or registered levels:
//   tx_point     start of a bit (first clock of the sync segment); the bit
//                processor changes its transmit level here
//   sample_point end of TSEG1; rx_bit holds the bus level sampled here
//
// The paper names the block and lists its duties (sampling windows, clock
// prescaler); the segment layout and synchronisation rules are those of the
// CAN 2.0 specification, and the register encoding is this design's own.
// With the default 16 MHz clock, BRP=0, TSEG1=12, TSEG2=1 one bit is 16
// quanta long, which gives the paper's 1 Mbit/s.
module can_bit_timing
  import seccan_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  bit_timing_t cfg,
  input  logic        hard_sync_en,
  input  logic        no_resync,    // this node drives the bus dominant
  input  logic        can_rx,       // raw bus level, 1 = recessive
  output logic        tx_point,
  output logic        sample_point,
  output logic        rx_bit
);

  logic       rx_meta, rx_s, rx_prev;
  logic [7:0] tq_cnt;
  logic       tq;
  logic [5:0] pos;          // quantum index inside the bit, 0 = sync segment
  logic [2:0] ext;          // quanta added to TSEG1 by resynchronisation
  logic       resynced;     // one resynchronisation per bit
  logic       edge_pend;    // falling edge seen during the current quantum

  logic [5:0] t1, t2, sjw1, bit_end;
  assign t1      = 6'(cfg.tseg1) + 6'd1;
  assign t2      = 6'(cfg.tseg2) + 6'd1;
  assign sjw1    = 6'(cfg.sjw) + 6'd1;
  assign bit_end = t1 + 6'(ext) + t2;
  assign tq      = (tq_cnt == cfg.brp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_meta <= 1'b1;
      rx_s    <= 1'b1;
      rx_prev <= 1'b1;
    end else begin
      rx_meta <= can_rx;
      rx_s    <= rx_meta;
      rx_prev <= rx_s;
    end
  end

  // Edge that counts for synchronisation: bus falls while the last sampled
  // bit was recessive.
  logic fall;
  assign fall = rx_prev & ~rx_s & rx_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tq_cnt       <= '0;
      pos          <= '0;
      ext          <= '0;
      resynced     <= 1'b0;
      edge_pend    <= 1'b0;
      tx_point     <= 1'b0;
      sample_point <= 1'b0;
      rx_bit       <= 1'b1;
    end else begin
      tx_point     <= 1'b0;
      sample_point <= 1'b0;
      if (!enable) begin
        tq_cnt    <= '0;
        pos       <= '0;
        ext       <= '0;
        resynced  <= 1'b0;
        edge_pend <= 1'b0;
        rx_bit    <= 1'b1;
      end else begin
        tq_cnt <= tq ? '0 : tq_cnt + 8'd1;
        if (fall) edge_pend <= 1'b1;
        if (tq) begin
          edge_pend <= 1'b0;
          if ((edge_pend || fall) && hard_sync_en && pos != 6'd0) begin
            // hard synchronisation: this quantum was the sync segment
            pos      <= 6'd1;
            ext      <= '0;
            resynced <= 1'b0;
          end else if ((edge_pend || fall) && !hard_sync_en && !resynced && !no_resync &&
                       pos != 6'd0 && pos <= t1 + 6'(ext)) begin
            // late edge: lengthen TSEG1 by the phase error, at most SJW
            logic [5:0] e, ext_n;
            e        = (pos < sjw1) ? pos : sjw1;
            ext_n    = 6'(ext) + e;
            ext      <= 3'(ext_n);
            resynced <= 1'b1;
            pos      <= pos + 6'd1;
          end else if ((edge_pend || fall) && !hard_sync_en && !resynced && !no_resync &&
                       pos > t1 + 6'(ext) && (bit_end - pos) < sjw1) begin
            // early edge close to the bit end: next bit starts now
            pos      <= 6'd1;
            ext      <= '0;
            resynced <= 1'b1;
          end else if (pos == bit_end) begin
            pos      <= '0;
            ext      <= '0;
            resynced <= 1'b0;
            tx_point <= 1'b1;
          end else begin
            pos <= pos + 6'd1;
            if (pos == t1 + 6'(ext)) begin
              sample_point <= 1'b1;
              rx_bit       <= rx_s;
            end
          end
        end
      end
    end
  end

endmodule
