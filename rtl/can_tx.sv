// can_tx: transmit path of the bit processor.
//
// When tx_req is high and the receive path reports an idle bus, the frame in
// tx_frame is sent from the next tx point: start of frame, identifier, RTR,
// IDE=0, r0, DLC, data bytes, then the CRC-15 computed on the fly over the
// bits sent so far. A stuff bit (the complement) is inserted after five equal
// bits, up to the end of the CRC. The delimiters, ACK slot and seven
// end-of-frame bits are sent recessive.
//
// Every bit it sends is compared with the bus at the sample point:
//   - a dominant bus during a recessive identifier or RTR bit means another
//     node with a higher priority identifier is sending: the transmitter
//     withdraws at once (arb_lost) and retries when the bus is idle again;
//   - any other mismatch is a bit error, and a recessive ACK slot is an ACK
//     error: err_req asks the receive path for an error flag, the transmit
//     error counter (TEC) grows by 8 and the frame is retried;
//   - after the last end-of-frame bit the frame is done (tx_done), TEC drops
//     by one.
// When TEC reaches 256 the node stops transmitting (bus_off) until the
// controller is disabled. tx_active is high while this node owns the frame.
// The paper states only that the controller transmits the buffered frame
// "based on the configured arbitration priority"; the rest is the CAN 2.0
// specification. An error-passive node (err_passive, from the error counters)
// waits eight more idle bit times after each frame it sent or failed to send
// (suspend transmission) before it starts again; its passive error flags are
// produced by the receive path. The CAN exception that leaves TEC unchanged
// for an error-passive ACK error is not modelled.
module can_tx
  import seccan_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       tx_point,
  input  logic       sample_point,
  input  logic       rx_bit,
  input  logic       bus_idle,
  input  logic       rx_error,      // receive path signalled an error
  input  logic       err_passive,   // node is error-passive: suspend after sending
  input  logic       tx_req,
  input  can_frame_t tx_frame,
  output logic       tx_bit,        // 1 = recessive
  output logic       tx_active,
  output logic       tx_done,
  output logic       arb_lost,
  output logic       err_req,
  output logic [8:0] tec,
  output logic       bus_off
);

  typedef enum logic [2:0] {T_IDLE, T_SEND, T_CRC, T_TAIL} tstate_t;

  localparam int unsigned HDR_BITS = 19;                 // SOF..DLC
  localparam int unsigned SR_W     = HDR_BITS + 8 * MAX_BYTES;

  tstate_t         st;
  logic [SR_W-1:0] sr;
  logic [6:0]      nbits;      // bits of SOF..data for this frame
  logic [6:0]      cnt;        // bits sent in the current part
  logic [14:0]     crc;
  logic [3:0]      susp;       // idle bit times still to wait (error-passive)
  logic [2:0]      stuff_cnt;
  logic            last_bit;
  logic            cur_bit, cur_stuff, cur_arb, cur_ack;
  logic [3:0]      nbytes;

  function automatic logic [14:0] crc_next(input logic [14:0] c, input logic b);
    logic fb;
    fb = b ^ c[14];
    return fb ? ({c[13:0], 1'b0} ^ CRC_POLY) : {c[13:0], 1'b0};
  endfunction

  assign nbytes  = data_len(tx_frame.dlc, tx_frame.rtr);
  assign bus_off = tec[8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; sr <= '0; nbits <= '0; cnt <= '0; crc <= '0;
      stuff_cnt <= '0; last_bit <= 1'b1;
      cur_bit <= 1'b1; cur_stuff <= 1'b0; cur_arb <= 1'b0; cur_ack <= 1'b0;
      tx_bit <= 1'b1; tx_active <= 1'b0; tx_done <= 1'b0; arb_lost <= 1'b0;
      err_req <= 1'b0; tec <= '0; susp <= '0;
    end else begin
      tx_done  <= 1'b0;
      arb_lost <= 1'b0;
      err_req  <= 1'b0;
      if (!enable) begin
        st <= T_IDLE; tx_bit <= 1'b1; tx_active <= 1'b0; tec <= '0; susp <= '0;
      end else if (st != T_IDLE && rx_error && !err_req) begin
        // error seen by the receive path while sending: retry later
        st <= T_IDLE; tx_bit <= 1'b1; tx_active <= 1'b0;
        susp <= err_passive ? 4'd8 : 4'd0;
        tec <= (tec > 9'd247) ? 9'h100 : tec + 9'd8;
      end else begin
        // ---- drive the next bit at the start of each bit time
        if (tx_point) begin
          cur_stuff <= 1'b0;
          cur_arb   <= 1'b0;
          cur_ack   <= 1'b0;
          unique case (st)
            T_IDLE: if (susp != 4'd0) begin
              if (bus_idle) susp <= susp - 4'd1;   // suspend transmission
            end else if (tx_req && bus_idle && !bus_off) begin
              st        <= T_SEND;
              tx_active <= 1'b1;
              sr        <= {1'b0, tx_frame.id, tx_frame.rtr, 1'b0, 1'b0, tx_frame.dlc,
                            tx_frame.data[0], tx_frame.data[1], tx_frame.data[2], tx_frame.data[3],
                            tx_frame.data[4], tx_frame.data[5], tx_frame.data[6], tx_frame.data[7]};
              nbits     <= 7'(HDR_BITS) + {nbytes[3:0], 3'b000};
              cnt       <= 7'd1;
              crc       <= '0;   // the dominant SOF leaves the CRC at zero
              stuff_cnt <= 3'd1;
              last_bit  <= 1'b0;
              tx_bit    <= 1'b0;
              cur_bit   <= 1'b0;
            end
            T_SEND, T_CRC: begin
              if (stuff_cnt == 3'd5) begin
                tx_bit    <= ~last_bit;
                cur_bit   <= ~last_bit;
                cur_stuff <= 1'b1;
                last_bit  <= ~last_bit;
                stuff_cnt <= 3'd1;
              end else if (st == T_SEND && cnt == nbits) begin
                // first CRC bit
                st        <= T_CRC;
                cnt       <= 7'd1;
                tx_bit    <= crc[14];
                cur_bit   <= crc[14];
                crc       <= {crc[13:0], 1'b0};
                stuff_cnt <= (crc[14] == last_bit) ? stuff_cnt + 3'd1 : 3'd1;
                last_bit  <= crc[14];
              end else if (st == T_CRC && cnt == 7'd15) begin
                st      <= T_TAIL;          // CRC delimiter
                cnt     <= 7'd0;
                tx_bit  <= 1'b1;
                cur_bit <= 1'b1;
              end else begin
                logic b;
                b = (st == T_SEND) ? sr[SR_W-2] : crc[14];
                if (st == T_SEND) begin
                  sr  <= {sr[SR_W-2:0], 1'b0};
                  crc <= crc_next(crc, b);
                  cur_arb <= (cnt <= 7'd12);   // identifier and RTR
                end else begin
                  crc <= {crc[13:0], 1'b0};
                end
                cnt       <= cnt + 7'd1;
                tx_bit    <= b;
                cur_bit   <= b;
                stuff_cnt <= (b == last_bit) ? stuff_cnt + 3'd1 : 3'd1;
                last_bit  <= b;
              end
            end
            T_TAIL: begin
              // bit sent now, by cnt: 0 ACK slot, 1 ACK delimiter, 2..8 EOF;
              // cnt 9 is the first bit after the frame
              cnt     <= cnt + 7'd1;
              tx_bit  <= 1'b1;
              cur_bit <= 1'b1;
              cur_ack <= (cnt == 7'd0);
              if (cnt == 7'd9) begin
                st        <= T_IDLE;
                tx_active <= 1'b0;
                tx_done   <= 1'b1;
                susp      <= err_passive ? 4'd8 : 4'd0;
                if (tec != 9'd0) tec <= tec - 9'd1;
              end
            end
            default: st <= T_IDLE;
          endcase
        end
        // ---- check the bus at the sample point
        if (sample_point && tx_active) begin
          if (cur_ack) begin
            if (rx_bit) begin   // nobody acknowledged
              st <= T_IDLE; tx_bit <= 1'b1; tx_active <= 1'b0; err_req <= 1'b1;
              susp <= err_passive ? 4'd8 : 4'd0;
              tec <= (tec > 9'd247) ? 9'h100 : tec + 9'd8;
            end
          end else if (st != T_TAIL && rx_bit != cur_bit) begin
            st <= T_IDLE; tx_bit <= 1'b1; tx_active <= 1'b0;
            if (cur_arb && cur_bit && !rx_bit && !cur_stuff) begin
              arb_lost <= 1'b1;
            end else begin
              err_req <= 1'b1;
              susp    <= err_passive ? 4'd8 : 4'd0;
              tec <= (tec > 9'd247) ? 9'h100 : tec + 9'd8;
            end
          end
        end
      end
    end
  end

endmodule
