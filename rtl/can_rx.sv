// can_rx: receive path of the bit processor (Rx registers and frame checks).
//
// Runs on the sample points given by the bit timing logic. From the start of
// frame to the end of the CRC sequence it removes stuff bits (a bit after five
// equal bits must be the complement, otherwise a stuff error) and runs the
// CRC-15 over the unstuffed bits. Fields of a base-format frame are decoded
// into the Rx registers (identifier, RTR, DLC, up to eight data bytes). After
// the CRC come the checks the paper lists: CRC comparison, CRC delimiter, ACK
// slot and delimiter, and the seven end-of-frame bits.
//
// Signals that feed the IDS extension, as the paper names them:
//   header_detector  one-clock pulse on the start-of-frame bit
//   byte_we/byte_val every byte as it lands in the Rx registers: the two
//                    identifier bytes ({5'b0,id[10:8]}, id[7:0]) on two
//                    consecutive clocks after the identifier, then each data
//                    byte after its eighth bit
//   write_flag       pulse with byte_we for data bytes only
//   dlc_valid        level, high from the end of the DLC field to frame end
//   frame_done       one-clock pulse after the last end-of-frame bit of a
//                    frame without error; frame holds the decoded frame
//   rx_error         one-clock pulse when an error is detected
//
// While receiving a frame correctly it drives the ACK slot dominant
// (ack_drive, changed at tx points) unless the node itself is transmitting.
// On an error it sends an error flag of six bits (err_drive): dominant while
// the node is error-active, left recessive (passive flag) when err_passive
// says an error counter has reached 128. It then waits for eleven recessive
// bits before looking for a new start of frame. A dominant bit in the last end-of-frame bit or the first two
// intermission bits is an overload condition: the receiver answers with an
// overload flag of six dominant bits (also when error-passive), again
// followed by the wait for eleven recessive bits; no error is counted. The
// eleven-bit wait stands for the eight-bit delimiter plus the intermission.
// err_req lets the transmitter start an error flag. Frames in the
// extended format (IDE=1) are not decoded: the receiver waits for bus idle.
// Everything here follows the CAN 2.0 specification; the paper gives the
// block's duties and the IDS signal names, not its insides.
module can_rx
  import seccan_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       sample_point,
  input  logic       tx_point,
  input  logic       rx_bit,
  input  logic       tx_active,     // this node transmits the current frame
  input  logic       err_req,       // transmitter detected a bit or ACK error
  input  logic       err_passive,   // node is error-passive: error flags stay recessive
  output logic       header_detector,
  output logic       byte_we,
  output logic [7:0] byte_val,
  output logic       write_flag,
  output logic       dlc_valid,
  output logic [DLC_W-1:0] dlc,
  output logic       rtr,
  output logic       frame_done,
  output can_frame_t frame,
  output logic       rx_error,
  output logic       crc_err,       // kind of the last error, for status
  output logic       stuff_err,
  output logic       form_err,
  output logic       bus_idle,      // waiting for a start of frame
  output logic       hard_sync_en,  // bus idle or waiting for it: hard sync allowed
  output logic       ack_drive,     // 1 = drive the bus dominant (ACK)
  output logic       err_drive      // 1 = drive the bus dominant (error flag)
);

  typedef enum logic [3:0] {
    S_WAIT_IDLE, S_IDLE, S_ID, S_RTR, S_IDE, S_R0, S_DLC, S_DATA, S_CRC,
    S_CRC_DEL, S_ACK, S_ACK_DEL, S_EOF, S_IFS, S_ERR_FLAG, S_OVL_FLAG
  } state_t;

  state_t      st;
  logic [5:0]  bitcnt;
  logic [3:0]  bytecnt;
  logic [2:0]  stuff_cnt;
  logic        last_bit;
  logic [14:0] crc_calc, crc_rx;
  logic [ID_W-1:0] id_sr;
  logic [7:0]  byte_sr;
  logic        id_lo_pend;
  logic [3:0]  nbytes;

  function automatic logic [14:0] crc_next(input logic [14:0] c, input logic b);
    logic fb;
    fb = b ^ c[14];
    return fb ? ({c[13:0], 1'b0} ^ CRC_POLY) : {c[13:0], 1'b0};
  endfunction

  logic destuff_region;
  assign destuff_region = (st inside {S_ID, S_RTR, S_IDE, S_R0, S_DLC, S_DATA, S_CRC}) ||
                          (st == S_CRC_DEL && stuff_cnt == 3'd5);
  logic is_stuff;
  assign is_stuff = destuff_region && stuff_cnt == 3'd5;

  assign bus_idle     = (st == S_IDLE);
  assign hard_sync_en = (st == S_IDLE) || (st == S_WAIT_IDLE);
  assign dlc_valid = (st inside {S_DATA, S_CRC, S_CRC_DEL, S_ACK, S_ACK_DEL, S_EOF});

  logic [7:0] byte_next;
  assign byte_next = {byte_sr[6:0], rx_bit};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_WAIT_IDLE;
      bitcnt <= '0; bytecnt <= '0; stuff_cnt <= '0; last_bit <= 1'b1;
      crc_calc <= '0; crc_rx <= '0; id_sr <= '0; byte_sr <= '0;
      id_lo_pend <= 1'b0; nbytes <= '0;
      header_detector <= 1'b0; byte_we <= 1'b0; byte_val <= '0; write_flag <= 1'b0;
      dlc <= '0; rtr <= 1'b0; frame_done <= 1'b0; frame <= '0; rx_error <= 1'b0;
      crc_err <= 1'b0; stuff_err <= 1'b0; form_err <= 1'b0;
      ack_drive <= 1'b0; err_drive <= 1'b0;
    end else begin
      header_detector <= 1'b0;
      byte_we         <= 1'b0;
      write_flag      <= 1'b0;
      frame_done      <= 1'b0;
      rx_error        <= 1'b0;

      // second identifier byte, one clock after the first
      if (id_lo_pend) begin
        id_lo_pend <= 1'b0;
        byte_we    <= 1'b1;
        byte_val   <= id_sr[7:0];
      end

      // bus drivers change only at the start of a bit
      if (tx_point) begin
        ack_drive <= (st == S_ACK) && !tx_active && (crc_calc == crc_rx);
        err_drive <= ((st == S_ERR_FLAG) && !err_passive) || (st == S_OVL_FLAG);
      end

      if (!enable) begin
        st <= S_WAIT_IDLE;
        bitcnt <= '0;
        ack_drive <= 1'b0;
        err_drive <= 1'b0;
      end else if (err_req && st != S_ERR_FLAG && st != S_WAIT_IDLE) begin
        st <= S_ERR_FLAG;
        bitcnt <= '0;
        rx_error <= 1'b1;
        crc_err <= 1'b0; stuff_err <= 1'b0; form_err <= 1'b0;
      end else if (sample_point) begin
        if (is_stuff) begin
          if (rx_bit == last_bit) begin
            st <= S_ERR_FLAG; bitcnt <= '0; rx_error <= 1'b1;
            stuff_err <= 1'b1; crc_err <= 1'b0; form_err <= 1'b0;
          end else begin
            last_bit  <= rx_bit;
            stuff_cnt <= 3'd1;
          end
        end else begin
          if (destuff_region) begin
            if (rx_bit == last_bit) stuff_cnt <= stuff_cnt + 3'd1;
            else begin stuff_cnt <= 3'd1; last_bit <= rx_bit; end
          end
          if (st inside {S_ID, S_RTR, S_IDE, S_R0, S_DLC, S_DATA})
            crc_calc <= crc_next(crc_calc, rx_bit);

          unique case (st)
            S_WAIT_IDLE: begin
              if (rx_bit) begin
                bitcnt <= bitcnt + 6'd1;
                if (bitcnt == 6'(IDLE_BITS - 1)) begin st <= S_IDLE; bitcnt <= '0; end
              end else bitcnt <= '0;
            end
            S_IDLE: if (!rx_bit) begin
              // start of frame
              st <= S_ID; bitcnt <= '0;
              header_detector <= 1'b1;
              crc_calc  <= crc_next(15'd0, 1'b0);
              stuff_cnt <= 3'd1; last_bit <= 1'b0;
              bytecnt <= '0; frame <= '0;
            end
            S_ID: begin
              id_sr  <= {id_sr[ID_W-2:0], rx_bit};
              bitcnt <= bitcnt + 6'd1;
              if (bitcnt == 6'(ID_W - 1)) begin
                st <= S_RTR;
                byte_we    <= 1'b1;
                byte_val   <= {5'b0, id_sr[9:7]};
                id_lo_pend <= 1'b1;
                frame.id   <= {id_sr[9:0], rx_bit};
              end
            end
            S_RTR: begin rtr <= rx_bit; frame.rtr <= rx_bit; st <= S_IDE; end
            S_IDE: begin bitcnt <= '0; st <= rx_bit ? S_WAIT_IDLE : S_R0; end
            S_R0:  begin st <= S_DLC; bitcnt <= '0; end
            S_DLC: begin
              dlc    <= {dlc[2:0], rx_bit};
              bitcnt <= bitcnt + 6'd1;
              if (bitcnt == 6'd3) begin
                logic [3:0] d;
                d = {dlc[2:0], rx_bit};
                frame.dlc <= d;
                dlc       <= d;
                nbytes    <= data_len(d, rtr);
                bitcnt    <= '0;
                st        <= (data_len(d, rtr) == 4'd0) ? S_CRC : S_DATA;
              end
            end
            S_DATA: begin
              byte_sr <= byte_next;
              bitcnt  <= bitcnt + 6'd1;
              if (bitcnt[2:0] == 3'd7) begin
                byte_we    <= 1'b1;
                write_flag <= 1'b1;
                byte_val   <= byte_next;
                frame.data[bytecnt[2:0]] <= byte_next;
                bytecnt    <= bytecnt + 4'd1;
                bitcnt     <= '0;
                if (bytecnt + 4'd1 == nbytes) st <= S_CRC;
              end
            end
            S_CRC: begin
              crc_rx <= {crc_rx[13:0], rx_bit};
              bitcnt <= bitcnt + 6'd1;
              if (bitcnt == 6'(CRC_W - 1)) begin st <= S_CRC_DEL; bitcnt <= '0; end
            end
            S_CRC_DEL: if (!rx_bit) begin
              st <= S_ERR_FLAG; bitcnt <= '0; rx_error <= 1'b1;
              form_err <= 1'b1; crc_err <= 1'b0; stuff_err <= 1'b0;
            end else st <= S_ACK;
            S_ACK: st <= S_ACK_DEL;
            S_ACK_DEL: begin
              bitcnt <= '0;
              if (!rx_bit || crc_calc != crc_rx) begin
                st <= S_ERR_FLAG; rx_error <= 1'b1;
                form_err <= !rx_bit; crc_err <= rx_bit; stuff_err <= 1'b0;
              end else st <= S_EOF;
            end
            S_EOF: begin
              bitcnt <= bitcnt + 6'd1;
              if (!rx_bit && bitcnt != 6'(EOF_BITS - 1)) begin
                st <= S_ERR_FLAG; bitcnt <= '0; rx_error <= 1'b1;
                form_err <= 1'b1; crc_err <= 1'b0; stuff_err <= 1'b0;
              end else if (bitcnt == 6'(EOF_BITS - 1)) begin
                // a dominant last EOF bit still completes the frame for a
                // receiver, but asks for an overload frame
                frame_done <= 1'b1;
                st <= rx_bit ? S_IFS : S_OVL_FLAG; bitcnt <= '0;
              end
            end
            S_IFS: begin
              // two intermission bits; dominant here is an overload
              // condition, a dominant third bit is a start of frame
              bitcnt <= bitcnt + 6'd1;
              if (!rx_bit) begin st <= S_OVL_FLAG; bitcnt <= '0; end
              else if (bitcnt == 6'd1) begin st <= S_IDLE; bitcnt <= '0; end
            end
            S_ERR_FLAG, S_OVL_FLAG: begin
              // six flag bits, then the delimiter and intermission are
              // covered by waiting for eleven recessive bits
              bitcnt <= bitcnt + 6'd1;
              if (bitcnt == 6'(ERR_FLAG_BITS - 1)) begin st <= S_WAIT_IDLE; bitcnt <= '0; end
            end
            default: st <= S_WAIT_IDLE;
          endcase
        end
      end
    end
  end

endmodule
