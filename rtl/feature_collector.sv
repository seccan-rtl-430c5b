// feature_collector: feature collection logic of the IDS extension.
//
// Bytes arriving from the Rx registers (two identifier bytes, then the data
// bytes) are pushed into a FIFO while ids_en is high; the FIFO is emptied
// whenever ids_en is low, so each frame starts clean. On data_en the module
// streams the 20-byte feature vector to the Q-IDS over an AXI4-Stream master
// (8-bit tdata, one feature per beat, tlast on the last):
//   beats 0..9   current message: ID high, ID low, data 0..7, where the bytes
//                the frame does not carry are sent as zero (zero padding)
//   beats 10..19 previous message, in the same layout
// The current message is kept and becomes the previous message when
// frame_done confirms the frame; a frame that ends in an error is dropped.
//
// The paper gives the FIFO, the zero padding to eight bytes, the
// current-plus-previous feature and the AXI-Stream link; the beat order,
// the 2-byte identifier layout and the FIFO depth are this design's choices.
module feature_collector
  import seccan_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ids_en,
  input  logic       byte_we,
  input  logic [7:0] byte_val,
  input  logic       data_en,
  input  logic       frame_done,
  output logic       m_tvalid,
  input  logic       m_tready,
  output logic [7:0] m_tdata,
  output logic       m_tlast
);

  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic [7:0]  fifo [FIFO_DEPTH];
  logic [PW:0] wr_ptr, rd_ptr;
  logic        fifo_empty, fifo_full;
  assign fifo_empty = (wr_ptr == rd_ptr);
  assign fifo_full  = (wr_ptr[PW-1:0] == rd_ptr[PW-1:0]) && (wr_ptr[PW] != rd_ptr[PW]);

  logic [MSG_FEAT_BYTES-1:0][7:0] cur, prev;
  logic        sending;
  logic [4:0]  beat;
  logic        pop;
  logic        cur_valid;   // cur holds this frame's bytes

  // value of the current beat
  always_comb begin
    if (beat < 5'(MSG_FEAT_BYTES)) m_tdata = fifo_empty ? 8'h00 : fifo[rd_ptr[PW-1:0]];
    else                           m_tdata = prev[beat - 5'(MSG_FEAT_BYTES)];
  end
  assign m_tvalid = sending;
  assign m_tlast  = sending && (beat == 5'(N_FEAT - 1));
  assign pop      = sending && m_tready && (beat < 5'(MSG_FEAT_BYTES)) && !fifo_empty;

  always_ff @(posedge clk) begin
    if (ids_en && byte_we && !fifo_full) fifo[wr_ptr[PW-1:0]] <= byte_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      cur     <= '0;
      prev    <= '0;
      sending <= 1'b0;
      beat    <= '0;
      cur_valid <= 1'b0;
    end else begin
      if (!ids_en && !sending) begin
        wr_ptr <= '0;
        rd_ptr <= '0;
      end else begin
        if (ids_en && byte_we && !fifo_full) wr_ptr <= wr_ptr + 1'b1;
        if (pop) rd_ptr <= rd_ptr + 1'b1;
      end
      if (data_en && !sending) begin
        sending <= 1'b1;
        beat    <= '0;
      end else if (sending && m_tready) begin
        if (beat < 5'(MSG_FEAT_BYTES)) cur[beat] <= m_tdata;
        beat <= beat + 5'd1;
        if (m_tlast) begin
          sending   <= 1'b0;
          cur_valid <= 1'b1;
        end
      end
      if (frame_done || (!ids_en && !sending)) cur_valid <= 1'b0;
      if (frame_done && cur_valid) prev <= cur;
    end
  end

endmodule
