// can_bit_processor: bit processor with the embedded IDS datapath extension.
//
// Holds the protocol engine (can_rx receive path with its Rx registers and
// frame checks, can_tx transmit path) and the IDS extension placed in its
// receive datapath:
//   header_detector -> ids_control (REG: ids_en; Counter: data_en)
//   Rx register bytes -> feature_collector FIFO -> AXI-Stream -> q_ids
// The IDS therefore starts as soon as the last data byte is decoded (data_en)
// and runs while the CRC, ACK and end-of-frame bits are still on the bus. Its
// verdict is held in ids_done/ids_attack until the next start of frame and is
// wired out to the top level, which appends it to the frame stored for the
// host.
//
// The bus output is the wired-AND of the three dominant sources: transmitted
// bits, the ACK bit and error flags (0 = dominant). Received frames are
// reported with rx_frame_done only when this node did not send them.
// err_passive (from the error counters in the register file) makes the
// receive path send its error flags recessive and the transmit path suspend
// for eight bit times after each frame it sends.
// The structure follows the paper's figure of the IDS integration; the
// widths, holding registers and status outputs are this design's choices.
module can_bit_processor
  import seccan_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned L1_SHIFT   = 8,
  parameter int unsigned L2_SHIFT   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        ids_on,
  input  ids_wr_t     ids_wr,
  input  logic        err_passive,  // error flags are sent recessive
  // bit timing
  input  logic        tx_point,
  input  logic        sample_point,
  input  logic        rx_bit,
  output logic        hard_sync_en,
  output logic        drive_dominant,
  output logic        can_tx,
  // transmit request
  input  logic        tx_req,
  input  can_frame_t  tx_frame,
  output logic        tx_active,
  output logic        tx_done,
  output logic        arb_lost,
  output logic        bus_off,
  output logic [8:0]  tec,
  // receive
  output logic        rx_frame_done,
  output can_frame_t  rx_frame,
  output logic        rx_error,
  output logic [2:0]  err_kind,      // {crc, stuff, form} of the last error
  output logic        bus_idle,
  // IDS
  output logic        ids_en,
  output logic        data_en,
  output logic        ids_output_ready,
  output logic        ids_done,
  output logic        ids_attack,
  output logic signed [ACC_W-1:0] ids_score
);

  logic             header_detector, byte_we, write_flag, dlc_valid, rtr, frame_done;
  logic [7:0]       byte_val;
  logic [DLC_W-1:0] dlc;
  logic             crc_err, stuff_err, form_err, ack_drive, err_drive, err_req;
  logic             tx_bit, attack;
  logic [3:0]       byte_count;
  logic             f_tvalid, f_tready, f_tlast;
  logic [7:0]       f_tdata;

  can_rx u_rx (
    .clk, .rst_n, .enable, .sample_point, .tx_point, .rx_bit, .tx_active, .err_req, .err_passive,
    .header_detector, .byte_we, .byte_val, .write_flag, .dlc_valid, .dlc, .rtr,
    .frame_done, .frame(rx_frame), .rx_error, .crc_err, .stuff_err, .form_err,
    .bus_idle, .hard_sync_en, .ack_drive, .err_drive);

  can_tx u_tx (
    .clk, .rst_n, .enable, .tx_point, .sample_point, .rx_bit, .bus_idle, .rx_error,
    .err_passive, .tx_req, .tx_frame, .tx_bit, .tx_active, .tx_done, .arb_lost, .err_req, .tec, .bus_off);

  assign err_kind       = {crc_err, stuff_err, form_err};
  assign can_tx         = tx_bit & ~ack_drive & ~err_drive;
  assign drive_dominant = ~can_tx;
  assign rx_frame_done  = frame_done & ~tx_active;

  ids_control u_ctl (
    .clk, .rst_n, .ids_on, .header_detector, .write_flag, .dlc_valid, .dlc, .rtr,
    .frame_done, .rx_error, .ids_en, .data_en, .byte_count);

  feature_collector #(.FIFO_DEPTH(FIFO_DEPTH)) u_fc (
    .clk, .rst_n, .ids_en, .byte_we, .byte_val, .data_en, .frame_done,
    .m_tvalid(f_tvalid), .m_tready(f_tready), .m_tdata(f_tdata), .m_tlast(f_tlast));

  q_ids #(.L1_SHIFT(L1_SHIFT), .L2_SHIFT(L2_SHIFT)) u_ids (
    .clk, .rst_n, .ids_wr,
    .s_tvalid(f_tvalid), .s_tready(f_tready), .s_tdata(f_tdata), .s_tlast(f_tlast),
    .ids_output_ready, .attack, .score(ids_score));

  // verdict of the current frame, cleared by the next start of frame
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ids_done   <= 1'b0;
      ids_attack <= 1'b0;
    end else if (header_detector) begin
      ids_done   <= 1'b0;
      ids_attack <= 1'b0;
    end else if (ids_output_ready && ids_en) begin
      ids_done   <= 1'b1;
      ids_attack <= attack;
    end
  end

endmodule
