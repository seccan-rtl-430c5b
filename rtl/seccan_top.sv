// seccan_top: SecCAN, a CAN controller with an intrusion detection system
// embedded in its receive datapath.
//
//   can_rx pin -> can_bit_timing -> can_bit_processor -> config_registers -> AXI4-Lite (ECU)
//                                   (rx, tx, IDS extension)
//
// The bit timing logic turns the bus into sample points and tx points; the
// bit processor receives and transmits frames and, inside its receive path,
// feeds each frame's identifier and payload to the quantised MLP (Q-IDS)
// while the frame is still arriving. When a frame completes, the
// multiplexing logic here appends the IDS verdict (attack flag plus a valid
// bit telling that the IDS finished in time) to the frame written to the
// receive buffer, so the host reads frame and verdict together and runs no
// IDS software of its own.
//
// Interface: one clock (16 MHz in the paper, giving 1 Mbit/s with the reset
// bit timing), active-low asynchronous reset, the AXI4-Lite slave and
// interrupt of config_registers, and the logic-level CAN pins towards an
// external transceiver (1 = recessive).
// Timing: a received frame is written to the receive buffer the clock after
// the bit processor reports its last end-of-frame bit.
// The partition and the tagging of frames follow the paper; the register map
// and all widths not in the paper are this design's choices. The IDS
// handshake signals (ids_en, data_en, ids_output_ready) are kept as named
// nets here for observation; nothing in the top consumes them.
module seccan_top
  import seccan_pkg::*;
#(
  parameter int unsigned RX_DEPTH   = 4,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned L1_SHIFT   = 8,
  parameter int unsigned L2_SHIFT   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic        irq,
  input  logic        can_rx,
  output logic        can_tx
);

  logic        enable, ids_on;
  bit_timing_t bt_cfg;
  ids_wr_t     ids_wr;
  logic        err_passive;
  logic        tx_point, sample_point, rx_bit, hard_sync_en, drive_dominant;
  logic        tx_req, tx_active, tx_done, arb_lost, bus_off;
  can_frame_t  tx_frame, rx_frame;
  logic [8:0]  tec;
  logic        rx_frame_done, rx_error, bus_idle;
  logic [2:0]  err_kind;
  logic        ids_en, data_en, ids_output_ready, ids_done, ids_attack;
  logic signed [ACC_W-1:0] ids_score;

  // multiplexing logic: the frame going to the receive buffer carries the
  // IDS verdict
  logic      rx_store;
  rx_entry_t rx_entry;

  can_bit_timing u_btl (
    .clk, .rst_n, .enable, .cfg(bt_cfg),
    .hard_sync_en(hard_sync_en & ~drive_dominant), .no_resync(drive_dominant),
    .can_rx, .tx_point, .sample_point, .rx_bit);

  can_bit_processor #(.FIFO_DEPTH(FIFO_DEPTH), .L1_SHIFT(L1_SHIFT), .L2_SHIFT(L2_SHIFT)) u_bsp (
    .clk, .rst_n, .enable, .ids_on, .ids_wr, .err_passive,
    .tx_point, .sample_point, .rx_bit, .hard_sync_en, .drive_dominant, .can_tx,
    .tx_req, .tx_frame, .tx_active, .tx_done, .arb_lost, .bus_off, .tec,
    .rx_frame_done, .rx_frame, .rx_error, .err_kind, .bus_idle,
    .ids_en, .data_en, .ids_output_ready, .ids_done, .ids_attack, .ids_score);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_store <= 1'b0;
      rx_entry <= '0;
    end else begin
      rx_store <= rx_frame_done;
      if (rx_frame_done) begin
        rx_entry.frame     <= rx_frame;
        rx_entry.ids_valid <= ids_done;
        rx_entry.attack    <= ids_done & ids_attack;
      end
    end
  end

  config_registers #(.RX_DEPTH(RX_DEPTH)) u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready, .irq,
    .enable, .ids_on, .bt_cfg, .ids_wr, .err_passive,
    .tx_req, .tx_frame, .tx_active, .tx_done, .arb_lost, .bus_off, .tec,
    .rx_store, .rx_entry, .rx_error, .err_kind, .bus_idle, .ids_score);

endmodule
