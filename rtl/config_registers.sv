// config_registers: AXI4-Lite register file and frame buffers of SecCAN.
//
// The host (ECU) reaches the controller through a 32-bit AXI4-Lite slave.
// One write and one read are handled at a time; a write completes when
// address and data have both arrived. Registers (byte offsets):
//   0x00 CTRL       RW [0] enable (0 = reset mode), [1] IDS on;
//                   write-only actions: [8] send the TX buffer, [9] release
//                   the oldest received frame, [10] cancel a pending send
//   0x04 STATUS     RO [0] frame available, [1] send pending, [2] sending,
//                   [3] bus off, [4] receive overrun, [5] bus idle,
//                   [6] error passive (TEC or REC at 128 or more),
//                   [10:8] last error {crc, stuff, form}, [15:12] frames held
//   0x08 ERRCNT     RO [8:0] transmit error count, [23:16] receive error count
//   0x0C INT_EN     RW [4:0] interrupt enables
//   0x10 INT_STATUS R/W1C [0] frame received, [1] frame sent, [2] attack
//                   flagged, [3] bus error, [4] arbitration lost
//   0x14 BTR        RW [7:0] BRP, [11:8] TSEG1, [14:12] TSEG2, [17:16] SJW
//                   (each value-1; reset value gives 16 quanta per bit)
//   0x18 ACC_CODE   RW [10:0]  0x1C ACC_MASK RW [10:0] (1 = don't care)
//   0x20 TX_ID      RW [10:0] identifier, [16] RTR
//   0x24 TX_DLC     RW [3:0]
//   0x28 TX_DATA0   RW bytes 0..3 (byte 0 in [7:0]); 0x2C TX_DATA1 bytes 4..7
//   0x30 RX_ID      RO [10:0] identifier, [16] RTR, [24] IDS valid, [25] attack
//   0x34 RX_DLC     RO; 0x38 RX_DATA0, 0x3C RX_DATA1 RO, as for TX
//   0x40 IDS_ADDR   RW [1:0] layer, [14:8] row, [22:16] column
//   0x44 IDS_WDATA  WO eight 4-bit weights for neurons col*8..col*8+7 of row
//   0x48 IDS_BDATA  WO [15:0] bias of neuron col
//   0x4C IDS_SCORE  RO raw output-neuron sum of the last inference
// Received frames pass the acceptance filter (identifier bits not masked must
// equal ACC_CODE) and are queued, with their IDS verdict, in a receive buffer
// of RX_DEPTH frames; RX_* show the oldest. irq is high while an enabled
// interrupt status bit is set.
//
// Responses are always OKAY, so bresp and rresp are constant; all accesses
// are full 32-bit words, so wstrb and the two low address bits are ignored. The handshake
// assertions at the end use rst_n only to disable themselves; the registers
// themselves reset asynchronously like the rest of the design.
//
// The paper lists these duties (AXI interface, protocol and timing
// configuration, interrupt configuration, message filtering, transmit and
// receive buffers, error-tracking and status registers); the register map,
// the filter form and the buffer depth are this design's own.
module config_registers
  import seccan_pkg::*;
#(
  parameter int unsigned RX_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  // configuration outputs
  output logic        enable,
  output logic        ids_on,
  output bit_timing_t bt_cfg,
  output ids_wr_t     ids_wr,
  output logic        err_passive,  // an error counter has reached 128
  // transmit buffer
  output logic        tx_req,
  output can_frame_t  tx_frame,
  input  logic        tx_active,
  input  logic        tx_done,
  input  logic        arb_lost,
  input  logic        bus_off,
  input  logic [8:0]  tec,
  // receive side
  input  logic        rx_store,     // frame complete, entry below is valid
  input  rx_entry_t   rx_entry,
  input  logic        rx_error,
  input  logic [2:0]  err_kind,
  input  logic        bus_idle,
  input  logic signed [ACC_W-1:0] ids_score
);

  localparam int unsigned PW = $clog2(RX_DEPTH);

  logic [4:0]  int_en, int_st;
  logic [10:0] acc_code, acc_mask;
  logic [7:0]  rec;
  logic        overrun;
  logic [22:0] ids_addr;

  // CAN fault confinement: error-passive from 128 on either counter
  assign err_passive = (tec >= 9'd128) || (rec >= 8'd128);

  // ---------------- receive buffer
  rx_entry_t   rxq [RX_DEPTH];
  logic [PW:0] rq_wr, rq_rd, rq_cnt;
  logic        rq_full, rq_empty, accept, pop;
  rx_entry_t   head;

  assign rq_cnt   = rq_wr - rq_rd;
  assign rq_empty = (rq_cnt == '0);
  assign rq_full  = (32'(rq_cnt) == RX_DEPTH);
  assign accept   = rx_store && (((rx_entry.frame.id ^ acc_code) & ~acc_mask) == '0);
  assign head     = rxq[rq_rd[PW-1:0]];

  always_ff @(posedge clk) begin
    if (accept && !rq_full) rxq[rq_wr[PW-1:0]] <= rx_entry;
  end

  // ---------------- AXI write channel
  logic        wr_fire;
  logic [7:0]  wa;
  logic [31:0] wd;
  assign wr_fire       = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_fire;
  assign s_axi_wready  = wr_fire;
  assign s_axi_bresp   = 2'b00;
  assign wa            = {s_axi_awaddr[7:2], 2'b00};
  assign wd            = s_axi_wdata;
  assign pop           = wr_fire && wa == 8'h00 && wd[9] && !rq_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      enable <= 1'b0; ids_on <= 1'b0;
      bt_cfg <= '{brp: 8'd0, tseg1: 4'd12, tseg2: 3'd1, sjw: 2'd0};
      int_en <= '0; int_st <= '0;
      acc_code <= '0; acc_mask <= '1;
      tx_req <= 1'b0; tx_frame <= '0;
      ids_addr <= '0; ids_wr <= '0;
      rq_wr <= '0; rq_rd <= '0;
      rec <= '0; overrun <= 1'b0;
    end else begin
      ids_wr.w_we <= 1'b0;
      ids_wr.b_we <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;

      // events from the bit processor
      if (tx_done) begin tx_req <= 1'b0; int_st[1] <= 1'b1; end
      if (arb_lost) int_st[4] <= 1'b1;
      if (rx_error) begin
        int_st[3] <= 1'b1;
        if (!tx_active && rec != 8'hFF) rec <= rec + 8'd1;
      end
      if (rx_store && !tx_active && rec != 8'd0) rec <= rec - 8'd1;
      if (accept) begin
        if (rq_full) overrun <= 1'b1;
        else begin
          rq_wr     <= rq_wr + 1'b1;
          int_st[0] <= 1'b1;
          if (rx_entry.attack) int_st[2] <= 1'b1;
        end
      end
      if (!enable) rec <= '0;

      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        unique case (wa)
          8'h00: begin
            enable <= wd[0];
            ids_on <= wd[1];
            if (wd[8])  tx_req <= 1'b1;
            if (wd[10]) tx_req <= 1'b0;
            if (pop) begin rq_rd <= rq_rd + 1'b1; overrun <= 1'b0; end
          end
          8'h0C: int_en <= wd[4:0];
          8'h10: int_st <= int_st & ~wd[4:0];
          8'h14: bt_cfg <= '{brp: wd[7:0], tseg1: wd[11:8], tseg2: wd[14:12], sjw: wd[17:16]};
          8'h18: acc_code <= wd[10:0];
          8'h1C: acc_mask <= wd[10:0];
          8'h20: begin tx_frame.id <= wd[10:0]; tx_frame.rtr <= wd[16]; end
          8'h24: tx_frame.dlc <= wd[3:0];
          8'h28: tx_frame.data[3:0] <= {wd[31:24], wd[23:16], wd[15:8], wd[7:0]};
          8'h2C: tx_frame.data[7:4] <= {wd[31:24], wd[23:16], wd[15:8], wd[7:0]};
          8'h40: ids_addr <= wd[22:0];
          8'h44: begin
            ids_wr.w_we  <= 1'b1;
            ids_wr.layer <= ids_addr[1:0];
            ids_wr.row   <= ids_addr[14:8];
            ids_wr.col   <= ids_addr[22:16];
            ids_wr.data  <= wd;
          end
          8'h48: begin
            ids_wr.b_we  <= 1'b1;
            ids_wr.layer <= ids_addr[1:0];
            ids_wr.row   <= ids_addr[14:8];
            ids_wr.col   <= ids_addr[22:16];
            ids_wr.data  <= wd;
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------- AXI read channel
  logic [7:0]  ra;
  logic [31:0] rd;
  assign ra            = {s_axi_araddr[7:2], 2'b00};
  assign s_axi_arready = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_rresp   = 2'b00;

  always_comb begin
    unique case (ra)
      8'h00: rd = {30'd0, ids_on, enable};
      8'h04: rd = {16'd0, 4'(rq_cnt), 1'b0, err_kind, 1'b0, err_passive, bus_idle, overrun,
                   bus_off, tx_active, tx_req, !rq_empty};
      8'h08: rd = {8'd0, rec, 7'd0, tec};
      8'h0C: rd = {27'd0, int_en};
      8'h10: rd = {27'd0, int_st};
      8'h14: rd = {14'd0, bt_cfg.sjw, 1'b0, bt_cfg.tseg2, bt_cfg.tseg1, bt_cfg.brp};
      8'h18: rd = {21'd0, acc_code};
      8'h1C: rd = {21'd0, acc_mask};
      8'h20: rd = {15'd0, tx_frame.rtr, 5'd0, tx_frame.id};
      8'h24: rd = {28'd0, tx_frame.dlc};
      8'h28: rd = {tx_frame.data[3], tx_frame.data[2], tx_frame.data[1], tx_frame.data[0]};
      8'h2C: rd = {tx_frame.data[7], tx_frame.data[6], tx_frame.data[5], tx_frame.data[4]};
      8'h30: rd = {6'd0, head.attack, head.ids_valid, 7'd0, head.frame.rtr, 5'd0, head.frame.id};
      8'h34: rd = {28'd0, head.frame.dlc};
      8'h38: rd = {head.frame.data[3], head.frame.data[2], head.frame.data[1], head.frame.data[0]};
      8'h3C: rd = {head.frame.data[7], head.frame.data[6], head.frame.data[5], head.frame.data[4]};
      8'h40: rd = {9'd0, ids_addr};
      8'h4C: rd = 32'(ids_score);
      default: rd = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else if (s_axi_arready) begin
      s_axi_rvalid <= 1'b1;
      s_axi_rdata  <= rd;
    end else if (s_axi_rvalid && s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  assign irq = |(int_st & int_en);

  // AXI rules: a response stays valid until it is taken
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
