// tb_seccan_top: end-to-end test of the SecCAN controller at its default
// parameters (16 clocks per bit, i.e. 1 Mbit/s at 16 MHz).
// A host model drives the AXI4-Lite port; a behavioural CAN node is the other
// station on the bus. The host loads a random model into the IDS, then:
//   - the node sends random frames; the host reads each from the receive
//     buffer and checks identifier, DLC, data and the appended IDS verdict
//     against the reference model (current + previous message)
//   - a frame outside the acceptance filter is dropped
//   - the controller transmits a frame; the node checks every bit and ACKs
//   - both start at once and the controller loses arbitration, receives the
//     winner, then retransmits
//   - a frame with a bad CRC raises an error flag and the error counter
//   - five frames into the four-entry buffer cause an overrun
//   - with the IDS switched off frames are stored without a verdict
//   - alone on the bus, repeated ACK errors make the controller
//     error-passive, after which its error flags are recessive
// Each of these mechanisms is counted and must occur at least once.
module tb_seccan_top;
  import seccan_pkg::*;
  import can_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #31.25ns clk = ~clk;   // 16 MHz

  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0;
  logic awready, wready, bvalid, arready, rvalid, irq;
  logic [1:0] bresp, rresp;
  logic [31:0] rdata;
  logic can_tx, node_tx, bus;
  assign bus = can_tx & node_tx;

  seccan_top dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .irq, .can_rx(bus), .can_tx);

  can_node_model #(.BIT_CLKS(16), .SAMPLE_AT(10)) u_node (.clk, .bus, .tx(node_tx));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int m_attack = 0, m_benign = 0, m_filter = 0, m_tx = 0, m_arb = 0, m_err = 0;
  int m_overrun = 0, m_ids_off = 0, m_irq = 0, m_hidden = 0, m_passive = 0;
  int flag_bits = 0;      // error-flag bits this controller drove dominant
  longint cyc = 0, t_rdy = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.ids_output_ready) t_rdy = cyc;
    if (dut.rx_store && dut.rx_entry.ids_valid) m_hidden++;
    if (dut.sample_point && dut.u_bsp.err_drive) flag_bits++;
  end

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    #1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    bready = 1;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic idle_bits(input int n);
    repeat (16 * n) @(negedge clk);
  endtask

  int w1 [20][64];
  int b1 [64];
  int w2 [64][32];
  int b2 [32];
  int w3 [32];
  int b3;

  // read the oldest buffered frame, compare, release it
  task automatic read_check(input tb_frame_t f, input bit ids_valid, input bit att, input string tag);
    logic [31:0] d, d0, d1, dl;
    axi_read(8'h04, d);
    check(d[0], {tag, ": frame available"});
    axi_read(8'h30, d);
    axi_read(8'h34, dl);
    axi_read(8'h38, d0);
    axi_read(8'h3C, d1);
    check(d[10:0] == f.id && d[16] == f.rtr && dl[3:0] == f.dlc, $sformatf("%s: header %h", tag, d));
    for (int i = 0; i < dlen(f); i++)
      check(((i < 4) ? d0[8*i +: 8] : d1[8*(i-4) +: 8]) == f.data[i], {tag, ": data"});
    check(d[24] == ids_valid, $sformatf("%s: IDS valid bit %0d", tag, d[24]));
    if (ids_valid) check(d[25] == att, $sformatf("%s: IDS verdict", tag));
    if (d[24] && d[25]) m_attack++;
    if (d[24] && !d[25]) m_benign++;
    axi_write(8'h00, 32'h203 & (ids_valid ? 32'hFFFF_FFFF : 32'hFFFF_FFFD));
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_frame_t fr [24];
    tb_frame_t f, g, prev;
    bit have_prev, acked, lost;
    int x [20];
    int s0 [24];
    int row [];
    int ref_s, errs;
    logic [31:0] d;

    repeat (3) @(negedge clk);
    rst_n = 1;
    axi_read(8'h14, d);
    check(d == 32'h0000_1C00, "1 Mbit/s bit timing at reset");

    // ---- model: random weights; output bias at the median of the test scores
    gen_model(w1, b1, w2, b2, w3);
    have_prev = 0; prev = rand_frame();
    for (int k = 0; k < 24; k++) begin
      fr[k] = rand_frame();
      if (k < 9) begin fr[k].dlc = 4'(k); fr[k].rtr = 0; end
      feat_vec(fr[k], prev, have_prev, x);
      s0[k] = mlp_ref(x, w1, b1, w2, b2, w3, 0, 8, 4);
      prev = fr[k]; have_prev = 1;
    end
    s0.sort();
    b3 = -s0[12] + 1;
    row = new[64];
    for (int i = 0; i < 20; i++) begin
      for (int j = 0; j < 64; j++) row[j] = w1[i][j];
      for (int g2 = 0; g2 < 8; g2++) begin
        axi_write(8'h40, {9'd0, 7'(g2), 1'b0, 7'(i), 6'd0, 2'd0});
        axi_write(8'h44, wword(row, g2, 64));
      end
    end
    for (int i = 0; i < 64; i++) begin
      for (int j = 0; j < 32; j++) row[j] = w2[i][j];
      for (int g2 = 0; g2 < 4; g2++) begin
        axi_write(8'h40, {9'd0, 7'(g2), 1'b0, 7'(i), 6'd0, 2'd1});
        axi_write(8'h44, wword(row, g2, 32));
      end
    end
    for (int i = 0; i < 32; i++) begin
      row[0] = w3[i];
      axi_write(8'h40, {9'd0, 7'd0, 1'b0, 7'(i), 6'd0, 2'd2});
      axi_write(8'h44, wword(row, 0, 1));
    end
    for (int j = 0; j < 64; j++) begin
      axi_write(8'h40, {9'd0, 7'(j), 1'b0, 7'd0, 6'd0, 2'd0});
      axi_write(8'h48, 32'(b1[j]));
    end
    for (int j = 0; j < 32; j++) begin
      axi_write(8'h40, {9'd0, 7'(j), 1'b0, 7'd0, 6'd0, 2'd1});
      axi_write(8'h48, 32'(b2[j]));
    end
    axi_write(8'h40, {9'd0, 7'd0, 1'b0, 7'd0, 6'd0, 2'd2});
    axi_write(8'h48, 32'(b3));

    axi_write(8'h0C, 32'h1F);      // all interrupts
    axi_write(8'h00, 32'h3);       // enable, IDS on
    idle_bits(12);

    // ---- reception with IDS tagging
    have_prev = 0; prev = fr[0];
    for (int k = 0; k < 24; k++) begin
      u_node.send(fr[k], 1'b0, acked, lost);
      check(acked, $sformatf("frame %0d acknowledged", k));
      idle_bits(3);
      check(t_rdy != 0, "IDS produced a verdict");
      if (irq) m_irq++;
      feat_vec(fr[k], prev, have_prev, x);
      ref_s = mlp_ref(x, w1, b1, w2, b2, w3, b3, 8, 4);
      read_check(fr[k], 1'b1, ref_s > 0, $sformatf("frame %0d", k));
      axi_write(8'h10, 32'h1F);
      prev = fr[k]; have_prev = 1;
    end

    // ---- acceptance filter drops a frame
    axi_write(8'h18, 32'h7F0);
    axi_write(8'h1C, 32'h00F);
    f = rand_frame(); f.id = 11'h123;
    u_node.send(f, 1'b0, acked, lost);
    idle_bits(3);
    axi_read(8'h04, d);
    check(!d[0], "filtered frame not stored");
    if (!d[0] && acked) m_filter++;
    axi_write(8'h1C, 32'h7FF);
    prev = f;

    // ---- transmission
    f = rand_frame(); f.id = 11'h2B4;
    axi_write(8'h20, {15'd0, f.rtr, 5'd0, f.id});
    axi_write(8'h24, {28'd0, f.dlc});
    axi_write(8'h28, {f.data[3], f.data[2], f.data[1], f.data[0]});
    axi_write(8'h2C, {f.data[7], f.data[6], f.data[5], f.data[4]});
    axi_write(8'h10, 32'h1F);
    axi_write(8'h00, 32'h103);
    u_node.expect_frame(f, 1'b1, errs);
    check(errs == 0, $sformatf("transmitted frame bits (%0d wrong)", errs));
    idle_bits(4);
    axi_read(8'h10, d);
    check(d[1], "transmit-done interrupt");
    axi_read(8'h04, d);
    check(!d[1] && !d[0], "send finished, own frame not stored");
    if (errs == 0 && d[1] == 0) m_tx++;
    prev = f;                      // the IDS also watches this node's own frames

    // ---- arbitration: both start together, the node's lower identifier wins
    f = rand_frame(); f.id = 11'h400; f.rtr = 0;
    g = rand_frame(); g.id = 11'h0F0; g.rtr = 0;
    axi_write(8'h20, {15'd0, f.rtr, 5'd0, f.id});
    axi_write(8'h24, {28'd0, f.dlc});
    axi_write(8'h28, {f.data[3], f.data[2], f.data[1], f.data[0]});
    axi_write(8'h2C, {f.data[7], f.data[6], f.data[5], f.data[4]});
    axi_write(8'h10, 32'h1F);
    axi_write(8'h00, 32'h103);
    @(negedge bus);
    u_node.send(g, 1'b0, acked, lost);
    check(!lost && acked, "node won arbitration and was acknowledged");
    u_node.expect_frame(f, 1'b1, errs);
    check(errs == 0, "retransmitted frame after lost arbitration");
    idle_bits(4);
    axi_read(8'h10, d);
    check(d[4] && d[1], "arbitration-lost and transmit-done interrupts");
    if (d[4] && errs == 0) m_arb++;
    feat_vec(g, prev, 1'b1, x);
    ref_s = mlp_ref(x, w1, b1, w2, b2, w3, b3, 8, 4);
    read_check(g, 1'b1, ref_s > 0, "arbitration winner");
    prev = f;                      // the retransmitted frame came last

    // ---- CRC error
    f = rand_frame();
    u_node.send(f, 1'b1, acked, lost);
    idle_bits(16);
    axi_read(8'h04, d);
    check(!d[0] && d[10], "bad frame dropped with CRC error");
    axi_read(8'h08, d);
    check(d[23:16] == 8'd1, $sformatf("receive error count 1 (%0d)", d[23:16]));
    axi_read(8'h10, d);
    if (d[3]) m_err++;
    check(d[3], "bus error interrupt");

    // ---- overrun: five frames, four places
    for (int k = 0; k < 5; k++) begin
      f = rand_frame();
      u_node.send(f, 1'b0, acked, lost);
      idle_bits(3);
      if (k == 0) g = f;
    end
    axi_read(8'h04, d);
    check(d[4] && d[15:12] == 4'd4, "overrun with four frames held");
    if (d[4]) m_overrun++;
    axi_read(8'h30, d);
    check(d[10:0] == g.id, "oldest frame kept");
    for (int k = 0; k < 4; k++) axi_write(8'h00, 32'h203);

    // ---- IDS switched off: frames carry no verdict
    axi_write(8'h00, 32'h1);
    f = rand_frame();
    u_node.send(f, 1'b0, acked, lost);
    idle_bits(3);
    read_check(f, 1'b0, 1'b0, "IDS off");
    axi_read(8'h30, d);
    m_ids_off++;

    // ---- alone on the bus: no ACK, so every attempt ends in an ACK error;
    // the transmit error count climbs by 8 per attempt until the node turns
    // error-passive at 128 and its error flags stay recessive
    f = rand_frame(); f.id = 11'h555;
    axi_write(8'h20, {15'd0, f.rtr, 5'd0, f.id});
    axi_write(8'h24, {28'd0, f.dlc});
    axi_write(8'h00, 32'h103);
    d = 0;
    for (int t = 0; t < 40 && !d[6]; t++) begin
      idle_bits(50);
      axi_read(8'h04, d);
    end
    check(d[6], "error-passive after repeated ACK errors");
    axi_read(8'h08, d);
    check(d[8:0] >= 9'd128, $sformatf("transmit error count %0d", d[8:0]));
    flag_bits = 0;
    idle_bits(400);                // more failed attempts, now error-passive
    axi_read(8'h08, d);
    check(d[8:0] > 9'd128, "attempts continue while error-passive");
    check(flag_bits == 0, $sformatf("passive error flags are recessive (%0d dominant)", flag_bits));
    if (d[8:0] > 9'd128 && flag_bits == 0) m_passive++;
    axi_write(8'h00, 32'h401);     // cancel the send
    idle_bits(400);
    axi_read(8'h04, d);
    check(!d[1] && !d[2], "send cancelled");

    $display("mechanisms: attack=%0d benign=%0d filter=%0d tx=%0d arb_lost=%0d crc_err=%0d overrun=%0d ids_off=%0d irq=%0d verdict_before_store=%0d err_passive=%0d",
             m_attack, m_benign, m_filter, m_tx, m_arb, m_err, m_overrun, m_ids_off, m_irq, m_hidden, m_passive);
    check(m_attack > 0, "attack verdict seen");
    check(m_benign > 0, "benign verdict seen");
    check(m_filter > 0, "filter drop seen");
    check(m_tx > 0, "transmission seen");
    check(m_arb > 0, "arbitration loss seen");
    check(m_err > 0, "error frame seen");
    check(m_overrun > 0, "overrun seen");
    check(m_irq > 0, "interrupt seen");
    check(m_passive > 0, "error-passive transmission seen");
    check(m_hidden >= 26, "IDS verdict ready before every stored frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
