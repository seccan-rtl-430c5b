// tb_config_registers: self-checking test of the AXI4-Lite register file.
// An AXI4-Lite master task pair drives the slave (with random ready delays on
// the response channels). Checked: reset value of the bit timing register,
// read-back of writable registers, the transmit buffer fields and send
// request (cleared by tx_done), acceptance filtering and ordering of the
// receive buffer with its IDS flags, release and overrun, interrupt status,
// enable and write-1-to-clear, the IDS weight/bias write pulses and the
// receive error counter, and the error-passive output at a transmit or
// receive error count of 128.
module tb_config_registers;
  import seccan_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0;
  logic awready, wready, bvalid, arready, rvalid, irq;
  logic [1:0] bresp, rresp;
  logic [31:0] rdata;
  logic enable, ids_on, tx_req;
  bit_timing_t bt_cfg;
  ids_wr_t ids_wr;
  logic err_passive;
  can_frame_t tx_frame;
  logic tx_active = 0, tx_done = 0, arb_lost = 0, bus_off = 0, rx_store = 0, rx_error = 0;
  logic [8:0] tec = 9'd5;
  rx_entry_t rx_entry = '0;

  config_registers dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .irq, .enable, .ids_on, .bt_cfg, .ids_wr, .err_passive, .tx_req, .tx_frame, .tx_active, .tx_done,
    .arb_lost, .bus_off, .tec, .rx_store, .rx_entry, .rx_error, .err_kind(3'b100),
    .bus_idle(1'b1), .ids_score(24'sd77));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // weight-port monitor
  int n_wwe = 0, n_bwe = 0;
  ids_wr_t last_wr;
  always @(posedge clk) begin
    if (rst_n && ids_wr.w_we) begin n_wwe++; last_wr = ids_wr; end
    if (rst_n && ids_wr.b_we) begin n_bwe++; last_wr = ids_wr; end
  end

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    #1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
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
    repeat ($urandom % 3) @(negedge clk);
    while (!rvalid) @(negedge clk);
    d = rdata;
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic store(input logic [10:0] id, input logic [7:0] d0, input bit att);
    rx_entry = '0;
    rx_entry.frame.id = id; rx_entry.frame.dlc = 4'd1; rx_entry.frame.data[0] = d0;
    rx_entry.ids_valid = 1; rx_entry.attack = att;
    rx_store = 1; @(negedge clk); rx_store = 0;
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    axi_read(8'h14, d);
    check(d == 32'h0000_1C00, $sformatf("BTR reset value %h", d));
    check(bt_cfg.tseg1 == 4'd12 && bt_cfg.tseg2 == 3'd1 && bt_cfg.brp == 0, "bit timing outputs");
    axi_write(8'h14, 32'h0003_3A07);
    axi_read(8'h14, d);
    check(d == 32'h0003_3A07 && bt_cfg.brp == 8'd7 && bt_cfg.sjw == 2'd3, "BTR write");
    axi_write(8'h00, 32'h3);
    check(enable && ids_on, "enable and IDS on");
    // transmit buffer
    axi_write(8'h20, 32'h0001_0123);
    axi_write(8'h24, 32'h5);
    axi_write(8'h28, 32'h4433_2211);
    axi_write(8'h2C, 32'h8877_6655);
    check(tx_frame.id == 11'h123 && tx_frame.rtr && tx_frame.dlc == 4'd5, "TX header");
    check(tx_frame.data[0] == 8'h11 && tx_frame.data[3] == 8'h44 && tx_frame.data[7] == 8'h88, "TX data");
    check(!tx_req, "no request yet");
    axi_write(8'h00, 32'h103);
    check(tx_req, "send requested");
    axi_read(8'h04, d);
    check(d[1], "status shows pending send");
    tx_done = 1; @(negedge clk); tx_done = 0;
    check(!tx_req, "request cleared by tx_done");
    axi_read(8'h10, d);
    check(d[1], "tx interrupt status");
    // interrupts
    check(!irq, "irq masked");
    axi_write(8'h0C, 32'h1F);
    check(irq, "irq when enabled");
    axi_write(8'h10, 32'h1F);
    check(!irq, "write-1-to-clear");
    // acceptance filter: accept identifiers 0x1A0..0x1AF only
    axi_write(8'h18, 32'h1A0);
    axi_write(8'h1C, 32'h00F);
    store(11'h1A3, 8'hA1, 0);
    store(11'h2A3, 8'hB2, 1);   // rejected
    store(11'h1AF, 8'hC3, 1);
    axi_read(8'h04, d);
    check(d[0] && d[15:12] == 4'd2, $sformatf("two frames held (%h)", d));
    check(d[10:8] == 3'b100, "last error kind");
    axi_read(8'h30, d);
    check(d[10:0] == 11'h1A3 && d[24] && !d[25], "first frame, benign");
    axi_read(8'h38, d);
    check(d[7:0] == 8'hA1, "first frame data");
    axi_read(8'h10, d);
    check(d[0] && d[2], "receive and attack interrupt status");
    axi_write(8'h00, 32'h203);   // release
    axi_read(8'h30, d);
    check(d[10:0] == 11'h1AF && d[25], "second frame flagged as attack");
    axi_write(8'h00, 32'h203);
    axi_read(8'h04, d);
    check(!d[0], "buffer empty");
    // overrun: five frames into four places
    for (int i = 0; i < 5; i++) store(11'h1A0 + 11'(i), 8'(i), 0);
    axi_read(8'h04, d);
    check(d[4] && d[15:12] == 4'd4, "overrun flagged, four held");
    axi_read(8'h30, d);
    check(d[10:0] == 11'h1A0, "oldest frame kept");
    // IDS weight and bias writes
    axi_write(8'h40, 32'h0005_1301);
    axi_write(8'h44, 32'hDEAD_BEEF);
    check(n_wwe == 1 && last_wr.layer == 2'd1 && last_wr.row == 7'h13 && last_wr.col == 7'd5 &&
          last_wr.data == 32'hDEAD_BEEF, "weight write pulse");
    axi_write(8'h48, 32'h0000_FF00);
    check(n_bwe == 1 && last_wr.data[15:0] == 16'hFF00, "bias write pulse");
    axi_read(8'h4C, d);
    check(d == 32'd77, "IDS score readable");
    // receive error counter
    repeat (3) begin rx_error = 1; @(negedge clk); rx_error = 0; end
    axi_read(8'h08, d);
    check(d[23:16] == 8'd3 && d[8:0] == 9'd5, $sformatf("error counters %h", d));
    check(!err_passive, "error-active below 128");
    // error-passive from a transmit error count of 128
    tec = 9'd128;
    @(negedge clk);
    axi_read(8'h04, d);
    check(err_passive && d[6], "error-passive at TEC 128");
    tec = 9'd127;
    @(negedge clk);
    check(!err_passive, "error-active again at TEC 127");
    // and from a receive error count of 128
    repeat (125) begin rx_error = 1; @(negedge clk); rx_error = 0; end
    @(negedge clk);
    check(err_passive, "error-passive at REC 128");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
