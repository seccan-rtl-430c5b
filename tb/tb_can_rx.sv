// tb_can_rx: self-checking test of the receive path.
// The testbench plays the bus: each bit lasts 16 clocks, with a tx point on
// its first clock and a sample point on its tenth. Random base frames (all
// DLC values, remote frames) are sent; the decoded frame, the byte stream to
// the IDS (two identifier bytes then the data bytes), write_flag count,
// header_detector and the ACK bit are checked. A frame with a wrong CRC must
// give a CRC error and a six-bit error flag (left recessive when the node is
// error-passive), six equal bits a stuff error, and a dominant intermission
// bit an overload flag without an error.
module tb_can_rx;
  import seccan_pkg::*;
  import can_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sample_point = 0, tx_point = 0, tb_bit = 1, tx_active = 0, err_req = 0,
        err_passive = 0;
  logic header_detector, byte_we, write_flag, dlc_valid, rtr, frame_done, rx_error;
  logic crc_err, stuff_err, form_err, bus_idle, hard_sync_en, ack_drive, err_drive;
  logic [7:0] byte_val;
  logic [3:0] dlc;
  can_frame_t frame;
  logic bus;
  assign bus = tb_bit & ~ack_drive & ~err_drive;

  can_rx dut (.clk, .rst_n, .enable(1'b1), .sample_point, .tx_point, .rx_bit(bus),
    .tx_active, .err_req, .err_passive, .header_detector, .byte_we, .byte_val, .write_flag,
    .dlc_valid, .dlc, .rtr, .frame_done, .frame, .rx_error, .crc_err, .stuff_err,
    .form_err, .bus_idle, .hard_sync_en, .ack_drive, .err_drive);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // monitors
  int dom_bits = 0;   // error-flag bits at sample points
  int n_hdr = 0, n_wf = 0, n_done = 0, n_err = 0, n_bytes = 0;
  logic [7:0] bytes_seen [16];
  always @(posedge clk) begin
    if (header_detector) n_hdr++;
    if (write_flag) n_wf++;
    if (frame_done) n_done++;
    if (rx_error) n_err++;
    if (sample_point && err_drive) dom_bits++;
    if (byte_we && n_bytes < 16) begin bytes_seen[n_bytes] = byte_val; n_bytes++; end
  end

  task automatic send_bit(input bit v);
    tb_bit <= v;
    tx_point <= 1'b1;
    @(posedge clk); tx_point <= 1'b0;
    repeat (8) @(posedge clk);
    sample_point <= 1'b1;
    @(posedge clk); sample_point <= 1'b0;
    repeat (6) @(posedge clk);
  endtask

  task automatic send_frame(input tb_frame_t f, input bit bad_crc, output bit acked);
    bit b [MAXBITS];
    int n, ack_idx, arb_end;
    frame_bits(f, bad_crc, b, n, ack_idx, arb_end);
    acked = 0;
    for (int i = 0; i < n; i++) begin
      tb_bit <= b[i];
      tx_point <= 1'b1;
      @(posedge clk); tx_point <= 1'b0;
      repeat (8) @(posedge clk);
      if (i == ack_idx) acked = !bus;
      sample_point <= 1'b1;
      @(posedge clk); sample_point <= 1'b0;
      repeat (6) @(posedge clk);
    end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_frame_t f;
    bit acked;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (12) send_bit(1'b1);
    check(bus_idle, "bus idle after 11 recessive bits");
    for (int k = 0; k < 40; k++) begin
      f = rand_frame();
      if (k < 9) begin f.dlc = 4'(k); f.rtr = 0; end
      n_hdr = 0; n_wf = 0; n_done = 0; n_err = 0; n_bytes = 0;
      send_frame(f, 1'b0, acked);
      repeat (3) send_bit(1'b1);
      check(n_hdr == 1, "one header_detector pulse");
      check(n_done == 1 && n_err == 0, $sformatf("frame %0d done without error", k));
      check(acked, "ACK slot driven dominant");
      check(frame.id == f.id && frame.rtr == f.rtr && frame.dlc == f.dlc, "frame header");
      for (int i = 0; i < dlen(f); i++) check(frame.data[i] == f.data[i], "frame data byte");
      check(n_wf == dlen(f), $sformatf("write_flag count %0d vs %0d", n_wf, dlen(f)));
      check(n_bytes == 2 + dlen(f), "bytes to the IDS");
      check(bytes_seen[0] == {5'b0, f.id[10:8]} && bytes_seen[1] == f.id[7:0], "identifier bytes");
      for (int i = 0; i < dlen(f) && i < 8; i++)
        check(bytes_seen[2+i] == f.data[i], "data byte to the IDS");
    end
    // wrong CRC
    f = rand_frame(); f.rtr = 0; f.dlc = 4;
    n_done = 0; n_err = 0; dom_bits = 0;
    send_frame(f, 1'b1, acked);
    repeat (20) send_bit(1'b1);
    check(!acked, "no ACK for a bad CRC");
    check(n_done == 0 && n_err == 1 && crc_err, "CRC error detected");
    check(dom_bits == 6, $sformatf("six-bit error flag (%0d)", dom_bits));
    // overload: a dominant first intermission bit after a good frame
    f = rand_frame();
    n_done = 0; n_err = 0; dom_bits = 0;
    send_frame(f, 1'b0, acked);
    send_bit(1'b0);
    repeat (20) send_bit(1'b1);
    check(n_done == 1 && n_err == 0, "frame kept, no error on overload");
    check(dom_bits == 6, $sformatf("six-bit overload flag (%0d)", dom_bits));
    f = rand_frame();
    n_done = 0;
    send_frame(f, 1'b0, acked);
    repeat (3) send_bit(1'b1);
    check(n_done == 1 && frame.id == f.id, "frame received after overload");
    // error-passive node: the same error gives a recessive (passive) flag
    f = rand_frame(); f.rtr = 0; f.dlc = 2;
    err_passive = 1;
    n_done = 0; n_err = 0; dom_bits = 0;
    send_frame(f, 1'b1, acked);
    repeat (20) send_bit(1'b1);
    check(n_done == 0 && n_err == 1 && crc_err, "CRC error detected while error-passive");
    check(dom_bits == 0, $sformatf("passive error flag stays recessive (%0d)", dom_bits));
    err_passive = 0;
    // stuff error: SOF followed by six dominant bits
    n_done = 0; n_err = 0; dom_bits = 0;
    repeat (7) send_bit(1'b0);
    repeat (20) send_bit(1'b1);
    check(n_err == 1 && stuff_err, "stuff error detected");
    check(n_done == 0, "no frame after stuff error");
    // receiver recovers
    f = rand_frame();
    n_done = 0; n_err = 0;
    send_frame(f, 1'b0, acked);
    repeat (3) send_bit(1'b1);
    check(n_done == 1 && frame.id == f.id, "frame received after errors");
    // own frame: no ACK while transmitting
    tx_active = 1;
    send_frame(f, 1'b0, acked);
    repeat (3) send_bit(1'b1);
    check(!acked, "no ACK for own frame");
    tx_active = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
