// tb_can_tx: self-checking test of the transmit path.
// The testbench provides tx and sample points (16 clocks per bit) and the
// rest of the bus. Every bit the transmitter sends is compared with the
// reference bit sequence (stuffing and CRC computed independently). Also
// checked: ACK handling and tx_done, an unacknowledged frame (ACK error,
// TEC +8), arbitration lost against a higher-priority identifier (no error,
// transmitter withdraws), a bit error in the data field, and the eight-bit
// suspend-transmission wait of an error-passive node before its next frame.
module tb_can_tx;
  import seccan_pkg::*;
  import can_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tx_point = 0, sample_point = 0, other = 1, bus_idle = 0, tx_req = 0, rx_error = 0,
        err_passive = 0;
  can_frame_t tx_frame = '0;
  logic tx_bit, tx_active, tx_done, arb_lost, err_req, bus_off;
  logic [8:0] tec;
  logic bus;
  assign bus = tx_bit & other;

  can_tx dut (.clk, .rst_n, .enable(1'b1), .tx_point, .sample_point, .rx_bit(bus), .bus_idle,
    .rx_error, .err_passive, .tx_req, .tx_frame, .tx_bit, .tx_active, .tx_done, .arb_lost, .err_req,
    .tec, .bus_off);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_done = 0, n_lost = 0, n_err = 0;
  always @(posedge clk) begin
    if (tx_done) n_done++;
    if (arb_lost) n_lost++;
    if (err_req) n_err++;
  end

  function automatic can_frame_t to_dut(input tb_frame_t f);
    can_frame_t c;
    c.id = f.id; c.rtr = f.rtr; c.dlc = f.dlc;
    for (int i = 0; i < 8; i++) c.data[i] = f.data[i];
    return c;
  endfunction

  // one bit time: other node level v; returns the bus level at the sample point
  task automatic bit_time(input bit v, output bit seen);
    other <= v;
    tx_point <= 1'b1;
    @(posedge clk); tx_point <= 1'b0;
    repeat (8) @(posedge clk);
    seen = bus;
    sample_point <= 1'b1;
    @(posedge clk); sample_point <= 1'b0;
    repeat (6) @(posedge clk);
  endtask

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_frame_t f, g;
    bit b [MAXBITS], b2 [MAXBITS];
    int n, ack_idx, arb_end, n2, a2, e2, mism, cut;
    bit seen;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) bit_time(1'b1, seen);

    // ---- acknowledged frames
    for (int k = 0; k < 30; k++) begin
      f = rand_frame();
      frame_bits(f, 1'b0, b, n, ack_idx, arb_end);
      tx_frame = to_dut(f);
      n_done = 0; mism = 0;
      bus_idle = 1; tx_req = 1;
      for (int i = 0; i < n; i++) begin
        bit_time((i == ack_idx) ? 1'b0 : 1'b1, seen);
        if (i == 0) begin bus_idle = 0; end
        if (i != ack_idx && seen != b[i]) mism++;
      end
      bit_time(1'b1, seen);
      tx_req = 0;
      check(mism == 0, $sformatf("frame %0d: %0d wrong bits", k, mism));
      check(n_done == 1, "tx_done once");
      check(!tx_active, "transmitter released the bus");
      repeat (3) bit_time(1'b1, seen);
    end
    check(tec == 0, "TEC stays zero");

    // ---- no acknowledge
    f = rand_frame();
    frame_bits(f, 1'b0, b, n, ack_idx, arb_end);
    tx_frame = to_dut(f);
    n_done = 0; n_err = 0;
    bus_idle = 1; tx_req = 1;
    for (int i = 0; i <= ack_idx; i++) begin
      bit_time(1'b1, seen);
      if (i == 0) bus_idle = 0;
    end
    bit_time(1'b1, seen);
    tx_req = 0;
    check(n_err == 1 && n_done == 0, "ACK error reported");
    check(tec == 9'd8, $sformatf("TEC is 8 after ACK error (%0d)", tec));
    check(!tx_active, "transmitter stopped after ACK error");

    // ---- arbitration: other node sends a lower identifier at the same time
    f = rand_frame(); f.id = 11'h5A5;
    g = f; g.id = 11'h5A1;   // differs first at id bit 2: g dominant there
    frame_bits(f, 1'b0, b, n, ack_idx, arb_end);
    frame_bits(g, 1'b0, b2, n2, a2, e2);
    tx_frame = to_dut(f);
    n_lost = 0; n_err = 0; cut = -1;
    bus_idle = 1; tx_req = 1;
    for (int i = 0; i < 20; i++) begin
      bit_time(b2[i], seen);
      if (i == 0) bus_idle = 0;
      if (!tx_active && cut < 0) cut = i;
    end
    tx_req = 0;
    check(n_lost == 1 && n_err == 0, "arbitration lost without error");
    check(cut == 9, $sformatf("withdrew after the first differing bit (%0d)", cut));
    check(tec == 9'd8, "TEC unchanged by lost arbitration");
    repeat (12) bit_time(1'b1, seen);

    // ---- bit error in the data field
    f = rand_frame(); f.rtr = 0; f.dlc = 8; f.data[0] = 8'hFF;
    frame_bits(f, 1'b0, b, n, ack_idx, arb_end);
    tx_frame = to_dut(f);
    n_err = 0;
    bus_idle = 1; tx_req = 1;
    for (int i = 0; i < 30; i++) begin
      // force dominant on the first recessive bit after the arbitration field
      bit_time((i >= arb_end + 7 && b[i] && n_err == 0) ? 1'b0 : 1'b1, seen);
      if (i == 0) bus_idle = 0;
    end
    tx_req = 0;
    check(n_err == 1, "bit error reported");
    check(tec == 9'd16, $sformatf("TEC is 16 (%0d)", tec));

    // ---- a good frame lowers TEC by one
    f = rand_frame();
    frame_bits(f, 1'b0, b, n, ack_idx, arb_end);
    tx_frame = to_dut(f);
    n_done = 0;
    repeat (3) bit_time(1'b1, seen);
    bus_idle = 1; tx_req = 1;
    for (int i = 0; i < n + 1; i++) begin
      bit_time((i == ack_idx) ? 1'b0 : 1'b1, seen);
      if (i == 0) bus_idle = 0;
    end
    tx_req = 0;
    check(n_done == 1 && tec == 9'd15, $sformatf("TEC 15 after success (%0d)", tec));

    // ---- error-passive: after sending, wait eight more idle bit times
    for (int pass = 0; pass < 2; pass++) begin
      int wait_bits;
      err_passive = 1'(pass);
      f = rand_frame();
      frame_bits(f, 1'b0, b, n, ack_idx, arb_end);
      tx_frame = to_dut(f);
      bus_idle = 1; tx_req = 1;
      for (int i = 0; i < n + 1; i++) begin
        bit_time((i == ack_idx) ? 1'b0 : 1'b1, seen);
        if (i == 0) bus_idle = 0;
      end
      // send the next frame as soon as allowed; count idle bits before SOF
      bus_idle = 1;
      wait_bits = 0;
      seen = 1;
      while (seen && wait_bits < 20) begin
        bit_time(1'b1, seen);
        if (seen) wait_bits++;
      end
      check(wait_bits == (pass ? 8 : 0),
            $sformatf("%s node starts after %0d idle bits", pass ? "error-passive" : "error-active", wait_bits));
      // finish that frame
      for (int i = 1; i < n + 1; i++) begin
        bit_time((i == ack_idx) ? 1'b0 : 1'b1, seen);
        if (i == 1) bus_idle = 0;
      end
      tx_req = 0;
      repeat (2) bit_time(1'b1, seen);
    end
    err_passive = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
