// tb_can_bit_timing: self-checking test of the bit timing logic.
// Measures the clocks between sample points and tx points for the reset
// configuration (1 + 13 + 2 = 16 quanta of one clock) and for a prescaler of
// 2 (32 clocks), the position of the sample point after a hard
// synchronisation (2 synchroniser clocks + sync segment + TSEG1 = 16 clocks
// after the edge), the one-quantum lengthening caused by a late edge
// (SJW = 1) and its absence while the node itself drives the bus dominant.
module tb_can_bit_timing;
  import seccan_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bit_timing_t cfg = '{brp: 8'd0, tseg1: 4'd12, tseg2: 3'd1, sjw: 2'd0};
  logic hard_sync_en = 1, no_resync = 0, can_rx = 1, enable = 0;
  logic tx_point, sample_point, rx_bit;

  can_bit_timing dut (.clk, .rst_n, .enable, .cfg, .hard_sync_en, .no_resync, .can_rx,
    .tx_point, .sample_point, .rx_bit);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint cyc = 0, last_sp = 0, last_tp = 0, sp_gap = 0, tp_gap = 0;
  always @(posedge clk) begin
    cyc++;
    if (sample_point) begin sp_gap = cyc - last_sp; last_sp = cyc; end
    if (tx_point) begin tp_gap = cyc - last_tp; last_tp = cyc; end
  end

  longint t_sp;
  // returns one clock after a sample point, when sp_gap has been updated;
  // t_sp holds the clock count at the sample point itself
  task automatic wait_sp();
    do @(negedge clk); while (!sample_point);
    t_sp = cyc;
    @(negedge clk);
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_edge;
    repeat (3) @(negedge clk);
    rst_n = 1; enable = 1;
    repeat (4) wait_sp();
    check(sp_gap == 16, $sformatf("16 clocks per bit (%0d)", sp_gap));
    check(tp_gap == 16, $sformatf("tx points 16 clocks apart (%0d)", tp_gap));
    check(rx_bit == 1'b1, "recessive sampled");
    // hard synchronisation on a falling edge placed mid-bit
    repeat (5) @(negedge clk);
    can_rx <= 1'b0;
    t_edge = cyc;
    wait_sp();
    check(t_sp - t_edge == 16, $sformatf("sample point 16 clocks after the edge (%0d)", t_sp - t_edge));
    check(rx_bit == 1'b0, "dominant sampled");
    hard_sync_en = 0;
    // bits aligned to the hard sync keep their spacing
    repeat (3) wait_sp();
    check(sp_gap == 16, "aligned bits stay 16 clocks");
    // late edge: bus recessive for one bit, then dominant 2 quanta late
    @(negedge clk);
    while (!tx_point) @(negedge clk);
    can_rx <= 1'b1;
    wait_sp();
    while (!tx_point) @(negedge clk);
    repeat (2) @(negedge clk);
    can_rx <= 1'b0;
    wait_sp();
    check(sp_gap == 17, $sformatf("late edge lengthens the bit by one quantum (%0d)", sp_gap));
    check(rx_bit == 1'b0, "dominant after resync");
    // same, but the node drives dominant itself: no resynchronisation
    while (!tx_point) @(negedge clk);
    can_rx <= 1'b1;
    wait_sp();
    no_resync = 1;
    while (!tx_point) @(negedge clk);
    repeat (2) @(negedge clk);
    can_rx <= 1'b0;
    wait_sp();
    check(sp_gap == 16, $sformatf("own edge ignored (%0d)", sp_gap));
    no_resync = 0;
    // prescaler 2
    cfg.brp = 8'd1;
    repeat (3) wait_sp();
    check(sp_gap == 32, $sformatf("BRP=1 gives 32 clocks per bit (%0d)", sp_gap));
    check(tp_gap == 32, "tx points 32 clocks apart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
