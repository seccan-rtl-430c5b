// tb_ids_control: self-checking test of the IDS control logic (REG and
// Counter). For every DLC value (and remote frames) it pulses
// header_detector, then write_flag once per data byte at random gaps, and
// checks that data_en pulses exactly once, one clock after the count reaches
// the data length (DLC capped at 8, 0 for remote frames), never earlier, and
// that ids_en rises after header_detector and falls on frame_done or an
// error. With ids_on low nothing happens.
module tb_ids_control;
  import seccan_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ids_on = 1, header_detector = 0, write_flag = 0, dlc_valid = 0, rtr = 0;
  logic frame_done = 0, rx_error = 0;
  logic [3:0] dlc = 0;
  logic ids_en, data_en;
  logic [3:0] byte_count;

  ids_control dut (.clk, .rst_n, .ids_on, .header_detector, .write_flag, .dlc_valid, .dlc,
    .rtr, .frame_done, .rx_error, .ids_en, .data_en, .byte_count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_den = 0;
  always @(posedge clk) if (data_en) n_den++;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(ref logic s);
    s = 1; @(negedge clk); s = 0;
  endtask

  initial begin
    int len;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 36; k++) begin
      dlc = 4'(k % 16);
      rtr = (k == 20 || k == 33);
      len = rtr ? 0 : (dlc > 8 ? 8 : int'(dlc));
      n_den = 0;
      @(negedge clk);
      pulse(header_detector);
      check(ids_en == 1, "ids_en set by header_detector");
      repeat (3) @(negedge clk);
      check(n_den == 0, "no data_en before DLC");
      dlc_valid = 1;
      for (int i = 0; i < len; i++) begin
        repeat (1 + $urandom % 5) @(negedge clk);
        check(n_den == 0, "no data_en before the last byte");
        pulse(write_flag);
      end
      repeat (3) @(negedge clk);
      check(n_den == 1, $sformatf("data_en after %0d bytes (dlc %0d rtr %0d)", len, dlc, rtr));
      check(byte_count == 4'(len), "byte count");
      repeat (5) @(negedge clk);
      check(n_den == 1, "data_en only once");
      check(ids_en == 1, "ids_en held until the frame ends");
      if (k % 4 == 3) pulse(rx_error); else pulse(frame_done);
      dlc_valid = 0;
      check(ids_en == 0, "ids_en cleared at frame end or error");
    end
    // IDS switched off
    ids_on = 0; n_den = 0;
    pulse(header_detector);
    dlc = 0; dlc_valid = 1;
    repeat (4) @(negedge clk);
    check(ids_en == 0 && n_den == 0, "nothing while the IDS is off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
