// tb_feature_collector: self-checking test of the feature collection logic.
// For random frames it pushes the two identifier bytes and the data bytes
// while ids_en is high, raises data_en, and collects the AXI-Stream output
// under random back-pressure. The 20 beats must be the current message zero
// padded to 10 bytes followed by the previous completed message, with tlast
// on beat 19 only. Frames that end in an error (no frame_done) must not
// become the previous message.
module tb_feature_collector;
  import seccan_pkg::*;
  import can_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ids_en = 0, byte_we = 0, data_en = 0, frame_done = 0, m_tready = 0;
  logic [7:0] byte_val = 0;
  logic m_tvalid, m_tlast;
  logic [7:0] m_tdata;

  feature_collector dut (.clk, .rst_n, .ids_en, .byte_we, .byte_val, .data_en, .frame_done,
    .m_tvalid, .m_tready, .m_tdata, .m_tlast);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stream capture
  int beats = 0, lasts = 0;
  int got [20];
  always @(posedge clk) begin
    m_tready <= ($urandom % 3) != 0;
    if (m_tvalid && m_tready) begin
      if (beats < 20) got[beats] = int'(m_tdata);
      if (m_tlast) begin lasts++; check(beats == 19, "tlast on beat 19"); end
      beats++;
    end
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(input logic [7:0] v);
    byte_val = v; byte_we = 1;
    @(negedge clk); byte_we = 0;
    repeat ($urandom % 4) @(negedge clk);
  endtask

  initial begin
    tb_frame_t f, prev;
    bit have_prev;
    int v [20];
    have_prev = 0;
    prev = rand_frame();
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      bit ok_frame;
      f = rand_frame();
      ok_frame = (k % 5) != 4;
      // a stray byte while ids_en is low must be ignored
      push(8'hEE);
      @(negedge clk); ids_en = 1;
      push({5'b0, f.id[10:8]});
      push(f.id[7:0]);
      for (int i = 0; i < dlen(f); i++) push(f.data[i]);
      beats = 0; lasts = 0;
      data_en = 1; @(negedge clk); data_en = 0;
      while (lasts == 0) @(negedge clk);
      feat_vec(f, prev, have_prev, v);
      check(beats == 20, "20 beats");
      for (int i = 0; i < 20; i++)
        check(got[i] == v[i], $sformatf("frame %0d beat %0d: %0d vs %0d", k, i, got[i], v[i]));
      repeat (3) @(negedge clk);
      if (ok_frame) begin
        frame_done = 1; @(negedge clk); frame_done = 0;
        prev = f; have_prev = 1;
      end
      ids_en = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
