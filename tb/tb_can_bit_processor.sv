// tb_can_bit_processor: self-checking test of the bit processor with its
// embedded IDS. The testbench plays the bus at 16 clocks per bit (tx point on
// the first clock, sample point on the tenth) and loads a random model into
// the Q-IDS. For a stream of random frames it checks the received frame, the
// IDS verdict against the reference model of (current, previous) message,
// and that the verdict is ready before the frame completes (the IDS latency
// hidden in the reception window); it also measures data_en to frame_done.
// A frame with a CRC error must not become the previous message. Finally the
// node transmits one frame, which the testbench acknowledges.
module tb_can_bit_processor;
  import seccan_pkg::*;
  import can_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ids_wr_t ids_wr = '0;
  logic tx_point = 0, sample_point = 0, tb_bit = 1, tx_req = 0;
  can_frame_t tx_frame = '0, rx_frame;
  logic hard_sync_en, drive_dominant, can_tx, tx_active, tx_done, arb_lost, bus_off;
  logic [8:0] tec;
  logic rx_frame_done, rx_error, bus_idle, ids_en, data_en, ids_output_ready, ids_done, ids_attack;
  logic [2:0] err_kind;
  logic signed [ACC_W-1:0] ids_score;
  logic bus;
  assign bus = tb_bit & can_tx;

  can_bit_processor dut (.clk, .rst_n, .enable(1'b1), .ids_on(1'b1), .ids_wr, .err_passive(1'b0),
    .tx_point, .sample_point, .rx_bit(bus), .hard_sync_en, .drive_dominant, .can_tx,
    .tx_req, .tx_frame, .tx_active, .tx_done, .arb_lost, .bus_off, .tec,
    .rx_frame_done, .rx_frame, .rx_error, .err_kind, .bus_idle,
    .ids_en, .data_en, .ids_output_ready, .ids_done, .ids_attack, .ids_score);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int w1 [20][64];
  int b1 [64];
  int w2 [64][32];
  int b2 [32];
  int w3 [32];

  longint cyc = 0, t_den = 0, t_rdy = 0, t_done = 0;
  int n_done = 0, n_rdy = 0, n_txdone = 0, n_err = 0;
  bit done_at_fd, att_at_fd;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && data_en) t_den = cyc;
    if (rst_n && ids_output_ready) begin t_rdy = cyc; n_rdy++; end
    if (rst_n && rx_frame_done) begin
      t_done = cyc; n_done++;
      done_at_fd = ids_done; att_at_fd = ids_attack;
    end
    if (rst_n && tx_done) n_txdone++;
    if (rst_n && rx_error) n_err++;
  end

  task automatic wr(input int layer, input int row, input int col, input logic [31:0] d, input bit bias);
    ids_wr.layer = 2'(layer); ids_wr.row = 7'(row); ids_wr.col = 7'(col); ids_wr.data = d;
    ids_wr.w_we = !bias; ids_wr.b_we = bias;
    @(negedge clk);
    ids_wr.w_we = 0; ids_wr.b_we = 0;
  endtask

  task automatic bit_time(input bit v);
    tb_bit <= v;
    tx_point <= 1'b1;
    @(posedge clk); tx_point <= 1'b0;
    repeat (8) @(posedge clk);
    sample_point <= 1'b1;
    @(posedge clk); sample_point <= 1'b0;
    repeat (6) @(posedge clk);
  endtask

  task automatic send_frame(input tb_frame_t f, input bit bad_crc);
    bit b [MAXBITS];
    int n, ack_idx, arb_end;
    frame_bits(f, bad_crc, b, n, ack_idx, arb_end);
    for (int i = 0; i < n; i++) begin
      bit_time(b[i]);
      // the receiver must pull the ACK slot dominant on a good frame
      if (i == ack_idx && !bad_crc) check(can_tx == 1'b0, "receiver drives ACK");
    end
    repeat (3) bit_time(1'b1);
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_frame_t f, prev;
    bit have_prev;
    int x [20];
    int row [];
    int ref_s, n_att, min_margin, b3;
    tb_frame_t fr [30];
    int s0 [30];
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    gen_model(w1, b1, w2, b2, w3);
    row = new[64];
    for (int i = 0; i < 20; i++) begin
      for (int j = 0; j < 64; j++) row[j] = w1[i][j];
      for (int g = 0; g < 8; g++) wr(0, i, g, wword(row, g, 64), 0);
    end
    for (int i = 0; i < 64; i++) begin
      for (int j = 0; j < 32; j++) row[j] = w2[i][j];
      for (int g = 0; g < 4; g++) wr(1, i, g, wword(row, g, 32), 0);
    end
    for (int i = 0; i < 32; i++) begin row[0] = w3[i]; wr(2, i, 0, wword(row, 0, 1), 0); end
    for (int j = 0; j < 64; j++) wr(0, 0, j, 32'(b1[j]), 1);
    for (int j = 0; j < 32; j++) wr(1, 0, j, 32'(b2[j]), 1);
    // frames, and an output bias at the median score so both verdicts occur
    have_prev = 0; prev = rand_frame();
    for (int k = 0; k < 30; k++) begin
      fr[k] = rand_frame();
      if (k < 9) begin fr[k].dlc = 4'(8 - k); fr[k].rtr = 0; end
      feat_vec(fr[k], prev, have_prev, x);
      s0[k] = mlp_ref(x, w1, b1, w2, b2, w3, 0, 8, 4);
      if (k != 12) begin prev = fr[k]; have_prev = 1; end
    end
    s0.sort();
    b3 = -s0[15] + 1;
    wr(2, 0, 0, 32'(b3), 1);

    repeat (12) bit_time(1'b1);
    have_prev = 0; prev = rand_frame(); n_att = 0; min_margin = 1 << 30;
    for (int k = 0; k < 30; k++) begin
      bit bad;
      f = fr[k];
      bad = (k == 12);
      n_done = 0; n_rdy = 0; n_err = 0;
      send_frame(f, bad);
      feat_vec(f, prev, have_prev, x);
      ref_s = mlp_ref(x, w1, b1, w2, b2, w3, b3, 8, 4);
      check(n_rdy == 1, "one IDS result per frame");
      check(ids_score == ACC_W'(ref_s), $sformatf("frame %0d score %0d vs %0d", k, ids_score, ref_s));
      if (bad) begin
        check(n_done == 0 && n_err == 1, "CRC error frame not delivered");
        repeat (12) bit_time(1'b1);
      end else begin
        check(n_done == 1, "frame delivered");
        check(rx_frame.id == f.id && rx_frame.dlc == f.dlc, "frame header");
        check(done_at_fd, "IDS verdict ready before frame_done");
        check(att_at_fd == (ref_s > 0), "verdict at frame_done");
        check(t_rdy < t_done, "IDS output before frame completion");
        if (int'(t_done - t_rdy) < min_margin) min_margin = int'(t_done - t_rdy);
        if (att_at_fd) n_att++;
        prev = f; have_prev = 1;
      end
    end
    $display("data_en to frame_done %0d clocks; IDS ready at least %0d clocks before frame_done; %0d flagged",
             t_done - t_den, min_margin, n_att);
    // transmit a frame and acknowledge it
    f = rand_frame();
    tx_frame.id = f.id; tx_frame.rtr = f.rtr; tx_frame.dlc = f.dlc;
    for (int i = 0; i < 8; i++) tx_frame.data[i] = f.data[i];
    tx_req = 1;
    begin
      bit b [MAXBITS];
      int n, ack_idx, arb_end, mism;
      frame_bits(f, 1'b0, b, n, ack_idx, arb_end);
      mism = 0;
      bit_time(1'b1);   // start of frame goes out at this tx point
      tx_req = 0;
      for (int i = 1; i < n + 2; i++) begin
        tb_bit <= (i == ack_idx) ? 1'b0 : 1'b1;
        tx_point <= 1'b1;
        @(posedge clk); tx_point <= 1'b0;
        repeat (8) @(posedge clk);
        if (i < n && i != ack_idx && bus != b[i]) mism++;
        sample_point <= 1'b1;
        @(posedge clk); sample_point <= 1'b0;
        repeat (6) @(posedge clk);
      end
      check(mism == 0, $sformatf("transmitted bits (%0d wrong)", mism));
      check(n_txdone == 1, "transmission done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
