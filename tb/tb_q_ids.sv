// tb_q_ids: self-checking test of the quantised MLP accelerator.
// Loads random 4-bit weights and 16-bit biases through the write port, then
// streams random 20-feature vectors (with random gaps between beats) and
// compares the verdict and raw score with an integer reference model of the
// {64, 32, 1} network. It also checks the latency from the first feature to
// ids_output_ready against the paper's bound for hiding the IDS inside the
// CAN reception window: 37.376 us, i.e. 598 clocks at 16 MHz.
module tb_q_ids;
  import seccan_pkg::*;
  import can_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ids_wr_t ids_wr = '0;
  logic s_tvalid = 0, s_tlast = 0, s_tready;
  logic [7:0] s_tdata = 0;
  logic ids_output_ready, attack;
  logic signed [ACC_W-1:0] score;

  q_ids dut (.clk, .rst_n, .ids_wr, .s_tvalid, .s_tready, .s_tdata, .s_tlast,
    .ids_output_ready, .attack, .score);

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
  int b3;

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic wr(input int layer, input int row, input int col, input logic [31:0] d, input bit bias);
    ids_wr.layer = 2'(layer); ids_wr.row = 7'(row); ids_wr.col = 7'(col); ids_wr.data = d;
    ids_wr.w_we = !bias; ids_wr.b_we = bias;
    @(negedge clk);
    ids_wr.w_we = 0; ids_wr.b_we = 0;
  endtask

  task automatic load_row(input int layer, input int row, input int n, input int w []);
    for (int g = 0; g < (n + 7) / 8; g++) begin
      logic [31:0] d;
      d = '0;
      for (int k = 0; k < 8; k++) if (g*8 + k < n) d[4*k +: 4] = 4'(w[g*8 + k]);
      wr(layer, row, g, d, 0);
    end
  endtask

  longint cyc = 0, t_start = 0, lat = 0;
  int n_out = 0;
  always @(posedge clk) begin
    cyc++;
    if (ids_output_ready) begin n_out++; lat = cyc - t_start; end
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x [20];
    int ref_s, n_att;
    int row [];
    int xs [40][20];
    int s0 [40];
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) for (int j = 0; j < 64; j++) w1[i][j] = rnd(-8, 7);
    for (int i = 0; i < 64; i++) for (int j = 0; j < 32; j++) w2[i][j] = rnd(-8, 7);
    for (int i = 0; i < 32; i++) w3[i] = rnd(-8, 7);
    for (int j = 0; j < 64; j++) b1[j] = rnd(-2000, 2000);
    for (int j = 0; j < 32; j++) b2[j] = rnd(-100, 100);
    // test vectors; the output bias is set to the median raw score so that
    // both verdicts occur
    for (int k = 0; k < 40; k++)
      for (int i = 0; i < 20; i++) xs[k][i] = (k % 7 == 0) ? 255 : int'($urandom % 256);
    for (int k = 0; k < 40; k++) begin
      for (int i = 0; i < 20; i++) x[i] = xs[k][i];
      s0[k] = mlp_ref(x, w1, b1, w2, b2, w3, 0, 8, 4);
    end
    s0.sort();
    b3 = -s0[20] + 1;
    row = new[64];
    for (int i = 0; i < 20; i++) begin
      for (int j = 0; j < 64; j++) row[j] = w1[i][j];
      load_row(0, i, 64, row);
    end
    for (int i = 0; i < 64; i++) begin
      for (int j = 0; j < 32; j++) row[j] = w2[i][j];
      load_row(1, i, 32, row);
    end
    for (int i = 0; i < 32; i++) begin
      row[0] = w3[i];
      load_row(2, i, 1, row);
    end
    for (int j = 0; j < 64; j++) wr(0, 0, j, 32'(b1[j]), 1);
    for (int j = 0; j < 32; j++) wr(1, 0, j, 32'(b2[j]), 1);
    wr(2, 0, 0, 32'(b3), 1);

    n_att = 0;
    for (int k = 0; k < 40; k++) begin
      for (int i = 0; i < 20; i++) x[i] = xs[k][i];
      ref_s = mlp_ref(x, w1, b1, w2, b2, w3, b3, 8, 4);
      n_out = 0;
      for (int i = 0; i < 20; i++) begin
        if (k % 2 == 1) repeat ($urandom % 3) @(negedge clk);
        s_tdata = 8'(x[i]); s_tvalid = 1; s_tlast = (i == 19);
        if (i == 0) t_start = cyc;
        do @(negedge clk); while (!s_tready);
        s_tvalid = 0; s_tlast = 0;
      end
      while (n_out == 0) @(negedge clk);
      check(n_out == 1, "one result");
      check(score == ACC_W'(ref_s), $sformatf("vector %0d: score %0d vs %0d", k, score, ref_s));
      check(attack == (ref_s > 0), "verdict");
      check(lat < 598, $sformatf("latency %0d clocks within the 598-clock window", lat));
      if (attack) n_att++;
      repeat (2) @(negedge clk);
    end
    $display("last latency %0d clocks, %0d of 40 flagged", lat, n_att);
    check(n_att > 0 && n_att < 40, "both verdicts seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
