// tb_seccan_traffic: replays in-vehicle style traffic through the complete
// controller at its default parameters (1 Mbit/s, 16 MHz), the way attack
// datasets are replayed onto the bus:
//   - a DoS segment: normal traffic from a small set of periodic identifiers
//     interleaved with floods of identifier 0x000 carrying eight zero bytes
//   - a fuzzing segment: normal traffic mixed with frames of random
//     identifier, length and payload
// Frames follow each other with the minimum three-bit intermission, so the
// IDS must finish each inference while the next frames keep arriving. A host
// process drains the receive buffer concurrently and checks every frame and
// its appended verdict against the reference model. For every frame the
// testbench measures data_en -> ids_output_ready and checks it against the
// 598-clock (37.376 us) budget and that the verdict precedes frame_done.
// The model weights are random (the trained ones are not available), so the
// check is bit-exactness and timing, not detection accuracy.
module tb_seccan_traffic;
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

  localparam int NF = 48;           // frames per run: 24 DoS segment + 24 fuzzing segment
  localparam int BUDGET = 598;      // 37.376 us at 16 MHz

  // per-frame timing monitor
  longint cyc = 0, t_den = 0;
  int lat_max = 0, n_lat = 0, n_late = 0, n_ready_before = 0, n_store = 0;
  bit rdy_seen = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.data_en) begin t_den = cyc; rdy_seen = 0; end
    if (rst_n && dut.ids_output_ready) begin
      n_lat++;
      rdy_seen = 1;
      if (int'(cyc - t_den) > lat_max) lat_max = int'(cyc - t_den);
      if (cyc - t_den >= BUDGET) n_late++;
    end
    if (rst_n && dut.rx_store) begin
      n_store++;
      if (rdy_seen && dut.rx_entry.ids_valid) n_ready_before++;
    end
  end

  int m_dos = 0, m_fuzz = 0, m_attack = 0, m_benign = 0;

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
  task automatic read_check(input tb_frame_t f, input bit att, input string tag);
    logic [31:0] d, d0, d1, dl;
    axi_read(8'h30, d);
    axi_read(8'h34, dl);
    axi_read(8'h38, d0);
    axi_read(8'h3C, d1);
    check(d[10:0] == f.id && d[16] == f.rtr && dl[3:0] == f.dlc, $sformatf("%s: header %h", tag, d));
    for (int i = 0; i < dlen(f); i++)
      check(((i < 4) ? d0[8*i +: 8] : d1[8*(i-4) +: 8]) == f.data[i], {tag, ": data"});
    check(d[24], {tag, ": IDS valid"});
    check(d[25] == att, $sformatf("%s: IDS verdict", tag));
    if (d[25]) m_attack++; else m_benign++;
    axi_write(8'h00, 32'h203);
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // normal traffic: a few periodic identifiers with slowly changing payloads
  function automatic tb_frame_t normal_frame(input int k);
    tb_frame_t f;
    logic [10:0] ids [6] = '{11'h316, 11'h18F, 11'h260, 11'h2A0, 11'h329, 11'h545};
    f.id  = ids[k % 6];
    f.rtr = 1'b0;
    f.dlc = 4'd8;
    for (int i = 0; i < 8; i++) f.data[i] = 8'((k / 6) * (i + 1) + i * 17);
    return f;
  endfunction

  initial begin
    tb_frame_t fr [NF];
    tb_frame_t prev;
    bit have_prev, acked, lost;
    bit exp_att [NF];
    int x [20];
    int s0 [NF];
    int row [];
    int ref_s;
    logic [31:0] d;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- traffic: DoS segment then fuzzing segment
    for (int k = 0; k < NF; k++) begin
      if (k < NF / 2) begin
        if (k % 3 == 2) begin
          fr[k].id = 11'h000; fr[k].rtr = 0; fr[k].dlc = 4'd8;
          for (int i = 0; i < 8; i++) fr[k].data[i] = 8'h00;
        end else fr[k] = normal_frame(k);
      end else begin
        if (k % 2 == 1) begin
          fr[k] = rand_frame(); fr[k].rtr = 0;
        end else fr[k] = normal_frame(k);
      end
    end

    // ---- model: random weights; output bias at the median of the test scores
    gen_model(w1, b1, w2, b2, w3);
    have_prev = 0; prev = fr[0];
    for (int k = 0; k < NF; k++) begin
      feat_vec(fr[k], prev, have_prev, x);
      s0[k] = mlp_ref(x, w1, b1, w2, b2, w3, 0, 8, 4);
      prev = fr[k]; have_prev = 1;
    end
    s0.sort();
    b3 = -s0[NF / 2] + 1;
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

    have_prev = 0; prev = fr[0];
    for (int k = 0; k < NF; k++) begin
      feat_vec(fr[k], prev, have_prev, x);
      exp_att[k] = mlp_ref(x, w1, b1, w2, b2, w3, b3, 8, 4) > 0;
      prev = fr[k]; have_prev = 1;
    end

    fork
      // bus side: frames back to back, three recessive bits between them
      for (int k = 0; k < NF; k++) begin
        u_node.send(fr[k], 1'b0, acked, lost);
        check(acked && !lost, $sformatf("frame %0d acknowledged", k));
        if (k < NF / 2 && fr[k].id == 11'h000) m_dos++;
        if (k >= NF / 2 && k % 2 == 1) m_fuzz++;
        idle_bits(3);
      end
      // host side: drain the receive buffer as frames arrive
      for (int k = 0; k < NF; k++) begin
        d = 0;
        while (!d[0]) axi_read(8'h04, d);
        read_check(fr[k], exp_att[k], $sformatf("frame %0d", k));
      end
    join

    idle_bits(4);
    axi_read(8'h04, d);
    check(!d[4], "no receive overrun at line rate");
    check(n_lat == NF, $sformatf("one inference per frame (%0d)", n_lat));
    check(n_late == 0, "every inference within the 598-clock window");
    check(n_ready_before == NF, "every verdict ready before the frame was stored");
    check(n_store == NF, "every frame stored");
    check(m_dos > 0 && m_fuzz > 0, "both attack segments replayed");
    check(m_attack > 0 && m_benign > 0, "both verdicts seen");
    $display("frames=%0d dos=%0d fuzz=%0d attack=%0d benign=%0d max IDS latency=%0d clocks (budget %0d)",
             NF, m_dos, m_fuzz, m_attack, m_benign, lat_max, BUDGET);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
