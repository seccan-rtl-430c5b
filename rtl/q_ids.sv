// q_ids: quantised MLP intrusion detection accelerator (Q-IDS).
//
// A three-layer perceptron with {64, 32, 1} neurons, 4-bit signed weights and
// 4-bit unsigned ReLU activations, built as a dataflow chain:
//   AXI4-Stream in (20 x 8-bit features, tlast on the last)
//     -> layer 1 (20 -> 64) -> serializer -> layer 2 (64 -> 32)
//     -> serializer -> layer 3 (32 -> 1) -> verdict
// Each layer computes all its neurons in parallel and takes one input per
// clock, so an inference takes 20 + 64 + 32 input clocks plus pipeline and
// handshake overhead: 123 clocks (7.7 us at 16 MHz) from data_en in the
// full controller, well inside the CAN reception window that follows the last
// data byte. The output neuron's sigmoid is replaced by
// its equivalent decision: attack when the layer-3 sum is above zero
// (sigmoid > 0.5). ids_output_ready pulses for one clock with the verdict and
// the raw score.
//
// Weights and biases are not fixed in hardware: they are loaded through the
// ids_wr port (from the host, via the configuration registers), so a trained
// model can be dropped in. The layer sizes, bit widths and the AXI-Stream
// input follow the paper; the shift requantisation (L1_SHIFT, L2_SHIFT) and
// the loading port are this design's choices, as the paper does not publish
// the trained model. The hidden layers' raw sums and the output layer's
// activation are not needed and are left unconnected.
module q_ids
  import seccan_pkg::*;
#(
  parameter int unsigned L1_SHIFT = 8,
  parameter int unsigned L2_SHIFT = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  ids_wr_t                 ids_wr,
  input  logic                    s_tvalid,
  output logic                    s_tready,
  input  logic [7:0]              s_tdata,
  input  logic                    s_tlast,
  output logic                    ids_output_ready,
  output logic                    attack,
  output logic signed [ACC_W-1:0] score
);

  logic                    l1_valid, l2_valid, l3_valid;
  logic signed [ACC_W-1:0] l1_sum [L1_N];
  logic signed [ACC_W-1:0] l2_sum [L2_N];
  logic signed [ACC_W-1:0] l3_sum [L3_N];
  logic [A_W-1:0]          l1_act [L1_N];
  logic [A_W-1:0]          l2_act [L2_N];
  logic [A_W-1:0]          l3_act [L3_N];

  logic          s1_valid, s1_ready, s1_last, s2_valid, s2_ready, s2_last;
  logic [A_W-1:0] s1_data, s2_data;

  qmlp_layer #(.N_IN(N_FEAT), .N_OUT(L1_N), .IN_W(8), .SHIFT(L1_SHIFT)) u_l1 (
    .clk, .rst_n,
    .w_we(ids_wr.w_we && ids_wr.layer == 2'd0), .b_we(ids_wr.b_we && ids_wr.layer == 2'd0),
    .wr_row(ids_wr.row), .wr_col(ids_wr.col), .wr_data(ids_wr.data),
    .in_valid(s_tvalid), .in_ready(s_tready), .in_data(s_tdata), .in_last(s_tlast),
    .out_valid(l1_valid), .out_sum(l1_sum), .out_act(l1_act));

  vec_serializer #(.N(L1_N), .W(A_W)) u_s1 (
    .clk, .rst_n, .load(l1_valid), .vec(l1_act),
    .out_valid(s1_valid), .out_ready(s1_ready), .out_data(s1_data), .out_last(s1_last));

  qmlp_layer #(.N_IN(L1_N), .N_OUT(L2_N), .IN_W(A_W), .SHIFT(L2_SHIFT)) u_l2 (
    .clk, .rst_n,
    .w_we(ids_wr.w_we && ids_wr.layer == 2'd1), .b_we(ids_wr.b_we && ids_wr.layer == 2'd1),
    .wr_row(ids_wr.row), .wr_col(ids_wr.col), .wr_data(ids_wr.data),
    .in_valid(s1_valid), .in_ready(s1_ready), .in_data(s1_data), .in_last(s1_last),
    .out_valid(l2_valid), .out_sum(l2_sum), .out_act(l2_act));

  vec_serializer #(.N(L2_N), .W(A_W)) u_s2 (
    .clk, .rst_n, .load(l2_valid), .vec(l2_act),
    .out_valid(s2_valid), .out_ready(s2_ready), .out_data(s2_data), .out_last(s2_last));

  qmlp_layer #(.N_IN(L2_N), .N_OUT(L3_N), .IN_W(A_W), .SHIFT(0)) u_l3 (
    .clk, .rst_n,
    .w_we(ids_wr.w_we && ids_wr.layer == 2'd2), .b_we(ids_wr.b_we && ids_wr.layer == 2'd2),
    .wr_row(ids_wr.row), .wr_col(ids_wr.col), .wr_data(ids_wr.data),
    .in_valid(s2_valid), .in_ready(s2_ready), .in_data(s2_data), .in_last(s2_last),
    .out_valid(l3_valid), .out_sum(l3_sum), .out_act(l3_act));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ids_output_ready <= 1'b0;
      attack           <= 1'b0;
      score            <= '0;
    end else begin
      ids_output_ready <= l3_valid;
      if (l3_valid) begin
        attack <= (l3_sum[0] > 0);
        score  <= l3_sum[0];
      end
    end
  end

endmodule
