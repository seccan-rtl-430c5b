// qmlp_layer: one fully connected layer of the quantised MLP.
//
// All N_OUT neurons work in parallel (the layer is unrolled across neurons);
// the N_IN inputs arrive one per clock on a valid/ready stream. For input i
// every neuron j adds W[i][j] * x_i to its accumulator, W being 4-bit signed
// and x unsigned IN_W-bit. The clock after the input flagged last, the layer
// adds the biases and presents its result for one clock (out_valid):
//   out_sum[j] = bias[j] + sum_i W[i][j] * x_i           (signed, ACC_W bits)
//   out_act[j] = min(max(out_sum[j] >>> SHIFT, 0), 15)    (4-bit ReLU output)
// The weights sit in a distributed memory with one row of N_OUT weights per
// input; it is written eight weights at a time (row, group of 8 neurons) and
// read one row per clock. Biases are written one neuron at a time.
//
// The paper gives 4-bit weights and activations, ReLU activations and the
// unrolled dataflow style; the accumulate-then-shift requantisation (standing
// in for the folded batch-norm thresholds of the trained model) and the
// bias width are this design's choices.
module qmlp_layer
  import seccan_pkg::*;
#(
  parameter int unsigned N_IN  = 20,
  parameter int unsigned N_OUT = 64,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned SHIFT = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weight and bias write port
  input  logic                 w_we,
  input  logic                 b_we,
  input  logic [6:0]           wr_row,
  input  logic [6:0]           wr_col,
  input  logic [31:0]          wr_data,
  // input stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [IN_W-1:0]      in_data,
  input  logic                 in_last,
  // result
  output logic                 out_valid,
  output logic signed [ACC_W-1:0] out_sum [N_OUT],
  output logic [A_W-1:0]       out_act [N_OUT]
);

  logic signed [W_W-1:0]   wmem [N_IN][N_OUT];
  logic signed [B_W-1:0]   bias [N_OUT];
  logic signed [ACC_W-1:0] acc  [N_OUT];
  logic [$clog2(N_IN+1)-1:0] idx;
  logic                    finish;

  // index widths of the weight and bias arrays
  localparam int unsigned RW = (N_IN  > 1) ? $clog2(N_IN)  : 1;
  localparam int unsigned OW = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  assign in_ready = !finish;

  // weight and bias writes
  always_ff @(posedge clk) begin
    if (w_we && 32'(wr_row) < N_IN) begin
      for (int k = 0; k < 8; k++) begin
        if (32'(wr_col) * 8 + k < N_OUT)
          wmem[RW'(wr_row)][OW'(32'(wr_col) * 8 + k)] <= wr_data[4*k +: 4];
      end
    end
    if (b_we && 32'(wr_col) < N_OUT) bias[OW'(wr_col)] <= wr_data[B_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      finish    <= 1'b0;
      out_valid <= 1'b0;
      for (int j = 0; j < N_OUT; j++) begin
        acc[j]     <= '0;
        out_sum[j] <= '0;
        out_act[j] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (finish) begin
        finish    <= 1'b0;
        out_valid <= 1'b1;
        idx       <= '0;
        for (int j = 0; j < N_OUT; j++) begin
          logic signed [ACC_W-1:0] s, q;
          s = acc[j] + ACC_W'(bias[j]);
          q = s >>> SHIFT;
          out_sum[j] <= s;
          out_act[j] <= (q < 0) ? '0 : (q > 15) ? 4'd15 : q[A_W-1:0];
          acc[j]     <= '0;
        end
      end else if (in_valid) begin
        for (int j = 0; j < N_OUT; j++)
          acc[j] <= acc[j] + ACC_W'($signed({1'b0, in_data}) * wmem[RW'(idx)][j]);
        idx <= idx + 1'b1;
        if (in_last || 32'(idx) == N_IN - 1) finish <= 1'b1;
      end
    end
  end

endmodule
