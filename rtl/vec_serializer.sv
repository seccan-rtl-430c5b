// vec_serializer: turns a layer's parallel activation vector into a stream.
//
// On load it captures the N-element vector and then offers element 0, 1, ...
// N-1 on a valid/ready stream, one per clock while ready is high, with last
// on element N-1. A load while a vector is still being sent is ignored (the
// Q-IDS never does this: each layer finishes long before the next vector).
// This is the inter-layer link of the dataflow accelerator; its form is this
// design's choice.
module vec_serializer #(
  parameter int unsigned N = 64,
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] vec [N],
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         out_last
);

  logic [W-1:0]            hold [N];
  logic [$clog2(N+1)-1:0]  idx;
  logic                    busy;

  assign out_valid = busy;
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  assign out_data  = hold[IW'(idx)];
  assign out_last  = busy && (32'(idx) == N - 1);

  always_ff @(posedge clk) begin
    if (load && !busy) hold <= vec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
    end else if (load && !busy) begin
      busy <= 1'b1;
      idx  <= '0;
    end else if (busy && out_ready) begin
      idx <= idx + 1'b1;
      if (out_last) busy <= 1'b0;
    end
  end

endmodule
