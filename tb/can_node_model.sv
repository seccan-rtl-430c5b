// can_node_model: behavioural CAN node used by the testbenches as the other
// station on the bus. It works on whole bit times of BIT_CLKS clocks and
// samples the bus SAMPLE_AT clocks into each bit.
//   send()         puts a frame on the bus from the next clock, withdrawing on
//                  a lost arbitration; reports whether the ACK slot was
//                  dominant. bad_crc flips the last CRC bit.
//   expect_frame() waits for a start of frame, compares every bit on the bus
//                  with the frame the device should send, and acknowledges it
//                  (drives the ACK slot dominant) when ack is set.
module can_node_model
  import can_tb_pkg::*;
#(
  parameter int BIT_CLKS  = 16,
  parameter int SAMPLE_AT = 10
) (
  input  logic clk,
  input  logic bus,
  output logic tx
);

  initial tx = 1'b1;

  task automatic send(input tb_frame_t f, input bit bad_crc,
                      output bit acked, output bit lost);
    bit b [MAXBITS];
    int n, ack_idx, arb_end;
    frame_bits(f, bad_crc, b, n, ack_idx, arb_end);
    acked = 1'b0;
    lost  = 1'b0;
    for (int i = 0; i < n; i++) begin
      tx <= b[i];
      repeat (SAMPLE_AT) @(posedge clk);
      if (i == ack_idx) acked = (bus == 1'b0);
      if (i < arb_end && b[i] && !bus) begin
        lost = 1'b1;
        tx <= 1'b1;
        repeat (BIT_CLKS - SAMPLE_AT) @(posedge clk);
        break;
      end
      repeat (BIT_CLKS - SAMPLE_AT) @(posedge clk);
    end
    tx <= 1'b1;
  endtask

  task automatic expect_frame(input tb_frame_t f, input bit ack, output int errors);
    bit b [MAXBITS];
    int n, ack_idx, arb_end;
    frame_bits(f, 1'b0, b, n, ack_idx, arb_end);
    errors = 0;
    @(negedge bus);
    for (int i = 0; i < n; i++) begin
      // one assignment per bit: the acknowledge bit, otherwise recessive
      tx <= !(i == ack_idx && ack);
      repeat (SAMPLE_AT) @(posedge clk);
      if (i != ack_idx && bus != b[i]) errors++;
      repeat (BIT_CLKS - SAMPLE_AT) @(posedge clk);
    end
    tx <= 1'b1;
  endtask

endmodule
