// ids_control: IDS control logic of the datapath extension (REG and Counter).
//
// REG: header_detector from the receive path sets ids_en, which stays high
// until the frame completes (frame_done) or the receiver reports an error.
// While ids_en is low the feature collection logic ignores bytes.
// Counter: cleared by header_detector, it counts write_flag pulses, i.e. the
// data bytes written to the Rx data registers. Once the DLC field has been
// decoded (dlc_valid) and the count equals the frame's data length, data_en
// pulses for one clock: the identifier and payload are then in the feature
// collector's FIFO and the IDS can start. For remote frames and DLC 0 the
// data length is 0, so data_en follows the DLC field directly; DLC values 9
// to 15 mean eight bytes.
//
// Structure and signal names follow the paper's figure of the IDS
// integration; the error clearing and the enable bit (ids_on) are this
// design's own.
module ids_control
  import seccan_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ids_on,          // IDS enabled by configuration
  input  logic             header_detector,
  input  logic             write_flag,
  input  logic             dlc_valid,
  input  logic [DLC_W-1:0] dlc,
  input  logic             rtr,
  input  logic             frame_done,
  input  logic             rx_error,
  output logic             ids_en,
  output logic             data_en,
  output logic [3:0]       byte_count
);

  logic fired;   // data_en already given for this frame

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ids_en     <= 1'b0;
      data_en    <= 1'b0;
      byte_count <= '0;
      fired      <= 1'b0;
    end else begin
      data_en <= 1'b0;
      if (header_detector) begin
        ids_en     <= ids_on;
        byte_count <= '0;
        fired      <= 1'b0;
      end else if (frame_done || rx_error) begin
        ids_en <= 1'b0;
      end else if (ids_en) begin
        if (write_flag) byte_count <= byte_count + 4'd1;
        if (dlc_valid && !fired && !write_flag && byte_count == data_len(dlc, rtr)) begin
          data_en <= 1'b1;
          fired   <= 1'b1;
        end
      end
    end
  end

endmodule
