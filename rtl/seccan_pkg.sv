// seccan_pkg: types and constants shared by the SecCAN controller.
//
// The controller handles CAN 2.0A base-format frames (11-bit identifier, up to
// 8 data bytes). A received or transmitted frame is carried between modules as
// a can_frame_t. The IDS sees each message as ten bytes (two identifier bytes
// and eight payload bytes, zero padded) and classifies the current message
// together with the previous one, so its input vector has twenty 8-bit
// features. The MLP shape {64, 32, 1} and the 4-bit weights and activations
// follow the paper; the byte layout of the feature vector is this design's
// choice.
package seccan_pkg;

  // CAN frame fields (base format)
  localparam int unsigned ID_W      = 11;
  localparam int unsigned DLC_W     = 4;
  localparam int unsigned MAX_BYTES = 8;
  localparam int unsigned CRC_W     = 15;
  localparam logic [14:0] CRC_POLY  = 15'h4599;  // x^15+x^14+x^10+x^8+x^7+x^4+x^3+1
  localparam int unsigned EOF_BITS  = 7;
  localparam int unsigned IDLE_BITS = 11;        // recessive bits that mark bus idle
  localparam int unsigned ERR_FLAG_BITS = 6;

  // IDS feature vector
  localparam int unsigned MSG_FEAT_BYTES = 2 + MAX_BYTES;     // ID (2 bytes) + payload
  localparam int unsigned N_FEAT         = 2 * MSG_FEAT_BYTES; // current + previous message

  // Q-IDS MLP shape and number formats
  localparam int unsigned L1_N  = 64;
  localparam int unsigned L2_N  = 32;
  localparam int unsigned L3_N  = 1;
  localparam int unsigned W_W   = 4;   // signed weights
  localparam int unsigned A_W   = 4;   // unsigned activations
  localparam int unsigned B_W   = 16;  // signed bias
  localparam int unsigned ACC_W = 24;  // accumulator width

  typedef struct packed {
    logic [ID_W-1:0]           id;
    logic                      rtr;
    logic [DLC_W-1:0]          dlc;
    logic [MAX_BYTES-1:0][7:0] data;   // data[0] is the first byte on the bus
  } can_frame_t;

  // Frame as stored in the receive buffer: the frame plus the IDS verdict
  typedef struct packed {
    can_frame_t frame;
    logic       ids_valid;   // IDS finished before the frame was stored
    logic       attack;      // IDS verdict: 1 = attack
  } rx_entry_t;

  // Bit timing configuration (all fields hold value-1)
  typedef struct packed {
    logic [7:0] brp;     // prescaler: clocks per time quantum - 1
    logic [3:0] tseg1;   // propagation + phase segment 1, in quanta - 1
    logic [2:0] tseg2;   // phase segment 2, in quanta - 1
    logic [1:0] sjw;     // resynchronisation jump width - 1
  } bit_timing_t;

  // Write port used to load the IDS weights and biases
  typedef struct packed {
    logic       w_we;     // write 8 weights
    logic       b_we;     // write one bias
    logic [1:0] layer;    // 0, 1, 2
    logic [6:0] row;      // input index of the weights
    logic [6:0] col;      // group of 8 neurons (weights) or neuron (bias)
    logic [31:0] data;    // 8 x 4-bit weights (neuron col*8+k in bits 4k+3:4k) or bias
  } ids_wr_t;

  function automatic logic [DLC_W-1:0] data_len(input logic [DLC_W-1:0] dlc, input logic rtr);
    if (rtr) return '0;
    return (dlc > 4'd8) ? 4'd8 : dlc;
  endfunction

endpackage
