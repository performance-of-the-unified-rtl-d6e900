// b2_pkg: types and constants shared by the unified readout blocks.
//
// The trigger message is what the timing distribution tree hands to every
// front-end board and COPPER for each accepted level-1 trigger: an event
// number, a 59-bit timestamp and a trigger type. The 59-bit timestamp width
// follows the paper; the 32-bit event number and 4-bit trigger type are this
// design's choice.
//
// The Belle2link constants describe the 16-bit (two 8b10b characters per
// system clock) user interface of the serial transceiver. Which control
// characters frame a fragment and which CRC protects it are not published;
// this design uses K28.5 for idle, K28.0 for start of frame and K28.7 for end
// of frame, and CRC-16-CCITT (x^16+x^12+x^5+1, initial value 0xFFFF, MSB
// first, over the 16-bit halves between the start and the CRC word).
package b2_pkg;

  localparam int TS_W = 59;  // timestamp width
  localparam int EV_W = 32;  // event number width
  localparam int TT_W = 4;   // trigger type width

  typedef struct packed {
    logic            valid;
    logic [EV_W-1:0] evnum;
    logic [TS_W-1:0] ts;
    logic [TT_W-1:0] ttype;
  } trig_msg_t;

  // 8b10b control characters (byte values with the K flag set)
  localparam logic [7:0] K28_0 = 8'h1C;
  localparam logic [7:0] K28_5 = 8'hBC;
  localparam logic [7:0] K28_7 = 8'hFC;

  // Belle2link control words: both bytes of the 16-bit word are K characters
  localparam logic [15:0] B2L_IDLE = {K28_5, K28_5};
  localparam logic [15:0] B2L_SOF  = {K28_0, K28_5};
  localparam logic [15:0] B2L_EOF  = {K28_7, K28_5};

  localparam logic [15:0] CRC_INIT = 16'hFFFF;

  // One step of CRC-16-CCITT over a 16-bit half word, MSB first.
  function automatic logic [15:0] crc16_step(input logic [15:0] crc, input logic [15:0] d);
    logic [15:0] c;
    c = crc;
    for (int i = 15; i >= 0; i--) begin
      if (c[15] ^ d[i]) c = {c[14:0], 1'b0} ^ 16'h1021;
      else              c = {c[14:0], 1'b0};
    end
    return c;
  endfunction

  // Fragment header layout (32-bit words) written by the front end
  //   word 0: event number
  //   word 1: {1b0, trigger type[3:0], trigger timestamp[58:32]}
  //   word 2: trigger timestamp[31:0]
  //   word 3: local timestamp[31:0] at the start of the data transfer
  localparam int HDR_WORDS = 4;

endpackage
