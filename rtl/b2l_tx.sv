// b2l_tx: Belle2link transmitter of the unified front-end firmware.
//
// The serial transceiver takes two 8b10b characters (16 bits plus two
// K flags) every system clock, 2.54 Gbps on the line. The transmitter frames
// each fragment as
//   SOF, word0[31:16], word0[15:0], word1[31:16], ..., CRC, EOF
// with idle words (K28.5 K28.5) whenever there is nothing to send. Data
// halves are only sent in one clock of every BW_DIV, which caps the payload
// at 16 bits / BW_DIV per clock: about 1 Gbps for BW_DIV = 2 at 127 MHz.
// The CRC is CRC-16-CCITT over all data halves of the fragment (b2_pkg).
// The link has no back pressure towards the front end.
//
// Interface: a 32-bit valid/ready stream with frag_last on the final word.
// frag_ready is combinational from the state and frag_valid. tx_data/tx_k
// are registered.
//
// From the paper: 8b10b control symbols define the protocol, a CRC protects
// the data, and payload is limited to about 1 Gbps out of 2.54 Gbps raw.
// This design's choice: the symbols, the CRC, the frame layout and the way
// the rate is capped.
module b2l_tx
  import b2_pkg::*;
#(
  parameter int BW_DIV = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        frag_valid,
  input  logic [31:0] frag_data,
  input  logic        frag_last,
  output logic        frag_ready,
  output logic [15:0] tx_data,
  output logic [1:0]  tx_k
);
  typedef enum logic [2:0] {S_IDLE, S_HI, S_LO, S_WAIT, S_CRC, S_EOF} state_t;

  state_t      state;
  logic [31:0] word;
  logic        last;
  logic [15:0] crc;
  logic [$clog2(BW_DIV+1)-1:0] slot;
  logic        go;

  assign go = (slot == '0);

  always_comb begin
    unique case (state)
      S_IDLE, S_WAIT: frag_ready = frag_valid;
      S_LO:           frag_ready = go && !last && frag_valid;
      default:        frag_ready = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      word    <= '0;
      last    <= 1'b0;
      crc     <= CRC_INIT;
      slot    <= '0;
      tx_data <= B2L_IDLE;
      tx_k    <= 2'b11;
    end else begin
      slot    <= (slot == ($bits(slot))'(BW_DIV-1)) ? '0 : slot + 1'b1;
      tx_data <= B2L_IDLE;
      tx_k    <= 2'b11;
      if (frag_ready) begin
        word <= frag_data;
        last <= frag_last;
      end
      unique case (state)
        S_IDLE: if (frag_valid) begin
          tx_data <= B2L_SOF;
          crc     <= CRC_INIT;
          state   <= S_HI;
        end
        S_HI: if (go) begin
          tx_data <= word[31:16];
          tx_k    <= 2'b00;
          crc     <= crc16_step(crc, word[31:16]);
          state   <= S_LO;
        end
        S_LO: if (go) begin
          tx_data <= word[15:0];
          tx_k    <= 2'b00;
          crc     <= crc16_step(crc, word[15:0]);
          if (last)            state <= S_CRC;
          else if (frag_valid) state <= S_HI;
          else                 state <= S_WAIT;
        end
        S_WAIT: if (frag_valid) state <= S_HI;
        S_CRC: if (go) begin
          tx_data <= crc;
          tx_k    <= 2'b00;
          state   <= S_EOF;
        end
        S_EOF: begin
          tx_data <= B2L_EOF;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
