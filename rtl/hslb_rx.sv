// hslb_rx: Belle2link receiver of the HSLB card.
//
// Takes the 16-bit + 2 K-flag words from the serial transceiver, checks the
// link protocol and writes each fragment into the COPPER FIFO as 32-bit words.
// Two kinds of fault are link errors:
//   - a bad control symbol: a K flag on a word that is not idle, SOF or EOF
//     (including a half-K word), a SOF inside a frame, an EOF outside a frame,
//     or data outside a frame;
//   - a CRC mismatch: the half word before EOF does not equal the
//     CRC-16-CCITT of the data halves before it.
// Either sets the sticky link_err (cleared by clr) and marks the fragment's
// last word with err.
//
// Words are written one word behind the link: the word just assembled is held
// until the next one completes or EOF arrives, so the last word can carry
// wr_last and the CRC verdict. A SOF inside a frame closes the open fragment
// with err set and starts a new one. Outputs are registered; the write comes
// at most a few clocks after the half words that make it.
//
// From the paper: the fragment is checked for errors and copied into the
// COPPER FIFO, and bad control symbols and CRC errors are link errors. This
// design's choice: the framing (see b2l_tx) and the one-word-behind write.
module hslb_rx
  import b2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic [15:0] rx_data,
  input  logic [1:0]  rx_k,
  output logic        wr_en,
  output logic [31:0] wr_data,
  output logic        wr_last,
  output logic        wr_err,
  output logic        link_err,
  output logic [31:0] nfrag,
  output logic [15:0] n_crc_err,
  output logic [15:0] n_sym_err
);
  logic        in_frame, phase, pend_valid, frame_err;
  logic [15:0] hi_buf, crc;
  logic [31:0] pend;
  logic        is_idle, is_sof, is_eof, is_data, bad_k;

  always_comb begin
    is_idle = (rx_k == 2'b11) && (rx_data == B2L_IDLE);
    is_sof  = (rx_k == 2'b11) && (rx_data == B2L_SOF);
    is_eof  = (rx_k == 2'b11) && (rx_data == B2L_EOF);
    is_data = (rx_k == 2'b00);
    bad_k   = !(is_idle || is_sof || is_eof || is_data);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame   <= 1'b0;
      phase      <= 1'b0;
      pend_valid <= 1'b0;
      frame_err  <= 1'b0;
      hi_buf     <= '0;
      crc        <= CRC_INIT;
      pend       <= '0;
      wr_en      <= 1'b0;
      wr_data    <= '0;
      wr_last    <= 1'b0;
      wr_err     <= 1'b0;
      link_err   <= 1'b0;
      nfrag      <= '0;
      n_crc_err  <= '0;
      n_sym_err  <= '0;
    end else begin
      wr_en   <= 1'b0;
      wr_last <= 1'b0;
      wr_err  <= 1'b0;
      if (clr) link_err <= 1'b0;

      if (bad_k || (is_sof && in_frame) || (is_eof && !in_frame) || (is_data && !in_frame)) begin
        link_err  <= 1'b1;
        n_sym_err <= n_sym_err + 1'b1;
      end

      if (is_sof) begin
        if (in_frame && pend_valid) begin   // close the broken fragment
          wr_en   <= 1'b1;
          wr_data <= pend;
          wr_last <= 1'b1;
          wr_err  <= 1'b1;
          nfrag   <= nfrag + 1'b1;
        end
        in_frame   <= 1'b1;
        phase      <= 1'b0;
        pend_valid <= 1'b0;
        frame_err  <= 1'b0;
        crc        <= CRC_INIT;
      end else if (in_frame && bad_k) begin
        frame_err <= 1'b1;
      end else if (in_frame && is_data) begin
        if (!phase) begin
          hi_buf <= rx_data;
          phase  <= 1'b1;
        end else begin
          phase      <= 1'b0;
          crc        <= crc16_step(crc16_step(crc, hi_buf), rx_data);
          pend       <= {hi_buf, rx_data};
          pend_valid <= 1'b1;
          if (pend_valid) begin
            wr_en   <= 1'b1;
            wr_data <= pend;
          end
        end
      end else if (in_frame && is_eof) begin
        in_frame <= 1'b0;
        if (pend_valid) begin
          wr_en   <= 1'b1;
          wr_data <= pend;
          wr_last <= 1'b1;
          wr_err  <= frame_err || !phase || (crc != hi_buf);
          nfrag   <= nfrag + 1'b1;
        end
        if (!phase || !pend_valid || crc != hi_buf) begin
          link_err  <= 1'b1;
          n_crc_err <= n_crc_err + 1'b1;
        end
        pend_valid <= 1'b0;
      end
    end
  end

endmodule
