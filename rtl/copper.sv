// copper: one COPPER readout module with up to four HSLB link receivers.
//
// Each unmasked link has an HSLB receiver (protocol and CRC check) writing
// into its own threshold FIFO. The combiner waits until every unmasked FIFO
// holds a complete fragment and sends them out as one event record towards
// the processor (out_*). The trigger card reports to the timing distribution:
//   busy      any unmasked FIFO holds more than thr words (back pressure)
//   err       a link error on an unmasked link, a FIFO overflow or an event
//             number mismatch between links
//   ev_count  event records sent
// clr clears the sticky link errors and the event-number mismatch. All status outputs are registered in
// the sub-blocks; the record stream moves one word per clock.
//
// From the paper: four HSLB links per COPPER, the FIFO with a programmable
// threshold and back pressure, and event combining. The processor, DMA and
// network side are outside this module.
module copper #(
  parameter int NLINK = 4,
  parameter int DEPTH = 16384,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic [NLINK-1:0]        link_mask,
  input  logic [AW:0]             thr,
  input  logic [NLINK-1:0][15:0]  rx_data,
  input  logic [NLINK-1:0][1:0]   rx_k,
  output logic                    out_valid,
  output logic [31:0]             out_data,
  output logic                    out_last,
  output logic                    out_err,
  input  logic                    out_ready,
  output logic                    busy,
  output logic                    err,
  output logic [31:0]             ev_count,
  output logic [NLINK-1:0]        link_err,
  output logic [NLINK-1:0]        fifo_over_thr
);
  logic [NLINK-1:0]        wr_en, wr_last, wr_err, rd_en, empty, ovf;
  logic [NLINK-1:0][31:0]  wr_data;
  logic [NLINK-1:0][33:0]  rd_data;
  logic [NLINK-1:0][AW:0]  nfrag, count;
  logic                    mismatch;

  for (genvar i = 0; i < NLINK; i++) begin : g_link
    hslb_rx u_rx (
      .clk, .rst_n, .clr,
      .rx_data(rx_data[i]), .rx_k(rx_k[i]),
      .wr_en(wr_en[i]), .wr_data(wr_data[i]), .wr_last(wr_last[i]), .wr_err(wr_err[i]),
      .link_err(link_err[i]),
      .nfrag(), .n_crc_err(), .n_sym_err()
    );
    copper_fifo #(.DEPTH(DEPTH), .W(34)) u_fifo (
      .clk, .rst_n,
      .wr_en(wr_en[i] && !link_mask[i]), .wr_data({wr_last[i], wr_err[i], wr_data[i]}),
      .rd_en(rd_en[i]), .rd_data(rd_data[i]), .empty(empty[i]),
      .thr, .over_thr(fifo_over_thr[i]), .overflow(ovf[i]),
      .count(count[i]), .nfrag(nfrag[i])
    );
  end

  copper_combiner #(.NLINK(NLINK), .CW(AW+1)) u_comb (
    .clk, .rst_n, .clr, .link_mask,
    .rd_data, .empty, .nfrag, .rd_en,
    .out_valid, .out_data, .out_last, .out_err, .out_ready,
    .mismatch, .ev_count
  );

  assign busy = |(fifo_over_thr & ~link_mask);
  assign err  = |((link_err | ovf) & ~link_mask) || mismatch;

endmodule
