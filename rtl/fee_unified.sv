// fee_unified: the unified firmware shared by every front-end board.
//
// It joins the trigger receiver and fragment builder (fee_readout), the
// Belle2link transmitter (b2l_tx) and the board register file (fee_regs).
// Triggers arrive from the timing distribution (trig_in); the subdetector's
// own digitisation supplies one payload per trigger on pl_*; fragments leave
// on the 16-bit + K transceiver interface (tx_*). The register file sets the
// busy threshold and reports the event count and status. Towards the timing
// distribution the board reports busy, an error (trigger-queue overflow) and
// the SEU-mitigation flag given on seu_err, plus its processed-event count.
// rst_port is the remote reset from the distribution node; it resets the
// board like rst_n.
//
// The division into a common trigger receiver and link transmitter follows
// the paper; the internal interfaces are this design's choice.
module fee_unified
  import b2_pkg::*;
#(
  parameter logic [31:0] BOARD_ID = 32'hB200_0000,
  parameter int          QDEPTH   = 16,
  parameter int          BW_DIV   = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rst_port,
  input  trig_msg_t   trig_in,
  input  logic        seu_err,
  // subdetector payload
  input  logic        pl_valid,
  input  logic [31:0] pl_data,
  input  logic        pl_last,
  output logic        pl_ready,
  // Belle2link
  output logic [15:0] tx_data,
  output logic [1:0]  tx_k,
  // registers, from the HSLB
  input  logic        reg_req,
  input  logic        reg_we,
  input  logic [15:0] reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_ack,
  // status to the timing distribution
  output logic        busy,
  output logic        err,
  output logic        seu,
  output logic [31:0] ev_count
);
  logic        frst_n;
  logic [7:0]  busy_thr;
  logic        fvalid, flast, fready;
  logic [31:0] fdata;

  assign frst_n = rst_n && !rst_port;

  fee_regs #(.BOARD_ID(BOARD_ID)) u_regs (
    .clk, .rst_n(frst_n),
    .req(reg_req), .we(reg_we), .addr(reg_addr), .wdata(reg_wdata),
    .rdata(reg_rdata), .ack(reg_ack),
    .busy_thr, .st_evcount(ev_count), .st_seu(seu_err), .st_busy(busy)
  );

  fee_readout #(.QDEPTH(QDEPTH)) u_rd (
    .clk, .rst_n(frst_n), .trig_in, .busy_thr, .busy, .overflow(err), .ev_count,
    .pl_valid, .pl_data, .pl_last, .pl_ready,
    .frag_valid(fvalid), .frag_data(fdata), .frag_last(flast), .frag_ready(fready)
  );

  b2l_tx #(.BW_DIV(BW_DIV)) u_tx (
    .clk, .rst_n(frst_n),
    .frag_valid(fvalid), .frag_data(fdata), .frag_last(flast), .frag_ready(fready),
    .tx_data, .tx_k
  );

  assign seu = seu_err;

endmodule
