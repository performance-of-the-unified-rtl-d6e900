// b2_readout_top: one slice of the unified readout, from the level-1 trigger
// to event records leaving the COPPERs.
//
// Trigger path: the trigger master gates each level-1 request (run state,
// collected busy, injection veto, minimum interval, SVD buffer emulation)
// and sends the accepted trigger with event number, timestamp and type to a
// 20-port distribution node, which passes it to NFEE front-end boards.
// Data path: each board builds a fragment for every trigger and sends it over
// its Belle2link to one HSLB receiver; NLINK links end on one COPPER, which
// checks, buffers and combines them into an event record (out_*).
// Back-pressure path: a board whose trigger queue reaches its threshold, or a
// COPPER whose FIFO passes fifo_thr, raises busy; the front-end distribution
// node and a second node that collects the COPPERs' status OR it towards the
// master, which then pauses triggers. A link error anywhere stops the run.
//
// The serial links themselves are not built: the trigger message and status
// travel as parallel signals, and each Belle2link is a direct connection with
// an XOR input (link_noise: {k flags, data}) that lets a test corrupt it. The
// HSLB register access reaches the board chosen by reg_sel directly. The
// subdetector digitisation is outside: its payloads enter on pl_*.
module b2_readout_top
  import b2_pkg::*;
#(
  parameter int NFEE  = 20,
  parameter int NLINK = 4,
  parameter int DEPTH = 16384,
  localparam int NCOP = (NFEE + NLINK - 1) / NLINK,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // trigger system and run control
  input  logic                    l1_trig,
  input  logic [TT_W-1:0]         l1_type,
  input  logic                    inj,
  input  logic                    run_start,
  input  logic                    run_stop,
  // configuration
  input  logic [15:0]             min_interval,
  input  logic [23:0]             veto_short,
  input  logic [23:0]             veto_long,
  input  logic [10:0]             veto_near,
  input  logic [3:0]              svd_depth,
  input  logic [15:0]             svd_read_clk,
  input  logic [NFEE-1:0]         fee_mask,
  input  logic [NFEE-1:0]         fee_rst_req,
  input  logic [NCOP-1:0]         cop_mask,
  input  logic                    cop_clr,
  input  logic [AW:0]             fifo_thr,
  // subdetector payload, one stream per board
  input  logic [NFEE-1:0]         pl_valid,
  input  logic [NFEE-1:0][31:0]   pl_data,
  input  logic [NFEE-1:0]         pl_last,
  output logic [NFEE-1:0]         pl_ready,
  input  logic [NFEE-1:0]         seu_err,
  // error injection on each Belle2link: {k[1:0], data[15:0]} XOR mask
  input  logic [NFEE-1:0][17:0]   link_noise,
  // register access through the HSLB
  input  logic [$clog2(NFEE+1)-1:0] reg_sel,
  input  logic                    reg_req,
  input  logic                    reg_we,
  input  logic [15:0]             reg_addr,
  input  logic [31:0]             reg_wdata,
  output logic [31:0]             reg_rdata,
  output logic                    reg_ack,
  // event records
  output logic [NCOP-1:0]         out_valid,
  output logic [NCOP-1:0][31:0]   out_data,
  output logic [NCOP-1:0]         out_last,
  output logic [NCOP-1:0]         out_err,
  input  logic [NCOP-1:0]         out_ready,
  // status
  output trig_msg_t               trig_dist,
  output logic                    running,
  output logic                    err_stop,
  output logic [EV_W-1:0]         ev_count,
  output logic [31:0]             drop_count,
  output logic [31:0]             dead_clks,
  output logic                    busy_fee,
  output logic                    busy_cop,
  output logic                    seu_any,
  output logic [EV_W-1:0]         fee_evcnt_min,
  output logic [EV_W-1:0]         cop_evcnt_min
);
  trig_msg_t                    mtrig;
  trig_msg_t [NFEE-1:0]         ftrig;
  logic      [NFEE-1:0]         prst, fbusy, ferr, fseu;
  logic      [NFEE-1:0][31:0]   fevcnt;
  logic      [NFEE-1:0][15:0]   tx_data;
  logic      [NFEE-1:0][1:0]    tx_k;
  logic      [NFEE-1:0][31:0]   rrdata;
  logic      [NFEE-1:0]         rack;
  logic                         err_fee, err_cop;
  logic      [NCOP-1:0]         cbusy, cerr;
  logic      [NCOP-1:0][31:0]   cevcnt;

  // padded link arrays so the last COPPER may have unused links
  logic [NCOP*NLINK-1:0][15:0]  rx_data;
  logic [NCOP*NLINK-1:0][1:0]   rx_k;
  logic [NCOP*NLINK-1:0]        lmask;

  trig_master #(.NSUM(2)) u_master (
    .clk, .rst_n, .l1_trig, .l1_type, .inj, .run_start, .run_stop,
    .min_interval, .veto_short, .veto_long, .veto_near, .svd_depth, .svd_read_clk,
    .sum_busy({busy_cop, busy_fee}), .sum_err({err_cop, err_fee}),
    .trig_out(mtrig), .running, .ev_count, .drop_count, .dead_clks, .err_stop,
    .timestamp(), .svd_occ()
  );

  assign trig_dist = mtrig;

  // front-end side distribution node
  ftsw_dist #(.NPORT(NFEE)) u_dist_fee (
    .clk, .rst_n, .trig_in(mtrig), .mask(fee_mask), .rst_req(fee_rst_req),
    .trig_out(ftrig), .p_rst(prst),
    .p_busy(fbusy), .p_err(ferr), .p_seu(fseu), .p_evcnt(fevcnt),
    .s_busy(busy_fee), .s_err(err_fee), .s_seu(seu_any), .s_evcnt(fee_evcnt_min)
  );

  for (genvar i = 0; i < NFEE; i++) begin : g_fee
    fee_unified #(.BOARD_ID(32'hB200_0000 | 32'(i))) u_fee (
      .clk, .rst_n, .rst_port(prst[i]), .trig_in(ftrig[i]), .seu_err(seu_err[i]),
      .pl_valid(pl_valid[i]), .pl_data(pl_data[i]), .pl_last(pl_last[i]), .pl_ready(pl_ready[i]),
      .tx_data(tx_data[i]), .tx_k(tx_k[i]),
      .reg_req(reg_req && reg_sel == ($bits(reg_sel))'(i)), .reg_we, .reg_addr, .reg_wdata,
      .reg_rdata(rrdata[i]), .reg_ack(rack[i]),
      .busy(fbusy[i]), .err(ferr[i]), .seu(fseu[i]), .ev_count(fevcnt[i])
    );
  end

  always_comb begin
    reg_rdata = '0;
    reg_ack   = 1'b0;
    for (int i = 0; i < NFEE; i++) begin
      if (rack[i]) begin
        reg_rdata = rrdata[i];
        reg_ack   = 1'b1;
      end
    end
  end

  // Belle2link: board i ends on link i % NLINK of COPPER i / NLINK
  always_comb begin
    rx_data = '0;
    rx_k    = '0;
    lmask   = '1;
    for (int i = 0; i < NFEE; i++) begin
      rx_data[i] = tx_data[i] ^ link_noise[i][15:0];
      rx_k[i]    = tx_k[i] ^ link_noise[i][17:16];
      lmask[i]   = fee_mask[i];
    end
  end

  for (genvar c = 0; c < NCOP; c++) begin : g_cop
    copper #(.NLINK(NLINK), .DEPTH(DEPTH)) u_cop (
      .clk, .rst_n, .clr(cop_clr),
      .link_mask(lmask[c*NLINK +: NLINK]), .thr(fifo_thr),
      .rx_data(rx_data[c*NLINK +: NLINK]), .rx_k(rx_k[c*NLINK +: NLINK]),
      .out_valid(out_valid[c]), .out_data(out_data[c]), .out_last(out_last[c]),
      .out_err(out_err[c]), .out_ready(out_ready[c]),
      .busy(cbusy[c]), .err(cerr[c]), .ev_count(cevcnt[c]),
      .link_err(), .fifo_over_thr()
    );
  end

  // COPPER side collection node (trigger output unused: the COPPER only
  // reports status here)
  ftsw_dist #(.NPORT(NCOP)) u_dist_cop (
    .clk, .rst_n, .trig_in(mtrig), .mask(cop_mask), .rst_req('0),
    .trig_out(), .p_rst(),
    .p_busy(cbusy), .p_err(cerr), .p_seu('0), .p_evcnt(cevcnt),
    .s_busy(busy_cop), .s_err(err_cop), .s_seu(), .s_evcnt(cop_evcnt_min)
  );

endmodule
