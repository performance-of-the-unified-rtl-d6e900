// tb_workload_rate: runs the two sustained-rate workloads of the readout
// through four front-end boards (fee_unified) and one COPPER at default
// parameters, with trigger messages driven directly (no master, no tree).
//
// Phase A, design rate: a trigger every 4233 clocks (30 kHz at 127 MHz) and
// 1000 payload words (4 kB) per board per event, the most a board can send
// at that rate over the 1 Gbps Belle2link payload. The backend reads without
// stalling. No board may go busy, no FIFO may cross a 2000-word threshold,
// and every record must arrive complete and error free.
//
// Phase B, deep buffering: one event of 10000 payload words (40 kB) per link
// while the backend is stalled, the occupancy seen for the slowest
// subdetector at 4 kHz. Every FIFO must cross a 10000-word threshold without
// overflowing, and the record must come out intact once the backend reads.
//
// Each payload word is {board[7:0], event[7:0], index[15:0]}.
module tb_workload_rate;
  import b2_pkg::*;

  localparam int NB      = 4;
  localparam int PERIOD  = 4233;
  localparam int NW_A    = 1000;
  localparam int NEV_A   = 12;
  localparam int NW_B    = 10000;

  logic clk = 0;
  always #4 clk = ~clk;
  logic rst_n = 0;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  trig_msg_t              trig;
  logic [NB-1:0]          pl_ready, fee_busy, fee_err, fee_seu;
  logic [NB-1:0][31:0]    pl_data, fee_ev;
  logic [NB-1:0]          pl_last;
  logic [NB-1:0][15:0]    rx_data;
  logic [NB-1:0][1:0]     rx_k;
  logic [NB-1:0][31:0]    reg_rdata;
  logic [NB-1:0]          reg_ack;
  int                     nw;                 // payload words per event now
  int                     pev[NB], pidx[NB];  // payload source position

  logic [14:0]            thr;
  logic                   out_valid, out_last, out_err, out_ready;
  logic [31:0]            out_data, cop_ev;
  logic                   cop_busy, cop_err;
  logic [NB-1:0]          link_err, over_thr;

  for (genvar b = 0; b < NB; b++) begin : g_fee
    assign pl_data[b] = {8'(b), 8'(pev[b]), 16'(pidx[b])};
    assign pl_last[b] = (pidx[b] == nw - 1);
    fee_unified #(.BOARD_ID(32'hB200_0000 | 32'(b))) u_fee (
      .clk, .rst_n, .rst_port(1'b0), .trig_in(trig), .seu_err(1'b0),
      .pl_valid(1'b1), .pl_data(pl_data[b]), .pl_last(pl_last[b]), .pl_ready(pl_ready[b]),
      .tx_data(rx_data[b]), .tx_k(rx_k[b]),
      .reg_req(1'b0), .reg_we(1'b0), .reg_addr(16'h0), .reg_wdata(32'h0),
      .reg_rdata(reg_rdata[b]), .reg_ack(reg_ack[b]),
      .busy(fee_busy[b]), .err(fee_err[b]), .seu(fee_seu[b]), .ev_count(fee_ev[b]));
    always_ff @(posedge clk)
      if (!rst_n) begin
        pev[b]  <= 0;
        pidx[b] <= 0;
      end else if (pl_ready[b]) begin
        if (pl_last[b]) begin
          pev[b]  <= pev[b] + 1;
          pidx[b] <= 0;
        end else pidx[b] <= pidx[b] + 1;
      end
  end

  copper u_cop (
    .clk, .rst_n, .clr(1'b0), .link_mask('0), .thr,
    .rx_data, .rx_k, .out_valid, .out_data, .out_last, .out_err, .out_ready,
    .busy(cop_busy), .err(cop_err), .ev_count(cop_ev), .link_err, .fifo_over_thr(over_thr));

  // record checker: fragments of links 0..3, each 4 header words + payload
  int nrec = 0, wpos = 0, rec_nw = 0;
  logic [NB-1:0] seen_over = '0;
  always @(posedge clk) if (rst_n) begin
    seen_over <= seen_over | over_thr;
    if (out_valid && out_ready) begin
      automatic int fl = 4 + rec_nw;
      automatic int b  = wpos / fl;
      automatic int i  = wpos % fl;
      if (i == 0) check(out_data == 32'(nrec), "fragment event number");
      else if (i == 2) check(out_data == 32'(ts_of(nrec)), "fragment timestamp");
      else if (i >= 4) check(out_data == {8'(b), 8'(nrec), 16'(i - 4)}, "payload word");
      if (out_last) begin
        check(wpos == NB * fl - 1, "record length");
        check(!out_err, "record error free");
        nrec++;
        wpos = 0;
      end else wpos++;
    end
  end

  function automatic logic [TS_W-1:0] ts_of(int ev);
    return TS_W'(1000 + ev * PERIOD);
  endfunction

  task automatic send_trig(int ev);
    @(negedge clk);
    trig.valid = 1;
    trig.evnum = EV_W'(ev);
    trig.ts    = ts_of(ev);
    trig.ttype = TT_W'(1);
    @(negedge clk) trig = '0;
  endtask

  int busy_seen = 0;
  always @(posedge clk) if (rst_n && (|fee_busy)) busy_seen++;

  initial begin
    trig = '0;
    nw = NW_A;
    rec_nw = NW_A;
    thr = 15'd2000;
    out_ready = 1;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    // phase A: 30 kHz, 4 kB per board
    for (int e = 0; e < NEV_A; e++) begin
      send_trig(e);
      repeat (PERIOD - 2) @(negedge clk);
    end
    wait (nrec == NEV_A);
    check(busy_seen == 0, "no board busy at 30 kHz");
    check(seen_over == '0, "FIFOs stay under 2000 words at 30 kHz");
    check(!cop_err && link_err == '0, "no link error at 30 kHz");
    check(fee_ev[0] == 32'(NEV_A), "board event count");
    // phase B: 40 kB per link into a stalled backend
    @(negedge clk);
    nw = NW_B;
    thr = 15'd10000;
    out_ready = 0;
    rec_nw = NW_B;
    send_trig(NEV_A);
    wait (over_thr == '1);
    repeat (8 * NW_B / 2) @(negedge clk);
    check(over_thr == '1 && cop_busy, "all FIFOs above 10000 words, COPPER busy");
    check(!cop_err, "no overflow with 40 kB per link");
    out_ready = 1;
    wait (nrec == NEV_A + 1);
    repeat (10) @(negedge clk);
    check(over_thr == '0 && !cop_busy, "FIFOs drained");
    check(cop_ev == 32'(NEV_A + 1), "COPPER event count");
    $display("phase A: %0d events of %0d words per board, phase B: %0d words per link",
             NEV_A, NW_A, NW_B);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #6000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
