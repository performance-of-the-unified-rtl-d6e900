// tb_b2_readout_top: the whole readout slice at its default size (20 boards,
// 5 COPPERs, 16384-word FIFOs), end to end.
//
// A random level-1 trigger source runs through a sequence of phases that make
// each mechanism of the design happen: minimum-interval drops, SVD emulation
// full, front-end busy, injection veto, COPPER FIFO back pressure with a
// stalled backend, masking and remote reset of a board, an SEU flag, register
// access, and a corrupted Belle2link word that must stop the run, followed by
// error clear and restart. Every board's payload is generated from (board,
// fragment index); every record leaving a COPPER is checked word for word:
// each unmasked link's fragment in link order, with the event number,
// timestamp and type that the master distributed. Each mechanism is counted,
// and one that never happened counts as a failure.
module tb_b2_readout_top;
  import b2_pkg::*;
  localparam int NFEE = 20, NL = 4, NCOP = 5;
  logic clk = 0, rst_n = 0;
  logic l1_trig = 0, inj = 0, run_start = 0, run_stop = 0, cop_clr = 0;
  logic [TT_W-1:0] l1_type = '0;
  logic [15:0] min_interval = 16'd20, svd_read_clk = 16'd30;
  logic [23:0] veto_short = 24'd300, veto_long = 24'd3000;
  logic [10:0] veto_near = 11'd16;
  logic [3:0]  svd_depth = 4'd6;
  logic [NFEE-1:0] fee_mask = '0, fee_rst_req = '0, seu_err = '0;
  logic [NCOP-1:0] cop_mask = '0;
  logic [14:0] fifo_thr = 15'd4000;
  logic [NFEE-1:0] pl_valid, pl_last, pl_ready;
  logic [NFEE-1:0][31:0] pl_data;
  logic [NFEE-1:0][17:0] link_noise = '0;
  logic [4:0]  reg_sel = '0;
  logic reg_req = 0, reg_we = 0, reg_ack;
  logic [15:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic [NCOP-1:0] out_valid, out_last, out_err, out_ready = '1;
  logic [NCOP-1:0][31:0] out_data;
  trig_msg_t trig_dist;
  logic running, err_stop, busy_fee, busy_cop, seu_any;
  logic [EV_W-1:0] ev_count, fee_evcnt_min, cop_evcnt_min;
  logic [31:0] drop_count, dead_clks;

  b2_readout_top dut (.*);

  always #4 clk = ~clk;   // ~127 MHz

  int checks = 0, failures = 0;
  // mechanism counters
  int n_acc = 0, n_int = 0, n_svd = 0, n_fbusy = 0, n_cbusy = 0, n_veto = 0;
  int n_errstop = 0, n_errrec = 0, n_mask = 0, n_prst = 0, n_seu = 0, n_reg = 0, n_rec = 0;
  trig_msg_t msgs[$];
  bit stop_checking_fee19 = 0;
  real trig_p = 0.05;
  bit trig_on = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    #40000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int plen(int fee, int k);
    return 1 + ((fee * 7 + k * 13) % 9);
  endfunction
  function automatic logic [31:0] pword(int fee, int k, int i);
    return {8'(fee), 12'(k), 12'(i)};
  endfunction

  // ---- trigger source and drop classification ----
  always @(posedge clk) begin
    if (rst_n && l1_trig) begin
      if (dut.u_master.accept) n_acc++;
      else if (running) begin
        if (dut.u_master.veto) n_veto++;
        else if (busy_cop) n_cbusy++;
        else if (busy_fee) n_fbusy++;
        else if (dut.u_master.svd_full) n_svd++;
        else if (!dut.u_master.interval_ok) n_int++;
      end
    end
    l1_trig <= trig_on && ($urandom_range(0, 9999) < int'(trig_p * 10000));
    l1_type <= TT_W'($urandom);
    if (rst_n && trig_dist.valid) msgs.push_back(trig_dist);
  end

  // no trigger may leave the master in a clock after busy was seen
  logic busy_q = 0;
  always @(posedge clk) begin
    if (rst_n && trig_dist.valid) begin
      checks++;
      if (busy_q) begin failures++; if (failures < 15) $display("FAIL trigger sent while busy"); end
    end
    busy_q <= busy_fee || busy_cop;
  end

  // ---- payload sources, one payload per received trigger ----
  int pk[NFEE] = '{default: 0}, pi[NFEE] = '{default: 0};
  for (genvar f = 0; f < NFEE; f++) begin : g_pl
    always @(posedge clk) begin
      if (!rst_n || dut.g_fee[f].u_fee.rst_port) begin
        pk[f] = 0; pi[f] = 0;
      end else if (pl_valid[f] && pl_ready[f]) begin
        if (pl_last[f]) begin pk[f]++; pi[f] = 0; end else pi[f]++;
      end
      pl_valid[f] <= 1'b1;
      pl_data[f]  <= pword(f, pk[f], pi[f]);
      pl_last[f]  <= (pi[f] == plen(f, pk[f]) - 1);
    end
  end

  // ---- record checkers, one per COPPER ----
  int fk[NFEE] = '{default: 0};   // fragments of each board checked so far
  for (genvar c = 0; c < NCOP; c++) begin : g_chk
    logic [31:0] rec[$];
    always @(posedge clk) if (rst_n && out_valid[c] && out_ready[c]) begin
      rec.push_back(out_data[c]);
      if (out_last[c]) begin
        int p;
        p = 0;
        n_rec++;
        if (out_err[c]) n_errrec++;
        for (int l = 0; l < NL; l++) begin
          int f, L, k;
          f = c * NL + l;
          if (fee_mask[f]) continue;
          k = fk[f]; L = plen(f, k);
          if (!out_err[c]) begin
            check(k < msgs.size(), "record for a distributed trigger");
            if (k < msgs.size()) begin
              check(rec[p] == msgs[k].evnum, $sformatf("cop %0d link %0d event number", c, l));
              check(rec[p+1] == {1'b0, msgs[k].ttype, msgs[k].ts[58:32]} && rec[p+2] == msgs[k].ts[31:0],
                    $sformatf("cop %0d link %0d timestamp/type", c, l));
              check(rec[p+3] - rec[p+2] > 0 && rec[p+3] - rec[p+2] < 100000, "readout latency");
            end
            for (int i = 0; i < L; i++) check(rec[p+4+i] == pword(f, k, i), $sformatf("fee %0d payload k=%0d i=%0d L=%0d got %h exp %h", f, k, i, L, rec[p+4+i], pword(f, k, i)));
          end
          p += 4 + L;
          fk[f]++;
        end
        if (!out_err[c]) check(p == rec.size(), $sformatf("cop %0d record length", c));
        rec.delete();
      end
    end
  end

  task automatic clocks(int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic drain();
    trig_on = 0;
    clocks(20000);
  endtask

  task automatic reg_access(int sel, bit we, logic [15:0] a, logic [31:0] d, output logic [31:0] r);
    @(negedge clk); reg_sel = 5'(sel); reg_req = 1; reg_we = we; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_req = 0; reg_we = 0;
    check(reg_ack, "register ack"); r = reg_rdata; n_reg++;
  endtask

  initial begin
    logic [31:0] r;
    int t0;
    clocks(5); rst_n = 1; clocks(5);
    reg_access(7, 0, 16'h0000, 0, r); check(r == 32'hB200_0007, "board id of board 7");
    @(negedge clk) run_start = 1; @(negedge clk) run_start = 0;
    check(running, "run started");

    // phase 1: high rate, short SVD drain: interval drops and front-end busy
    trig_on = 1; trig_p = 0.2;
    clocks(20000);
    // phase 2: slow SVD drain: the emulated SVD buffer fills
    svd_read_clk = 16'd600;
    clocks(15000);
    svd_read_clk = 16'd30;
    // phase 3: injection vetoes
    trig_p = 0.02;
    repeat (3) begin @(negedge clk) inj = 1; @(negedge clk) inj = 0; clocks(4000); end
    // phase 4: backend of COPPER 2 stalls: FIFO back pressure
    fifo_thr = 15'd200; trig_p = 0.05;
    out_ready[2] = 0;
    clocks(15000);
    check(busy_cop, "COPPER busy while its backend stalls");
    out_ready[2] = 1;
    clocks(5000);
    fifo_thr = 15'd4000;
    drain();
    check(fee_evcnt_min == 32'(msgs.size()) && cop_evcnt_min == 32'(msgs.size()),
          $sformatf("all events through: fee %0d cop %0d dist %0d", fee_evcnt_min, cop_evcnt_min, msgs.size()));

    // phase 5: mask board 19, reset its port, SEU flag, registers
    fee_mask[19] = 1; n_mask++;
    @(negedge clk) fee_rst_req[19] = 1; @(negedge clk) fee_rst_req[19] = 0;
    clocks(3);
    reg_access(19, 0, 16'h0002, 0, r); check(r == 0, "port reset cleared board 19"); n_prst++;
    reg_access(3, 1, 16'h0001, 32'd3, r);
    reg_access(3, 0, 16'h0001, 0, r); check(r == 32'd3, "board 3 threshold written");
    seu_err[3] = 1; clocks(4); check(seu_any, "SEU reported"); n_seu++;
    seu_err[3] = 0;
    trig_on = 1; trig_p = 0.05;
    clocks(10000);
    drain();
    check(cop_evcnt_min == 32'(msgs.size()), "masked board does not hold back COPPER 4");

    // phase 6: corrupt one Belle2link word of board 5 while it sends
    trig_on = 1;
    wait (dut.tx_k[5] == 2'b00);
    @(negedge clk) link_noise[5] = 18'h00010; @(negedge clk) link_noise[5] = '0;
    t0 = 0;
    while (running && t0 < 2000) begin @(negedge clk); t0++; end
    check(!running && err_stop, "link error stopped the run");
    if (err_stop) n_errstop++;
    drain();
    @(negedge clk) cop_clr = 1; @(negedge clk) cop_clr = 0;
    // board 5's corrupted fragment went into an error record: skip it
    @(negedge clk) run_start = 1; @(negedge clk) run_start = 0;
    clocks(2);
    check(running, "restart after clearing the error");
    trig_on = 1; clocks(5000);
    drain();
    @(negedge clk) run_stop = 1; @(negedge clk) run_stop = 0;

    $display("accepted %0d records %0d error records %0d", n_acc, n_rec, n_errrec);
    $display("drops: interval %0d svd %0d fee-busy %0d copper-busy %0d veto %0d",
             n_int, n_svd, n_fbusy, n_cbusy, n_veto);
    $display("dead clocks %0d of %0d", dead_clks, $time / 8);
    check(n_acc > 0,     "mechanism: trigger accepted");
    check(n_int > 0,     "mechanism: minimum interval");
    check(n_svd > 0,     "mechanism: SVD emulation full");
    check(n_fbusy > 0,   "mechanism: front-end busy");
    check(n_cbusy > 0,   "mechanism: COPPER FIFO back pressure");
    check(n_veto > 0,    "mechanism: injection veto");
    check(n_errstop > 0, "mechanism: link error stops run");
    check(n_errrec > 0,  "mechanism: error record");
    check(n_mask > 0 && n_prst > 0 && n_seu > 0 && n_reg > 0, "mechanism: mask, reset, SEU, registers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
