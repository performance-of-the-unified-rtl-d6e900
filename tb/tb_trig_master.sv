// tb_trig_master: takes the trigger master through each gate - run off,
// minimum interval, busy, injection veto, SVD emulation full, link error
// stop - and checks for every request whether it was distributed, the
// message contents (event number, timestamp = clock count at the request,
// type) and the one-clock latency.
module tb_trig_master;
  import b2_pkg::*;
  logic clk = 0, rst_n = 0, l1_trig = 0, inj = 0, run_start = 0, run_stop = 0;
  logic [TT_W-1:0] l1_type = '0;
  logic [15:0] min_interval = 16'd10, svd_read_clk = 16'd2000;
  logic [23:0] veto_short = 24'd50, veto_long = 24'd0;
  logic [10:0] veto_near = 11'd0;
  logic [3:0]  svd_depth = 4'd15, svd_occ;
  logic [1:0]  sum_busy = '0, sum_err = '0;
  trig_msg_t   trig_out;
  logic        running, err_stop;
  logic [EV_W-1:0] ev_count;
  logic [31:0] drop_count, dead_clks;
  logic [TS_W-1:0] timestamp;
  int checks = 0, failures = 0, ndrop = 0, nacc = 0;
  longint tcnt = 0;
  int exp_ev = 0;

  trig_master #(.NSUM(2)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) tcnt <= tcnt + 1;

  initial begin
    #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // one request; returns after the clock in which the message would appear
  task automatic req(bit exp_acc, string what);
    longint ts_exp;
    logic [TT_W-1:0] ty;
    ty = TT_W'($urandom);
    @(negedge clk);
    l1_trig = 1; l1_type = ty; ts_exp = tcnt;
    @(negedge clk);
    l1_trig = 0;
    check(trig_out.valid == exp_acc, {what, ": accept"});
    if (exp_acc) begin
      check(trig_out.evnum == EV_W'(exp_ev) && trig_out.ts == TS_W'(ts_exp) && trig_out.ttype == ty,
            {what, ": message"});
      exp_ev++; nacc++;
    end else ndrop++;
    @(negedge clk);
    check(!trig_out.valid, {what, ": single pulse"});
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    idle(3); rst_n = 1; idle(20);
    req(0, "run off");
    @(negedge clk) run_start = 1; @(negedge clk) run_start = 0;
    check(running, "running");
    idle(20);
    req(1, "first");
    idle(3);
    req(0, "too close");            // 5 clocks after the previous one
    idle(10);
    req(1, "interval ok");
    idle(12);
    sum_busy = 2'b10;
    req(0, "busy");
    sum_busy = 2'b00;
    idle(12);
    req(1, "busy gone");
    @(negedge clk) inj = 1; @(negedge clk) inj = 0;
    idle(20);
    req(0, "injection veto");
    idle(40);
    req(1, "after veto");
    // four events are in the emulated SVD buffer, none drained yet
    check(svd_occ == 4'd4, "svd occupancy 4");
    svd_depth = 4'd5;
    idle(12); req(1, "svd 5th");
    idle(12); req(0, "svd full");
    check(svd_occ == 4'd5, "svd occupancy 5");
    svd_read_clk = 16'd5;
    idle(2100);
    req(1, "svd drained");
    svd_depth = 4'd15;
    check(dead_clks > 0, "dead clocks counted");
    sum_err = 2'b01;
    idle(3);
    check(!running && err_stop, "link error stops run");
    sum_err = 2'b00;
    idle(12);
    req(0, "stopped");
    @(negedge clk) run_start = 1; @(negedge clk) run_start = 0;
    exp_ev = 0;
    idle(12);
    req(1, "restart numbers from 0");
    @(negedge clk) run_stop = 1; @(negedge clk) run_stop = 0;
    check(!running && !err_stop, "run stop");
    check(drop_count == 32'(ndrop), "drop count");
    $display("accepted %0d dropped %0d dead %0d", nacc, ndrop, dead_clks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
