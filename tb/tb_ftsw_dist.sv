// tb_ftsw_dist: random port status and masks into a 20-port node, then a
// two-stage cascade; checks fan-out, reset pulses, the OR summaries and the
// minimum event count over unmasked ports, each one clock (per stage) later.
module tb_ftsw_dist;
  import b2_pkg::*;
  localparam int N = 20;
  logic clk = 0, rst_n = 0;
  trig_msg_t trig_in = '0;
  logic [N-1:0] mask = '0, rst_req = '0, p_rst, p_busy = '0, p_err = '0, p_seu = '0;
  trig_msg_t [N-1:0] trig_out;
  logic [N-1:0][EV_W-1:0] p_evcnt = '0;
  logic s_busy, s_err, s_seu;
  logic [EV_W-1:0] s_evcnt;
  // second stage: node A (N ports) feeds port 3 of node B
  trig_msg_t [3:0] b_trig;
  logic [3:0] b_mask = 4'b0110, b_rst;
  logic bs_busy, bs_err, bs_seu;
  logic [EV_W-1:0] bs_evcnt;
  int checks = 0, failures = 0;

  ftsw_dist #(.NPORT(N)) dut (.*);
  ftsw_dist #(.NPORT(4)) up (
    .clk, .rst_n, .trig_in(trig_in), .mask(b_mask), .rst_req(4'b0), .trig_out(b_trig), .p_rst(b_rst),
    .p_busy({s_busy, 3'b000}), .p_err({s_err, 3'b001}), .p_seu({s_seu, 3'b000}),
    .p_evcnt({s_evcnt, 32'd5, 32'd6, 32'd900}),
    .s_busy(bs_busy), .s_err(bs_err), .s_seu(bs_seu), .s_evcnt(bs_evcnt)
  );

  always #5 clk = ~clk;

  initial begin
    #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [EV_W-1:0] emin;
    logic eb, ee, es;
    trig_msg_t t;
    int mineb;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      t = '{valid: 1'($urandom), evnum: $urandom, ts: {$urandom, $urandom}, ttype: 4'($urandom)};
      trig_in = t;
      mask    = N'($urandom) & N'($urandom);
      if (it % 50 == 0) mask = '1;
      rst_req = N'($urandom) & N'($urandom) & N'($urandom);
      p_busy  = N'($urandom) & N'($urandom) & N'($urandom);
      p_err   = N'($urandom) & N'($urandom) & N'($urandom) & N'($urandom);
      p_seu   = N'($urandom) & N'($urandom) & N'($urandom) & N'($urandom);
      for (int i = 0; i < N; i++) p_evcnt[i] = 1000 + $urandom_range(0, 50);
      emin = '1; eb = 0; ee = 0; es = 0;
      for (int i = 0; i < N; i++) if (!mask[i]) begin
        if (p_evcnt[i] < emin) emin = p_evcnt[i];
        eb |= p_busy[i]; ee |= p_err[i]; es |= p_seu[i];
      end
      @(negedge clk);
      for (int i = 0; i < N; i++) check(trig_out[i] == t, "fan-out");
      check(p_rst == rst_req, "reset pulse");
      check(s_busy == eb && s_err == ee && s_seu == es, "status OR");
      check(s_evcnt == emin, "event count minimum");
      // cascade: node B masks ports 1 and 2, sees 900 on port 0
      mineb = (emin < 900) ? emin : 900;
      @(negedge clk);
      check(bs_busy == eb && bs_err == (ee | 1'b1) && bs_seu == es, "cascade OR");
      check(bs_evcnt == 32'(mineb), "cascade minimum");
      check(b_trig[3] == t, "cascade fan-out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
