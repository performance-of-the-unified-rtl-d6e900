// tb_fee_unified: one front-end board end to end. Triggers and payloads go
// in; the Belle2link output is decoded (CRC checked with the reference) and
// each fragment compared with the expected header and payload. Registers are
// read and written through the register port (board id, busy threshold,
// event count), busy is checked after lowering the threshold, and the remote
// port reset is checked to clear the board.
module tb_fee_unified;
  import b2_pkg::*;
  import tb_b2_util::*;
  logic clk = 0, rst_n = 0, rst_port = 0, seu_err = 0;
  trig_msg_t trig_in = '0;
  logic pl_valid = 0, pl_last = 0, pl_ready, reg_req = 0, reg_we = 0, reg_ack, busy, err, seu;
  logic [31:0] pl_data = '0, reg_wdata = '0, reg_rdata, ev_count;
  logic [15:0] tx_data, reg_addr = '0;
  logic [1:0]  tx_k;
  int checks = 0, failures = 0, nfrm = 0, nbusy = 0;
  trig_msg_t trigs[$];
  int plen[$];
  longint tcnt = 0;

  fee_unified #(.BOARD_ID(32'hB200_0042)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) tcnt <= tcnt + 1;
  always @(posedge clk) if (busy) nbusy++;

  initial begin
    #50000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [31:0] pword(int ev, int i);
    return 32'(ev * 65536 + i);
  endfunction

  // payload source, one per trigger, always valid
  logic pl_hs = 0;
  always @(posedge clk) pl_hs <= pl_valid && pl_ready;
  initial begin
    int ev = 0, i = 0;
    forever begin
      @(negedge clk);
      if (pl_hs) begin
        if (pl_last) begin ev++; i = 0; end else i++;
      end
      pl_valid = (ev < plen.size());
      pl_data  = pword(ev, i);
      pl_last  = pl_valid && (i == plen[ev] - 1);
    end
  end

  // link decoder
  initial begin
    bit in = 0;
    logic [15:0] h[$];
    logic [31:0] w[$];
    forever begin
      @(posedge clk); #1;
      if ({tx_k, tx_data} == L_SOF) begin in = 1; h.delete(); end
      else if (tx_k == 2'b00) h.push_back(tx_data);
      else if ({tx_k, tx_data} == L_EOF) begin
        trig_msg_t t;
        w.delete();
        for (int i = 0; i + 1 < h.size(); i += 2) w.push_back({h[i], h[i+1]});
        t = trigs[nfrm];
        check(h[h.size()-1] == crc_of(w), "CRC");
        check(w.size() == 4 + plen[nfrm], "length");
        check(w[0] == t.evnum && w[1] == {1'b0, t.ttype, t.ts[58:32]} && w[2] == t.ts[31:0], "header");
        check(w[3] > w[2], "start of transfer after trigger");
        for (int i = 0; i < plen[nfrm]; i++) check(w[4 + i] == pword(nfrm, i), "payload");
        nfrm++;
      end
    end
  end

  task automatic trigger();
    trig_msg_t t;
    @(negedge clk);
    t = '{valid: 1'b1, evnum: 32'(trigs.size()), ts: TS_W'(tcnt), ttype: 4'($urandom)};
    trigs.push_back(t);
    plen.push_back($urandom_range(1, 30));
    trig_in = t;
    @(negedge clk) trig_in = '0;
  endtask

  task automatic rd(logic [15:0] a, output logic [31:0] r);
    @(negedge clk); reg_req = 1; reg_we = 0; reg_addr = a;
    @(negedge clk); reg_req = 0; check(reg_ack, "reg ack"); r = reg_rdata;
  endtask
  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk); reg_req = 1; reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_req = 0; reg_we = 0;
  endtask

  initial begin
    logic [31:0] r;
    repeat (3) @(negedge clk); rst_n = 1;
    rd(16'h0000, r); check(r == 32'hB200_0042, "board id");
    for (int e = 0; e < 20; e++) begin
      trigger();
      repeat ($urandom_range(10, 300)) @(negedge clk);
    end
    wait (nfrm == 20);
    rd(16'h0002, r); check(r == 32'd20, "event count register");
    check(ev_count == 32'd20 && !busy && !err, "status");
    wr(16'h0001, 32'd2);
    trigger(); trigger(); trigger();
    @(negedge clk);
    check(busy, "busy at threshold 2");
    seu_err = 1;
    @(negedge clk);
    check(seu, "SEU flag reported");
    rd(16'h0003, r); check(r[0], "SEU status bit");
    seu_err = 0;
    wait (nfrm == 23);
    repeat (200) @(negedge clk);
    check(!busy, "busy released");
    @(negedge clk) rst_port = 1; @(negedge clk) rst_port = 0;
    rd(16'h0001, r); check(r == 32'd8, "port reset restores threshold");
    check(ev_count == 0, "port reset clears count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
