// tb_fee_readout: sends triggers with random gaps, supplies a payload of
// random length per event with random valid gaps, stalls the fragment output
// at random, and checks every fragment (header words, start-of-transfer
// timestamp, payload, last flag), the busy rule against its own count of
// outstanding triggers, and finally the overflow of a full trigger queue.
module tb_fee_readout;
  import b2_pkg::*;
  logic clk = 0, rst_n = 0;
  trig_msg_t trig_in = '0;
  logic [7:0] busy_thr = 8'd4;
  logic busy, overflow, pl_valid = 0, pl_last = 0, pl_ready, frag_valid, frag_last, frag_ready = 0;
  logic [31:0] ev_count, pl_data = '0, frag_data;
  int checks = 0, failures = 0, sent = 0, done = 0, nbusy = 0;
  longint tcnt = 0, hdr_t;
  trig_msg_t trigs[$];
  int plen[$];
  logic [31:0] got[$];
  bit stall_out = 0;

  fee_readout #(.QDEPTH(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    tcnt <= tcnt + 1;
    if (trig_in.valid) sent <= sent + 1;
    if (frag_valid && frag_ready && frag_last) done <= done + 1;
  end

  initial begin
    #20000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [31:0] pword(int ev, int i);
    return {8'(ev), 8'hA5, 16'(i * 7 + 3)};
  endfunction

  // trigger source
  // (the trigger master would hold triggers back while busy; honour_busy = 0
  // ignores it to fill the queue)
  task automatic send_triggers(int n, int maxgap, bit honour_busy = 1);
    for (int k = 0; k < n; k++) begin
      trig_msg_t t;
      repeat ($urandom_range(1, maxgap)) @(negedge clk);
      while (honour_busy && busy) @(negedge clk);
      t = '{valid: 1'b1, evnum: 32'(trigs.size()), ts: TS_W'(tcnt), ttype: 4'($urandom)};
      trigs.push_back(t);
      plen.push_back($urandom_range(1, 12));
      trig_in = t;
      @(negedge clk) trig_in = '0;
    end
  endtask

  // payload source: one payload per trigger, in order
  initial begin
    int ev = 0, i = 0;
    forever begin
      @(negedge clk);
      if (pl_valid && pl_ready_q) begin
        i++;
        if (pl_last) begin ev++; i = 0; end
      end
      if (ev < plen.size() && $urandom_range(0, 2) != 0) begin
        pl_valid = 1; pl_data = pword(ev, i); pl_last = (i == plen[ev] - 1);
      end else begin
        pl_valid = 0; pl_last = 0;
      end
      frag_ready = !stall_out && ($urandom_range(0, 3) != 0);
    end
  end
  logic pl_ready_q;
  always @(posedge clk) pl_ready_q <= pl_ready;

  // fragment sink and checker
  initial begin
    int ev = 0;
    forever begin
      @(posedge clk);
      if (frag_valid && dut.state == 1 && dut.hidx == 0 && got.size() == 0 && hdr_t == 0) hdr_t = tcnt;
      if (frag_valid && frag_ready) begin
        got.push_back(frag_data);
        if (frag_last) begin
          trig_msg_t t;
          t = trigs[ev];
          check(got.size() == HDR_WORDS + plen[ev], "fragment length");
          check(got[0] == t.evnum, "word 0 event number");
          check(got[1] == {1'b0, t.ttype, t.ts[58:32]}, "word 1 type/ts high");
          check(got[2] == t.ts[31:0], "word 2 ts low");
          check(got[3] == 32'(hdr_t - 1), "word 3 start-of-transfer timestamp");
          check(got[3] >= got[2], "latency not negative");
          for (int i = 0; i < plen[ev]; i++)
            check(got[HDR_WORDS + i] == pword(ev, i), "payload");
          got.delete(); hdr_t = 0; ev++;
        end
      end
    end
  end

  // busy rule
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (busy != ((sent - done) >= int'(busy_thr) || (sent - done) >= 16)) begin
      failures++; if (failures < 5) $display("FAIL busy out=%0d q=%0d st=%0d t=%0d s=%0d d=%0d ev=%0d", sent - done, dut.qcount, dut.state, tcnt, sent, done, ev_count);
    end
    if (busy) nbusy++;
  end

  initial begin
    hdr_t = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    send_triggers(40, 40);
    send_triggers(30, 3);     // bursts: queue builds up, busy rises
    wait (done == 70);
    repeat (5) @(negedge clk);
    check(ev_count == 32'd70, "event count");
    check(nbusy > 0, "busy seen");
    check(!overflow, "no overflow yet");
    stall_out = 1;
    send_triggers(17, 1, 0);     // one more than the queue holds
    repeat (3) @(negedge clk);
    check(overflow, "overflow on full queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
