// tb_copper: drives the four Belle2link inputs of a COPPER with frames from
// the reference encoder (event number in word 0, timestamp in word 2),
// and checks the combined records, the busy output against the FIFO
// threshold while the backend is stalled, and the error output after a
// corrupted frame and after clr.
module tb_copper;
  import tb_b2_util::*;
  localparam int NL = 4;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [NL-1:0] link_mask = '0, link_err, fifo_over_thr;
  logic [14:0] thr = 15'd100;
  logic [NL-1:0][15:0] rx_data;
  logic [NL-1:0][1:0]  rx_k;
  logic out_valid, out_last, out_err, out_ready = 1, busy, err;
  logic [31:0] out_data, ev_count;
  int checks = 0, failures = 0, nrec = 0, nbusy = 0;
  logic [17:0] lq[NL][$];
  logic [31:0] exp_rec[$][$];
  logic [31:0] cur[$];
  bit exp_err[$];

  copper #(.NLINK(NL), .DEPTH(16384)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // link drivers: each link plays its queue, idle when empty
  for (genvar l = 0; l < NL; l++) begin : g_drv
    logic [17:0] w = L_IDLE;
    assign {rx_k[l], rx_data[l]} = w;
    always @(negedge clk) w <= (lq[l].size() > 0 && $urandom_range(0, 1)) ? lq[l].pop_front() : L_IDLE;
  end

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      cur.push_back(out_data);
      if (out_last) begin
        check(cur == exp_rec[nrec], $sformatf("record %0d", nrec));
        check(out_err == exp_err[nrec], $sformatf("record %0d err", nrec));
        cur.delete(); nrec++;
      end
    end
    if (busy) nbusy++;
  end

  task automatic send_event(int ev, bit corrupt);
    logic [31:0] rec[$];
    for (int l = 0; l < NL; l++) begin
      logic [31:0] w[$];
      logic [17:0] q[$];
      w.push_back(32'(ev));
      w.push_back($urandom);
      w.push_back(32'(ev * 3));      // timestamp word, equal on all links
      repeat ($urandom_range(0, 38)) w.push_back($urandom);
      rec = {rec, w};
      frame(w, q);
      if (corrupt && l == 2) q[3] = q[3] ^ 18'h00100;
      if (corrupt && l == 2) rec[rec.size() - w.size() + 1] ^= 32'h0100_0000;  // q[3] is word 1, high half
      lq[l] = {lq[l], q};
    end
    exp_rec.push_back(rec);
    exp_err.push_back(corrupt);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int e = 0; e < 30; e++) send_event(e, 0);
    wait (nrec == 30);
    check(!err && !busy, "clean run");
    // stall the backend: the FIFOs fill past the threshold
    out_ready = 0;
    for (int e = 30; e < 40; e++) send_event(e, 0);
    repeat (2000) @(negedge clk);
    check(busy && fifo_over_thr == 4'hF, "busy above threshold");
    out_ready = 1;
    wait (nrec == 40);
    repeat (5) @(negedge clk);
    check(!busy, "busy released");
    send_event(40, 1);
    wait (nrec == 41);
    repeat (3) @(negedge clk);
    check(err && link_err == 4'b0100, "link error reported");
    @(negedge clk) clr = 1; @(negedge clk) clr = 0;
    @(negedge clk);
    check(!err, "error cleared");
    check(ev_count == 32'd41 && nbusy > 0, "record count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
