// tb_copper_fifo: random writes and reads against a queue model, at a small
// depth so that full and overflow are reached; checks data order, count,
// fragment count, the threshold output and the sticky overflow flag.
module tb_copper_fifo;
  localparam int D = 64;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, empty, over_thr, overflow;
  logic [33:0] wr_data = '0, rd_data;
  logic [6:0]  thr = 7'd40, count, nfrag;
  int checks = 0, failures = 0, nover = 0, nfull = 0;
  logic [33:0] m[$];
  bit lost = 0;

  copper_fifo #(.DEPTH(D), .W(34)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int frags();
    int n = 0;
    foreach (m[i]) if (m[i][33]) n++;
    return n;
  endfunction

  initial begin
    int wbias;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      // check state, then choose this clock's operations
      check(count == 7'(m.size()) && empty == (m.size() == 0), $sformatf("count %0d model %0d i=%0d", count, m.size(), i));
      check(nfrag == 7'(frags()), "fragment count");
      check(over_thr == (m.size() > int'(thr)), "threshold");
      check(overflow == lost, "overflow flag");
      if (m.size() > 0) check(rd_data == m[0], "head word");
      if (over_thr) nover++;
      if (m.size() == D) nfull++;
      wbias = ((i / 2000) % 2 == 0) ? 3 : 1;
      wr_en   = ($urandom_range(0, 3) < wbias);
      wr_data = {1'($urandom_range(0, 4) == 0), 1'($urandom), 32'($urandom)};
      rd_en   = (m.size() > 0) && ($urandom_range(0, 3) >= wbias);
      if (i == 10000) thr = 7'd10;
      @(posedge clk);
      // a write is taken only if the FIFO was not full before this clock
      begin
        automatic bit was_full = (m.size() == D);
        if (rd_en) void'(m.pop_front());
        if (wr_en) begin
          if (!was_full) m.push_back(wr_data); else lost = 1;
        end
      end
    end
    check(nover > 0 && nfull > 0 && lost, "threshold, full and overflow reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
