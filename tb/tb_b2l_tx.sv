// tb_b2l_tx: feeds fragments of random length and content (sometimes with
// gaps) and decodes the link: SOF, data halves, CRC (reference computed
// byte-wise here), EOF, idles between. Checks the rate cap: never two data
// halves in consecutive clocks (BW_DIV = 2, about 1 Gbps at 127 MHz), and a
// saturated frame of n words lasting 4n+4 clocks from SOF to EOF.
module tb_b2l_tx;
  import tb_b2_util::*;
  logic clk = 0, rst_n = 0, frag_valid = 0, frag_last = 0, frag_ready;
  logic [31:0] frag_data = '0;
  logic [15:0] tx_data;
  logic [1:0]  tx_k;
  int checks = 0, failures = 0, nfrm = 0;
  logic [31:0] sent[$][$];
  bit gaps = 1;
  logic hs = 0;   // handshake at the last rising edge
  always @(posedge clk) hs <= frag_valid && frag_ready;

  b2l_tx #(.BW_DIV(2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // link decoder
  initial begin
    bit in = 0, prev_data = 0;
    logic [15:0] h[$];
    int t0 = 0, cyc = 0;
    forever begin
      @(posedge clk); #1; cyc++;
      if (!rst_n) continue;
      if (tx_k == 2'b00) begin
        check(!prev_data, "rate cap: no back-to-back data halves");
        check(in, "data inside a frame");
        h.push_back(tx_data);
      end else begin
        check(tx_k == 2'b11, "full K word");
        if ({tx_k, tx_data} == L_SOF) begin
          check(!in, "SOF outside frame"); in = 1; h.delete(); t0 = cyc;
        end else if ({tx_k, tx_data} == L_EOF) begin
          logic [31:0] w[$];
          w.delete();
          check(in, "EOF inside frame"); in = 0;
          check(h.size() % 2 == 1, "odd number of halves (words + CRC)");
          for (int i = 0; i + 1 < h.size(); i += 2) w.push_back({h[i], h[i+1]});
          check(w == sent[nfrm], "fragment words");
          if (w != sent[nfrm] && failures < 3) $display("got %p exp %p", w, sent[nfrm]);
          check(h[h.size()-1] == crc_of(w), "CRC");
          if (!gaps) check(cyc - t0 >= 4 * w.size() + 2 && cyc - t0 <= 4 * w.size() + 3, $sformatf("frame time %0d for %0d words", cyc - t0, w.size()));
          nfrm++;
        end else check({tx_k, tx_data} == L_IDLE, "idle");
      end
      prev_data = (tx_k == 2'b00);
    end
  end

  task automatic send(int n);
    logic [31:0] w[$];
    for (int i = 0; i < n; i++) w.push_back($urandom);
    sent.push_back(w);
    for (int i = 0; i < n; i++) begin
      frag_valid = 1; frag_data = w[i]; frag_last = (i == n - 1);
      @(negedge clk); while (!hs) @(negedge clk);
      if (gaps && $urandom_range(0, 2) == 0) begin
        frag_valid = 0; repeat ($urandom_range(1, 6)) @(negedge clk);
      end
    end
    frag_valid = 0; frag_last = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    for (int f = 0; f < 40; f++) begin
      send($urandom_range(1, 20));
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    repeat (100) @(negedge clk);
    gaps = 0;
    for (int f = 0; f < 20; f++) send($urandom_range(1, 30));
    repeat (200) @(posedge clk);
    check(nfrm == 60, "all frames seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
