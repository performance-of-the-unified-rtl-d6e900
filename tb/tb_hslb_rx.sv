// tb_hslb_rx: sends frames built by the reference encoder with random idles
// in between and inside; some frames get a flipped data bit (CRC error) or a
// foreign K character (symbol error), and some data arrives outside a frame.
// Checks every word written to the FIFO, the last/err flags, the sticky
// link error and its clear, and the error counters.
module tb_hslb_rx;
  import tb_b2_util::*;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [15:0] rx_data;
  logic [1:0]  rx_k;
  logic wr_en, wr_last, wr_err, link_err;
  logic [31:0] wr_data, nfrag;
  logic [15:0] n_crc_err, n_sym_err;
  int checks = 0, failures = 0, exp_crc = 0, exp_sym = 0, nf = 0;
  logic [33:0] expq[$];   // {last, err, data}
  logic [33:0] got[$];

  hslb_rx dut (.*);

  always #5 clk = ~clk;
  assign {rx_k, rx_data} = cur;
  logic [17:0] cur = L_IDLE;

  always @(posedge clk) if (wr_en) got.push_back({wr_last, wr_err, wr_data});

  initial begin
    #20000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic put(logic [17:0] x);
    @(negedge clk) cur = x;
  endtask

  // kind: 0 good, 1 CRC error, 2 symbol error
  task automatic one_frame(int kind);
    logic [31:0] w[$];
    logic [17:0] q[$];
    int n, pos;
    n = $urandom_range(1, 10);
    for (int i = 0; i < n; i++) w.push_back($urandom);
    frame(w, q);
    pos = $urandom_range(1, 2 * n);         // a data half
    if (kind == 1) begin
      q[pos] = q[pos] ^ (18'd1 << $urandom_range(0, 15));
      w[(pos - 1) / 2] = {q[((pos - 1) / 2) * 2 + 1][15:0], q[((pos - 1) / 2) * 2 + 2][15:0]};
    end
    for (int i = 0; i < n; i++) expq.push_back({(i == n - 1), (kind != 0) && (i == n - 1), w[i]});
    foreach (q[i]) begin
      put(q[i]);
      if (kind == 2 && i == pos) put({2'b11, 16'h3CBC});   // K28.1 is not a Belle2link symbol
      if (i > 0 && $urandom_range(0, 3) == 0) put(L_IDLE);
    end
    put(L_IDLE);
    repeat (3) put(L_IDLE);
    nf++;
    if (kind == 1) exp_crc++;
    if (kind == 2) exp_sym++;
    check(link_err == (kind != 0), "link error flag");
    check(n_crc_err == 16'(exp_crc) && n_sym_err == 16'(exp_sym), "error counters");
    check(nfrag == 32'(nf), "fragment count");
    @(negedge clk) clr = 1; @(negedge clk) clr = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) put(L_IDLE);
    for (int f = 0; f < 300; f++) one_frame((f % 5 == 3) ? 1 : (f % 7 == 5) ? 2 : 0);
    // data outside a frame is a symbol error and writes nothing
    put({2'b00, 16'h1234}); put(L_IDLE); put(L_IDLE);
    exp_sym++;
    check(link_err && n_sym_err == 16'(exp_sym), "data outside frame");
    check(got.size() == expq.size(), $sformatf("word count %0d/%0d", got.size(), expq.size()));
    foreach (expq[i]) if (i < got.size()) check(got[i] == expq[i], $sformatf("word %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
