// tb_inj_veto: checks the injection veto cycle by cycle against the closed
// form: k clocks after an injection the trigger is vetoed if k <= short_len,
// or if k <= long_len and k mod REV is within near_win of 0.
module tb_inj_veto;
  localparam int REV = 1280;
  logic clk = 0, rst_n = 0, inj = 0, veto;
  logic [23:0] short_len = 24'd100, long_len = 24'd5000;
  logic [10:0] near_win = 11'd10;
  int checks = 0, failures = 0, k, nveto;

  inj_veto #(.REV_CLK(REV), .CW(24)) dut (.*);

  always #5 clk = ~clk;

  function automatic bit expect_veto(int kk, int s, int l, int w);
    int m;
    if (kk == 0) return 1;
    m = kk % REV;
    return (kk <= s) || (kk <= l && (m <= w || m >= REV - w));
  endfunction

  task automatic run_after_inj(int s, int l, int w, int len);
    short_len = 24'(s); long_len = 24'(l); near_win = 11'(w);
    @(negedge clk) inj = 1;
    for (int kk = 0; kk < len; kk++) begin
      #1;
      checks++;
      if (veto !== expect_veto(kk, s, l, w)) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d veto=%0b", kk, veto);
      end
      if (veto) nveto++;
      @(negedge clk) inj = 0;
    end
  endtask

  initial begin
    #100000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    nveto = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (37) @(negedge clk);
    run_after_inj(100, 5000, 10, 6000);
    // nothing vetoed once both windows have ended
    repeat (5) begin @(negedge clk); checks++; if (veto) failures++; end
    // a second injection at another phase restarts both windows
    repeat (333) @(negedge clk);
    run_after_inj(20, 3000, 3, 3200);
    $display("vetoed clocks: %0d", nveto);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
