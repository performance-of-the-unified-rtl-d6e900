// tb_svd_emu: drives triggers into the SVD buffer emulation whenever it is
// not full and compares occupancy and full with a reference that keeps the
// departure time of every stored event (one event leaves every read_clk
// clocks while the buffer is not empty).
module tb_svd_emu;
  logic clk = 0, rst_n = 0, trig = 0, full;
  logic [3:0]  depth = 4'd3, occ;
  logic [15:0] read_clk = 16'd10;
  int checks = 0, failures = 0, cyc = 0, ref_occ = 0, next_out = 0, nfull = 0;

  svd_emu dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference: an event leaves at next_out; the next departure is read_clk later
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (ref_occ > 0 && cyc == next_out) begin
      ref_occ  = ref_occ - 1;
      next_out = cyc + int'(read_clk);
    end
    if (trig) begin
      if (ref_occ == 0) next_out = cyc + int'(read_clk);
      ref_occ = ref_occ + 1;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (occ != 4'(ref_occ) || full != (ref_occ >= int'(depth))) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d occ=%0d ref=%0d full=%0b", cyc, occ, ref_occ, full);
      end
      if (full) nfull++;
      if (i == 1500) begin depth = 4'd5; read_clk = 16'd7; end
      trig = !full && ($urandom_range(0, 3) != 0);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
