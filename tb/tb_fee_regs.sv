// tb_fee_regs: writes and reads every populated register of the board
// register file and a few unpopulated addresses; checks the one-clock
// acknowledge, read-only registers and the busy-threshold output.
module tb_fee_regs;
  logic clk = 0, rst_n = 0, req = 0, we = 0, ack, st_seu = 0, st_busy = 0;
  logic [15:0] addr = '0;
  logic [31:0] wdata = '0, rdata, st_evcount = 32'd1234;
  logic [7:0]  busy_thr;
  int checks = 0, failures = 0;

  fee_regs #(.BOARD_ID(32'hB200_0007), .BUSY_THR_RST(8'd8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic access(bit w, logic [15:0] a, logic [31:0] d, output logic [31:0] r);
    @(negedge clk); req = 1; we = w; addr = a; wdata = d;
    @(negedge clk); req = 0; we = 0;
    check(ack, "ack after one clock");
    r = rdata;
    @(negedge clk); check(!ack, "ack is one pulse");
  endtask

  initial begin
    logic [31:0] r;
    repeat (3) @(negedge clk); rst_n = 1;
    check(busy_thr == 8'd8, "threshold reset value");
    access(0, 16'h0000, 0, r); check(r == 32'hB200_0007, "board id");
    access(1, 16'h0000, 32'h1, r);
    access(0, 16'h0000, 0, r); check(r == 32'hB200_0007, "board id read only");
    access(1, 16'h0001, 32'hFFFF_FF05, r);
    check(busy_thr == 8'd5, "threshold written");
    access(0, 16'h0001, 0, r); check(r == 32'h5, "threshold readback");
    access(0, 16'h0002, 0, r); check(r == 32'd1234, "event count");
    st_seu = 1; st_busy = 1;
    access(0, 16'h0003, 0, r); check(r == 32'h3, "status");
    st_seu = 0;
    access(0, 16'h0003, 0, r); check(r == 32'h2, "status busy only");
    access(1, 16'h0004, 32'hDEAD_BEEF, r);
    access(0, 16'h0004, 0, r); check(r == 32'hDEAD_BEEF, "scratch");
    access(1, 16'h8004, 32'h1234_5678, r);
    access(0, 16'h8004, 0, r); check(r == 32'h0, "unpopulated reads 0");
    access(0, 16'h0004, 0, r); check(r == 32'hDEAD_BEEF, "scratch not aliased");
    access(0, 16'hFFFF, 0, r); check(r == 32'h0, "top address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
