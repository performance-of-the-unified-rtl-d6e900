// fee_regs: register file of a front-end board, 32-bit registers on a
// 16-bit address space.
//
// The readout card (HSLB) reads and writes these registers to configure a
// board and to read its status. Only a few addresses are populated; the rest
// read as zero and ignore writes.
//   0x0000  board identifier (read only, BOARD_ID)
//   0x0001  busy threshold: trigger-queue depth at which the board asserts
//           busy, bits [7:0] (read/write, reset value BUSY_THR_RST)
//   0x0002  processed event count (read only)
//   0x0003  status: bit 0 SEU-mitigation error, bit 1 busy (read only)
//   0x0004  scratch (read/write)
// A request (req) is answered one clock later with ack; rdata is valid with
// ack. The address width and data width follow the paper; the map, reset
// values and one-clock handshake are this design's choice.
module fee_regs #(
  parameter logic [31:0] BOARD_ID     = 32'hB200_0000,
  parameter logic [7:0]  BUSY_THR_RST = 8'd8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [15:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        ack,
  // configuration out
  output logic [7:0]  busy_thr,
  // status in
  input  logic [31:0] st_evcount,
  input  logic        st_seu,
  input  logic        st_busy
);
  logic [31:0] scratch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_thr <= BUSY_THR_RST;
      scratch  <= '0;
      rdata    <= '0;
      ack      <= 1'b0;
    end else begin
      ack <= req;
      if (req && we) begin
        unique case (addr)
          16'h0001: busy_thr <= wdata[7:0];
          16'h0004: scratch  <= wdata;
          default: ;
        endcase
      end
      if (req) begin
        unique case (addr)
          16'h0000: rdata <= BOARD_ID;
          16'h0001: rdata <= {24'd0, busy_thr};
          16'h0002: rdata <= st_evcount;
          16'h0003: rdata <= {30'd0, st_busy, st_seu};
          16'h0004: rdata <= scratch;
          default:  rdata <= '0;
        endcase
      end
    end
  end

endmodule
