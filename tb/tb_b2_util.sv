// tb_b2_util: reference helpers for the testbenches, written independently
// of the RTL: a byte-wise CRC-16-CCITT and a Belle2link frame encoder.
package tb_b2_util;

  // CRC-16-CCITT (poly 0x1021, init 0xFFFF), processed one byte at a time
  function automatic logic [15:0] crc_bytes(input logic [15:0] crc, input logic [7:0] b);
    logic [15:0] c;
    c = crc ^ {b, 8'h00};
    repeat (8) c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
    return c;
  endfunction

  function automatic logic [15:0] crc_of(input logic [31:0] w[$]);
    logic [15:0] c;
    c = 16'hFFFF;
    foreach (w[i]) begin
      c = crc_bytes(c, w[i][31:24]);
      c = crc_bytes(c, w[i][23:16]);
      c = crc_bytes(c, w[i][15:8]);
      c = crc_bytes(c, w[i][7:0]);
    end
    return c;
  endfunction

  // link words {k[1:0], data[15:0]}
  localparam logic [17:0] L_IDLE = {2'b11, 16'hBCBC};
  localparam logic [17:0] L_SOF  = {2'b11, 16'h1CBC};
  localparam logic [17:0] L_EOF  = {2'b11, 16'hFCBC};

  function automatic void frame(input logic [31:0] w[$], ref logic [17:0] q[$]);
    q.push_back(L_SOF);
    foreach (w[i]) begin
      q.push_back({2'b00, w[i][31:16]});
      q.push_back({2'b00, w[i][15:0]});
    end
    q.push_back({2'b00, crc_of(w)});
    q.push_back(L_EOF);
  endfunction

endpackage
