// copper_fifo: COPPER FIFO buffer for one Belle2link, with a programmable
// back-pressure threshold.
//
// A synchronous first-word-fall-through FIFO of DEPTH words of W bits. The
// data word is {last, err, data[31:0]}. over_thr is asserted while more than
// thr words are held; it is the back pressure the COPPER sends to the trigger
// distribution. Because the link has no back pressure to the front end, a
// write into a full FIFO is dropped and sets the sticky overflow flag; the
// threshold must leave room for the events already triggered.
//
// nfrag counts complete fragments held (words with last set), which the event
// combiner uses to wait until every link has its fragment. count, nfrag and
// over_thr are registered; rd_data shows the head word whenever !empty.
//
// From the paper: the FIFO, the programmable threshold and back pressure to
// the timing distribution. This design's choice: the depth (64 KiB of data
// per link), the word format and the overflow policy.
module copper_fifo #(
  parameter int DEPTH = 16384,
  parameter int W     = 34,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  output logic [W-1:0]  rd_data,
  output logic          empty,
  input  logic [AW:0]   thr,
  output logic          over_thr,
  output logic          overflow,
  output logic [AW:0]   count,
  output logic [AW:0]   nfrag
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd, wr_eof, rd_eof;

  assign empty   = (count == '0);
  assign do_wr   = wr_en && (count != (AW+1)'(DEPTH));
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp];
  assign wr_eof  = do_wr && wr_data[W-1];
  assign rd_eof  = do_rd && rd_data[W-1];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      nfrag    <= '0;
      over_thr <= 1'b0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      nfrag <= nfrag + (AW+1)'(wr_eof) - (AW+1)'(rd_eof);
      over_thr <= (count + (AW+1)'(do_wr) - (AW+1)'(do_rd)) > thr;
      if (wr_en && !do_wr) overflow <= 1'b1;
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule
