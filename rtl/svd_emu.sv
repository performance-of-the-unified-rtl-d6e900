// svd_emu: emulation of the SVD front-end buffer occupancy.
//
// The SVD front end is the most timing-critical reader in the detector, so
// the trigger master keeps a model of its buffer and holds back triggers that
// would overflow it. The model is a leaky bucket: every accepted trigger adds
// one event; while the bucket is not empty one event leaves every read_clk
// clocks. full is asserted when the occupancy has reached depth, and the
// trigger master must then refuse triggers.
//
// That such an emulation exists is from the paper; the leaky-bucket model and
// its numbers are this design's placeholders for the real SVD timing. full
// and occ are registered state (no combinational path from trig).
module svd_emu (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        trig,      // accepted trigger
  input  logic [3:0]  depth,     // emulated buffer depth in events
  input  logic [15:0] read_clk,  // clocks to drain one event
  output logic        full,
  output logic [3:0]  occ
);
  logic [15:0] drain_cnt;
  logic        drain;

  assign drain = (occ != '0) && (drain_cnt == 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ       <= '0;
      drain_cnt <= '0;
    end else begin
      case ({trig, drain})
        2'b10:   occ <= occ + 1'b1;
        2'b01:   occ <= occ - 1'b1;
        default: occ <= occ;
      endcase
      // the drain timer runs while events are held; it restarts per event
      if (occ == '0 && !trig)      drain_cnt <= '0;
      else if (drain_cnt <= 16'd1) drain_cnt <= read_clk;
      else                         drain_cnt <= drain_cnt - 1'b1;
    end
  end

  assign full = (occ >= depth);

  // a trigger must not be accepted into a full buffer
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(trig && full));

endmodule
