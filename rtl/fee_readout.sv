// fee_readout: trigger receiver and event-fragment builder of the unified
// front-end firmware.
//
// Each trigger message from the timing distribution tree is stored in a
// trigger queue of QDEPTH entries. The board asserts busy (back pressure to
// the trigger master) while the queue holds busy_thr or more triggers; a
// trigger arriving at a full queue is lost and sets the sticky overflow flag,
// which the board reports as an error.
//
// For the trigger at the head of the queue the builder emits a 4-word header
// followed by the detector payload for that event:
//   word 0  event number
//   word 1  {0, trigger type[3:0], trigger timestamp[58:32]}
//   word 2  trigger timestamp[31:0]
//   word 3  local timestamp[31:0] when this header starts (start of transfer)
//   payload words from the pl_* stream, up to and including pl_last
// frag_last marks the final payload word. The difference between words 3 and
// 2 is the readout latency of the board. The local timestamp counts system
// clocks and is reloaded from every received trigger, so it follows the
// master's clock count with the fixed delay of the distribution tree.
//
// The frag_* and pl_* streams use valid/ready; the payload is passed through
// combinationally while the builder is in its payload state. ev_count counts
// completed fragments.
//
// From the paper: trigger reception, back pressure from the front end, and
// the start-of-transfer timestamp in the header. This design's choice: the
// queue, busy rule and header layout.
module fee_readout
  import b2_pkg::*;
#(
  parameter int QDEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  trig_msg_t        trig_in,
  input  logic [7:0]       busy_thr,
  output logic             busy,
  output logic             overflow,
  output logic [31:0]      ev_count,
  // detector payload
  input  logic             pl_valid,
  input  logic [31:0]      pl_data,
  input  logic             pl_last,
  output logic             pl_ready,
  // fragment to the link transmitter
  output logic             frag_valid,
  output logic [31:0]      frag_data,
  output logic             frag_last,
  input  logic             frag_ready
);
  localparam int QW = $clog2(QDEPTH);

  typedef struct packed {
    logic [EV_W-1:0] evnum;
    logic [TS_W-1:0] ts;
    logic [TT_W-1:0] ttype;
  } trig_entry_t;

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY} state_t;

  trig_entry_t       q [QDEPTH];
  logic [QW-1:0]     wp, rp;
  logic [QW:0]       qcount;
  logic              push, pop;
  trig_entry_t       head;
  state_t            state;
  logic [1:0]        hidx;
  logic [TS_W-1:0]   ts_local;
  logic [31:0]       ts_start;

  assign push = trig_in.valid && (qcount != (QW+1)'(QDEPTH));
  assign head = q[rp];
  assign busy = (32'(qcount) >= 32'(busy_thr)) || (qcount == (QW+1)'(QDEPTH));
  assign pop  = (state == S_PAY) && pl_valid && pl_last && frag_ready;

  always_ff @(posedge clk) begin
    if (push) q[wp] <= '{evnum: trig_in.evnum, ts: trig_in.ts, ttype: trig_in.ttype};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      qcount   <= '0;
      overflow <= 1'b0;
      ev_count <= '0;
      state    <= S_IDLE;
      hidx     <= '0;
      ts_local <= '0;
      ts_start <= '0;
    end else begin
      ts_local <= trig_in.valid ? trig_in.ts + 1'b1 : ts_local + 1'b1;
      if (trig_in.valid && !push) overflow <= 1'b1;
      if (push) wp <= (wp == QW'(QDEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == QW'(QDEPTH-1)) ? '0 : rp + 1'b1;
      qcount <= qcount + (QW+1)'(push) - (QW+1)'(pop);

      unique case (state)
        S_IDLE: if (qcount != '0) begin
          state    <= S_HDR;
          hidx     <= '0;
          ts_start <= ts_local[31:0];
        end
        S_HDR: if (frag_ready) begin
          hidx <= hidx + 1'b1;
          if (hidx == 2'(HDR_WORDS-1)) state <= S_PAY;
        end
        S_PAY: if (pop) begin
          state    <= S_IDLE;
          ev_count <= ev_count + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    frag_valid = 1'b0;
    frag_data  = '0;
    frag_last  = 1'b0;
    pl_ready   = 1'b0;
    unique case (state)
      S_HDR: begin
        frag_valid = 1'b1;
        unique case (hidx)
          2'd0: frag_data = head.evnum;
          2'd1: frag_data = {1'b0, head.ttype, head.ts[58:32]};
          2'd2: frag_data = head.ts[31:0];
          default: frag_data = ts_start;
        endcase
      end
      S_PAY: begin
        frag_valid = pl_valid;
        frag_data  = pl_data;
        frag_last  = pl_last;
        pl_ready   = frag_ready;
      end
      default: ;
    endcase
  end

endmodule
