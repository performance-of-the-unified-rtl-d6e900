// trig_master: main node of the trigger timing distribution (TTD) tree.
//
// Every level-1 trigger request passes through a chain of gates before it is
// distributed: the run must be on, no collected busy (back pressure from the
// front ends or the COPPER FIFOs) may be present, the injection veto must be
// off, at least min_interval clocks must have passed since the previous
// accepted trigger (programmable interval counter), and the SVD buffer
// emulation must have room. An accepted trigger is sent down the tree, one
// clock after the request, as a trig_msg_t carrying the next event number,
// the 59-bit timestamp and the trigger type. A blocked request is dropped,
// not delayed.
//
// A link error reported by any status tree stops the run (running drops and
// stays low until run_start). The block counts accepted triggers, dropped
// requests, and dead clocks (clocks in which a request would have been
// blocked), the quantity behind the dead-time fraction.
//
// From the paper: the gating conditions, the 59-bit monotonic timestamp,
// event number and trigger type in the message, and stop on link error.
// This design's choice: the timestamp is a free-running count of system
// clocks, event numbers start at 0 for each run, widths of event number and
// type, and dropping (not queueing) blocked requests.
module trig_master
  import b2_pkg::*;
#(
  parameter int NSUM = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  // trigger system
  input  logic             l1_trig,
  input  logic [TT_W-1:0]  l1_type,
  input  logic             inj,
  // run control and configuration
  input  logic             run_start,
  input  logic             run_stop,
  input  logic [15:0]      min_interval,
  input  logic [23:0]      veto_short,
  input  logic [23:0]      veto_long,
  input  logic [10:0]      veto_near,
  input  logic [3:0]       svd_depth,
  input  logic [15:0]      svd_read_clk,
  // collected status
  input  logic [NSUM-1:0]  sum_busy,
  input  logic [NSUM-1:0]  sum_err,
  // distribution
  output trig_msg_t        trig_out,
  output logic             running,
  output logic [EV_W-1:0]  ev_count,
  output logic [31:0]      drop_count,
  output logic [31:0]      dead_clks,
  output logic             err_stop,   // run was stopped by a link error
  output logic [TS_W-1:0]  timestamp,
  output logic [3:0]       svd_occ     // emulated SVD buffer occupancy
);
  logic        veto, svd_full, busy_any, interval_ok, accept;
  logic [15:0] since;


  inj_veto #(.REV_CLK(1280), .CW(24)) u_veto (
    .clk, .rst_n, .inj,
    .short_len(veto_short), .long_len(veto_long), .near_win(veto_near),
    .veto
  );

  svd_emu u_svd (
    .clk, .rst_n, .trig(accept), .depth(svd_depth), .read_clk(svd_read_clk),
    .full(svd_full), .occ(svd_occ)
  );

  assign busy_any    = |sum_busy;
  assign interval_ok = (since >= min_interval);
  assign accept      = l1_trig && running && !(|sum_err) && !busy_any && !veto && interval_ok && !svd_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timestamp  <= '0;
      running    <= 1'b0;
      err_stop   <= 1'b0;
      ev_count   <= '0;
      drop_count <= '0;
      dead_clks  <= '0;
      since      <= '1;
      trig_out   <= '0;
    end else begin
      timestamp <= timestamp + 1'b1;

      if (running && (|sum_err)) begin
        running  <= 1'b0;
        err_stop <= 1'b1;
      end else if (run_stop) begin
        running <= 1'b0;
      end else if (run_start && !running) begin
        running  <= 1'b1;
        err_stop <= 1'b0;
        ev_count <= '0;
      end

      trig_out.valid <= accept;
      if (accept) begin
        trig_out.evnum <= ev_count;
        trig_out.ts    <= timestamp;
        trig_out.ttype <= l1_type;
        ev_count       <= ev_count + 1'b1;
        since          <= 16'd1;
      end else if (since != '1) begin
        since <= since + 1'b1;
      end

      if (l1_trig && !accept) drop_count <= drop_count + 1'b1;
      if (running && (busy_any || veto || !interval_ok || svd_full))
        dead_clks <= dead_clks + 1'b1;
    end
  end

  // the message leaves only while running, and the SVD model never overflows
  a_run: assert property (@(posedge clk) disable iff (!rst_n) accept |-> running);

endmodule
