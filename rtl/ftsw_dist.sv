// ftsw_dist: one distribution node of the trigger timing distribution tree.
//
// Downstream, the node copies the trigger message it receives to each of its
// NPORT ports (20 distribution connectors on the real module), one clock
// later. Upstream, it collects the status of every port - busy, link error,
// SEU-mitigation error and the number of processed events - and summarises
// it: busy, error and SEU are ORed over the ports that are not masked, and the
// event count is the smallest count among them (the slowest destination).
// A masked port neither blocks triggers nor stops the run, which is how an
// unused or misbehaving connection is taken out. A reset request for a port
// is sent to it as a one-clock pulse. If every port is masked the summary is
// idle and the count is all ones.
//
// Nodes cascade: a node's s_* outputs feed one p_* input of the node above.
// Everything is registered, so each stage adds one clock of latency in each
// direction.
//
// From the paper: fan-out, status collection and summary of errors, event
// counts and SEU status, masking and remote reset of each connection. This
// design's choice: the OR/minimum summary rule and the parallel (not serial)
// connection between nodes.
module ftsw_dist
  import b2_pkg::*;
#(
  parameter int NPORT = 20
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // from upstream
  input  trig_msg_t                  trig_in,
  input  logic [NPORT-1:0]           mask,
  input  logic [NPORT-1:0]           rst_req,
  // to the ports
  output trig_msg_t [NPORT-1:0]      trig_out,
  output logic      [NPORT-1:0]      p_rst,
  // from the ports
  input  logic      [NPORT-1:0]      p_busy,
  input  logic      [NPORT-1:0]      p_err,
  input  logic      [NPORT-1:0]      p_seu,
  input  logic      [NPORT-1:0][EV_W-1:0] p_evcnt,
  // summary to upstream
  output logic                       s_busy,
  output logic                       s_err,
  output logic                       s_seu,
  output logic      [EV_W-1:0]       s_evcnt
);
  logic [EV_W-1:0] evmin;

  always_comb begin
    evmin = '1;
    for (int i = 0; i < NPORT; i++)
      if (!mask[i] && p_evcnt[i] < evmin) evmin = p_evcnt[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_out <= '0;
      p_rst    <= '0;
      s_busy   <= 1'b0;
      s_err    <= 1'b0;
      s_seu    <= 1'b0;
      s_evcnt  <= '1;
    end else begin
      for (int i = 0; i < NPORT; i++) trig_out[i] <= trig_in;
      p_rst   <= rst_req;
      s_busy  <= |(p_busy & ~mask);
      s_err   <= |(p_err  & ~mask);
      s_seu   <= |(p_seu  & ~mask);
      s_evcnt <= evmin;
    end
  end

endmodule
