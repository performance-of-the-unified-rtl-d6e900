// inj_veto: level-1 trigger veto after a beam injection.
//
// Each injection disturbs the whole ring for a short time and the injected
// bunch (and its neighbours) for much longer. After an injection pulse this
// block therefore vetoes every trigger for short_len clocks, and for long_len
// clocks it also vetoes triggers whose ring phase lies within near_win clocks
// of the phase at which the injection happened. The ring phase is a free
// running counter modulo REV_CLK system clocks (one revolution).
//
// The two-window scheme and the programmable lengths follow the paper; the
// revolution length of 1280 clocks (5120 RF buckets over 4) and the phase
// window form are this design's choice. A new injection restarts both windows.
// veto is combinational from registered state plus the inj input (an
// injection vetoes in the same cycle).
module inj_veto #(
  parameter int REV_CLK = 1280,
  parameter int CW      = 24
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       inj,
  input  logic [CW-1:0]              short_len,
  input  logic [CW-1:0]              long_len,
  input  logic [$clog2(REV_CLK)-1:0] near_win,
  output logic                       veto
);
  localparam int PW = $clog2(REV_CLK);

  logic [PW-1:0] phase, inj_phase, dphase;
  logic [CW-1:0] short_cnt, long_cnt;
  logic          near;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      inj_phase <= '0;
      short_cnt <= '0;
      long_cnt  <= '0;
    end else begin
      phase <= (phase == PW'(REV_CLK - 1)) ? '0 : phase + 1'b1;
      if (inj) begin
        inj_phase <= phase;
        short_cnt <= short_len;
        long_cnt  <= long_len;
      end else begin
        if (short_cnt != '0) short_cnt <= short_cnt - 1'b1;
        if (long_cnt  != '0) long_cnt  <= long_cnt - 1'b1;
      end
    end
  end

  // phase distance from the injected bunch, modulo one revolution
  always_comb begin
    if (phase >= inj_phase) dphase = phase - inj_phase;
    else                    dphase = PW'(REV_CLK) - inj_phase + phase;
    near = (dphase <= near_win) || (dphase >= PW'(REV_CLK) - near_win);
  end

  assign veto = inj || (short_cnt != '0) || ((long_cnt != '0) && near);

endmodule
