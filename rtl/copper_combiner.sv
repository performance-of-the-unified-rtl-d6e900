// copper_combiner: builds one event record from the fragments of the COPPER's
// links.
//
// A fragment stays in its link FIFO until every unmasked link holds at least
// one complete fragment. The combiner then copies the fragments out link by
// link, in link order, into a single 32-bit stream for the processor (out_*,
// valid/ready; out_ready low is back pressure from the backend). out_last
// marks the final word of the record and out_err, valid with out_last, flags
// a record in which a fragment arrived with a link error or the links carried
// different event numbers or trigger timestamps (header words 0 and 2). A mismatch also sets the
// sticky mismatch output (cleared by clr). ev_count counts records sent.
//
// Reads are combinational from the FIFO head (first-word-fall-through), so a
// word moves every clock the backend is ready.
//
// From the paper: fragments wait until all links are aligned, then are
// combined; event mismatches are detected from the event number and
// timestamp. This design's choice: the record
// layout and the use of the event-number word for the check.
module copper_combiner #(
  parameter int NLINK = 4,
  parameter int CW    = 15
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,        // clears mismatch
  input  logic [NLINK-1:0]            link_mask,
  input  logic [NLINK-1:0][33:0]      rd_data,
  input  logic [NLINK-1:0]            empty,
  input  logic [NLINK-1:0][CW-1:0]    nfrag,
  output logic [NLINK-1:0]            rd_en,
  output logic                        out_valid,
  output logic [31:0]                 out_data,
  output logic                        out_last,
  output logic                        out_err,
  input  logic                        out_ready,
  output logic                        mismatch,
  output logic [31:0]                 ev_count
);
  localparam int LW = (NLINK > 1) ? $clog2(NLINK) : 1;

  typedef enum logic {S_WAIT, S_XFER} state_t;

  state_t          state;
  logic [LW-1:0]   li;
  logic            first_link, ev_err;
  logic [1:0]      widx;            // word index in the fragment, saturating at 3
  logic [31:0]     ref_ev, ref_ts;
  logic            ts_ok;           // the first link's fragment had a word 2
  logic            chk0, chk2, mis;
  logic            all_ready, any_link, link_done, is_final, take;
  logic [LW-1:0]   first_li, next_li;
  logic [33:0]     w;

  // first unmasked link, next unmasked link after li
  always_comb begin
    all_ready = 1'b1;
    any_link  = 1'b0;
    first_li  = '0;
    for (int i = NLINK - 1; i >= 0; i--) begin
      if (!link_mask[i]) begin
        any_link = 1'b1;
        first_li = LW'(i);
        if (nfrag[i] == '0) all_ready = 1'b0;
      end
    end
    next_li  = li;
    is_final = 1'b1;
    for (int i = NLINK - 1; i >= 0; i--) begin
      if (!link_mask[i] && LW'(i) > li) begin
        next_li  = LW'(i);
        is_final = 1'b0;
      end
    end
  end

  assign w         = rd_data[li];
  assign take      = (state == S_XFER) && !empty[li] && out_ready;
  assign link_done = take && w[33];
  assign out_valid = (state == S_XFER) && !empty[li];
  assign out_data  = w[31:0];
  assign out_last  = w[33] && is_final;
  assign chk0      = (widx == 2'd0) && !first_link;
  assign chk2      = (widx == 2'd2) && !first_link && ts_ok;
  assign mis       = (chk0 && w[31:0] != ref_ev) || (chk2 && w[31:0] != ref_ts);
  assign out_err   = ev_err || w[32] || mis;

  always_comb begin
    rd_en = '0;
    rd_en[li] = take;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_WAIT;
      li         <= '0;
      widx       <= '0;
      first_link <= 1'b1;
      ev_err     <= 1'b0;
      ref_ev     <= '0;
      ref_ts     <= '0;
      ts_ok      <= 1'b0;
      mismatch   <= 1'b0;
      ev_count   <= '0;
    end else begin
      if (clr) mismatch <= 1'b0;
      unique case (state)
        S_WAIT: if (any_link && all_ready) begin
          state      <= S_XFER;
          li         <= first_li;
          widx       <= '0;
          first_link <= 1'b1;
          ts_ok      <= 1'b0;
          ev_err     <= 1'b0;
        end
        S_XFER: if (take) begin
          if (w[33])             widx <= '0;
          else if (widx != 2'd3) widx <= widx + 1'b1;
          if (w[32]) ev_err <= 1'b1;
          if (first_link && widx == 2'd0) ref_ev <= w[31:0];
          if (first_link && widx == 2'd2) begin
            ref_ts <= w[31:0];
            ts_ok  <= 1'b1;
          end
          if (mis) begin
            ev_err   <= 1'b1;
            mismatch <= 1'b1;
          end
          if (link_done) begin
            first_link <= 1'b0;
            if (is_final) begin
              state    <= S_WAIT;
              ev_count <= ev_count + 1'b1;
            end else begin
              li <= next_li;
            end
          end
        end
        default: state <= S_WAIT;
      endcase
    end
  end

endmodule
