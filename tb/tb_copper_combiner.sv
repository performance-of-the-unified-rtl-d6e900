// tb_copper_combiner: four link FIFOs (copper_fifo) are filled with
// fragments at random times and lengths; some fragments carry the error flag
// or a wrong event number or timestamp word, and in the second half link 2 is masked. The
// backend is ready at random. Checks each record word for word against the
// fragments in link order, out_last and out_err, that no record starts
// before every unmasked link holds its fragment, the sticky mismatch output
// and the record count.
module tb_copper_combiner;
  localparam int NL = 4, D = 256;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [NL-1:0] link_mask = '0, wr_en = '0, rd_en, empty, ovt, ovf;
  logic [NL-1:0][33:0] wr_data = '0, rd_data;
  logic [NL-1:0][8:0] nfrag, count;
  logic out_valid, out_last, out_err, out_ready = 0, mismatch;
  logic [31:0] out_data, ev_count;
  int checks = 0, failures = 0, nrec = 0, nerr_rec = 0;
  logic [31:0] exp_rec[$][$];
  bit exp_err[$];
  int complete_t[$];   // clock at which the record's last fragment was complete
  int cyc = 0, start_seen = 0;
  logic [31:0] cur[$];

  for (genvar i = 0; i < NL; i++) begin : g_f
    copper_fifo #(.DEPTH(D), .W(34)) f (
      .clk, .rst_n, .wr_en(wr_en[i]), .wr_data(wr_data[i]), .rd_en(rd_en[i]), .rd_data(rd_data[i]),
      .empty(empty[i]), .thr(9'd200), .over_thr(ovt[i]), .overflow(ovf[i]), .count(count[i]), .nfrag(nfrag[i])
    );
  end

  copper_combiner #(.NLINK(NL), .CW(9)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #20000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // backend: random ready, collect and compare records
  initial begin
    bit first = 1;
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (first) begin
          check(nrec < complete_t.size() && cyc > complete_t[nrec], "record waits for all links");
          first = 0;
        end
        cur.push_back(out_data);
        if (out_last) begin
          check(cur == exp_rec[nrec], $sformatf("record %0d contents", nrec));
          check(out_err == exp_err[nrec], $sformatf("record %0d err", nrec));
          cur.delete(); nrec++; first = 1;
        end
      end
    end
  end

  function automatic int first_unmasked();
    for (int l = 0; l < NL; l++) if (!link_mask[l]) return l;
    return 0;
  endfunction

  // writes one event's fragments, links written in random interleaving
  task automatic event_in(int ev, bit bad_ev, bit bad_crc, bit bad_ts = 0);
    logic [31:0] frag[NL][$];
    int len[NL], pos[NL];
    logic [31:0] rec[$];
    bit busy;
    for (int l = 0; l < NL; l++) begin
      len[l] = link_mask[l] ? 0 : $urandom_range(1, 8);
      pos[l] = 0;
      for (int i = 0; i < len[l]; i++)
        frag[l].push_back(i == 0 ? ((bad_ev && l == 3) ? 32'(ev + 1000) : 32'(ev)) :
                          i == 2 ? ((bad_ts && l == 2) ? 32'(ev * 3 + 1) : 32'(ev * 3)) : $urandom);
      rec = {rec, frag[l]};
    end
    exp_rec.push_back(rec);
    exp_err.push_back(bad_ev || bad_crc || (bad_ts && len[2] > 2 && len[first_unmasked()] > 2));
    do begin
      @(negedge clk);
      busy = 0;
      for (int l = 0; l < NL; l++) begin
        wr_en[l] = 0;
        if (pos[l] < len[l]) begin
          busy = 1;
          if ($urandom_range(0, 1) == 1) begin
            wr_en[l] = 1;
            wr_data[l] = {(pos[l] == len[l] - 1), (bad_crc && l == 1 && pos[l] == len[l] - 1), frag[l][pos[l]]};
            pos[l]++;
          end
        end
      end
    end while (busy);
    complete_t.push_back(cyc);
    @(negedge clk) wr_en = '0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    for (int e = 0; e < 60; e++) begin
      event_in(e, 0, e % 9 == 4);
      repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    wait (nrec == 60);
    check(!mismatch, "no mismatch yet");
    event_in(60, 1, 0);
    wait (nrec == 61);
    repeat (2) @(negedge clk);
    check(mismatch, "mismatch flagged");
    @(negedge clk) clr = 1; @(negedge clk) clr = 0;
    check(!mismatch, "mismatch cleared");
    // a wrong timestamp word on link 2 (if its fragment reaches word 2)
    event_in(61, 0, 0, 1);
    wait (nrec == 62);
    @(negedge clk) clr = 1; @(negedge clk) clr = 0;
    link_mask = 4'b0100;
    for (int e = 62; e < 100; e++) begin
      event_in(e, 0, 0);
      repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    wait (nrec == 100);
    repeat (2) @(negedge clk);
    check(ev_count == 32'd100, "record count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
