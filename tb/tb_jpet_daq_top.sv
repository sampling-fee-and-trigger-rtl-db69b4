// tb_jpet_daq_top: end-to-end test of the whole readout chain at its default
// size (8 slaves x 4 TDCs x 48 channels, 54-signal buffers, a readout
// request every 4000 cycles, 16 CCM links).
//
// The bench plays the front end: every channel fires random pulses (mostly
// 1-4 clocks wide, a few 64-100 clocks wide), and the bench records each
// complete signal with the coarse time of a counter of its own and the fine
// code it applied.  At the event-building output it takes the packets apart
// and matches every signal, per channel and in order, with its record; it
// checks module IDs, trailer counts, and keeps its own per-link packet,
// hit-word, sequence-gap and overflow counts and ToT histograms, which are
// compared at the end with what the CCM reports through its read port.
//
// Mechanisms forced and counted (each must occur at least once):
//   readout requests, packets with data, signals recorded while their board
//   is being read out, buffer overflow (one channel bursts in one window),
//   back-pressure from the event-building side, several slaves competing for
//   the CCM output, a request arriving while a slave is busy (late, held),
//   a request lost because two arrived while busy (missed -> sequence gap),
//   ToT histogram entries in the last (overflow) bin, and the CPU clear.
module tb_jpet_daq_top;
  import daq_pkg::*;

  localparam int NS = 8, NT = 4, NC = 48, NL = 16, NB = 64;
  localparam int PERIOD = 4000;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0;
  logic  [NS-1:0][NT-1:0][NC-1:0] hit = '0;
  fine_t [NS-1:0][NT-1:0][NC-1:0] fine = '0;
  logic  eb_valid, eb_last, eb_ready = 1'b0;
  word_t eb_data;
  logic  cpu_clr = 1'b0;
  logic [$clog2(NL)-1:0] cpu_link = '0;
  logic [$clog2(NB)-1:0] cpu_bin = '0;
  logic [31:0] cpu_hist;
  dqa_t cpu_dqa;
  logic [NL-1:0] tot_v;
  logic [15:0] late;
  logic [NS-1:0] late_slaves, busy;
  logic [NS-1:0][15:0] missed;

  jpet_daq_top dut (
    .clk, .rst_n, .enable_i(enable), .hit_i(hit), .fine_i(fine),
    .eb_valid_o(eb_valid), .eb_data_o(eb_data), .eb_last_o(eb_last), .eb_ready_i(eb_ready),
    .cpu_clr_i(cpu_clr), .cpu_link_i(cpu_link), .cpu_bin_i(cpu_bin),
    .cpu_hist_o(cpu_hist), .cpu_dqa_o(cpu_dqa), .tot_v_o(tot_v),
    .late_o(late), .late_slaves_o(late_slaves), .missed_o(missed), .busy_o(busy));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  coarse_t cnt;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cnt <= '0; else cnt <= cnt + 1'b1;

  // ---------------- front-end model ----------------
  localparam int NCH = NS * NT * NC;
  localparam int BURST = (3 * NT + 1) * NC + 5;   // slave 3, TDC 1, channel 5
  signal_t expq [NCH][$];
  int      remain [NCH];
  signal_t cur [NCH];
  bit      gen_on = 1'b0, burst_on = 1'b0;
  int      n_sig = 0, n_during_readout = 0;

  always @(negedge clk) begin
    for (int g = 0; g < NCH; g++) begin
      int s, t, c;
      s = g / (NT * NC); t = (g / NC) % NT; c = g % NC;
      fine[s][t][c] = fine_t'($urandom);
      if (hit[s][t][c]) begin
        if (remain[g] == 0) begin
          hit[s][t][c] = 1'b0;
          cur[g].trail = '{coarse: cnt, fine: fine[s][t][c]};
          if (g != BURST) expq[g].push_back(cur[g]);
          n_sig++;
          if (busy[s]) n_during_readout++;
        end else remain[g]--;
      end else if ((gen_on && ($urandom % 20000) == 0) || (burst_on && g == BURST)) begin
        hit[s][t][c] = 1'b1;
        remain[g] = (g != BURST && ($urandom % 20) == 0) ? 63 + $urandom % 37 : $urandom % 4;
        cur[g].lead = '{coarse: cnt, fine: fine[s][t][c]};
      end
    end
  end

  // ---------------- event-building side ----------------
  int  n_pkts [NS], n_hitw [NS], n_gaps [NS], n_ovf [NS];
  int  hist [NS][NB];
  int  last_seq [NS];
  int  n_stall = 0, n_multi_busy = 0, n_data_pkts = 0, n_last_bin = 0, n_tot_events = 0;
  bit  stall = 1'b0;

  always @(negedge clk) eb_ready <= !stall && ($urandom % 10 != 0);

  always @(posedge clk) if (rst_n) begin
    if (eb_valid && !eb_ready) n_stall++;
    if ($countones(busy) > 1) n_multi_busy++;
    n_tot_events += $countones(tot_v);
  end

  int in_pkt = 0, pkt_s = 0, pkt_hits = 0;
  hit_word_t lead_w;
  always @(posedge clk) if (rst_n && eb_valid && eb_ready) begin
    if (in_pkt == 0) begin
      hdr_word_t h;
      h = hdr_word_t'(eb_data);
      pkt_s = int'(h.module_id);
      check(pkt_s < NS, $sformatf("module id %0d", pkt_s));
      if (last_seq[pkt_s] >= 0 && int'(h.seq) != ((last_seq[pkt_s] + 1) & 16'hFFFF)) n_gaps[pkt_s]++;
      last_seq[pkt_s] = int'(h.seq);
      n_pkts[pkt_s]++;
      pkt_hits = 0;
      in_pkt = 1;
      check(!eb_last, "header is not the last word");
    end else if (eb_last) begin
      trl_word_t tr;
      tr = trl_word_t'(eb_data);
      check(int'(tr.n_hits) == pkt_hits, $sformatf("trailer count %0d exp %0d", tr.n_hits, pkt_hits));
      if (tr.overflow) n_ovf[pkt_s]++;
      if (pkt_hits > 0) n_data_pkts++;
      in_pkt = 0;
    end else begin
      hit_word_t w;
      w = hit_word_t'(eb_data);
      pkt_hits++;
      n_hitw[pkt_s]++;
      if (w.lead) lead_w = w;
      else begin
        int g, tot;
        signal_t got;
        g = pkt_s * NT * NC + int'(w.ch);
        check(lead_w.ch == w.ch, "trail follows lead of same channel");
        got = '{lead: '{coarse: lead_w.coarse, fine: lead_w.fine},
                trail: '{coarse: w.coarse, fine: w.fine}};
        if (g != BURST) begin
          if (expq[g].size() == 0) check(0, $sformatf("channel %0d: unexpected signal", g));
          else begin
            signal_t e;
            e = expq[g].pop_front();
            check(got == e, $sformatf("channel %0d: got %h exp %h", g, got, e));
          end
        end
        tot = int'(coarse_t'(w.coarse - lead_w.coarse));
        if (tot >= NB - 1) n_last_bin++;
        hist[pkt_s][tot >= NB ? NB - 1 : tot]++;
      end
    end
  end

  initial begin
    repeat (16 * PERIOD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(input int n, input string what);
    $display("mechanism %-34s %0d", what, n);
    check(n > 0, $sformatf("mechanism never happened: %s", what));
  endtask

  initial begin
    foreach (remain[g]) remain[g] = 0;
    foreach (n_pkts[s]) begin
      n_pkts[s] = 0; n_hitw[s] = 0; n_gaps[s] = 0; n_ovf[s] = 0; last_seq[s] = -1;
      for (int b = 0; b < NB; b++) hist[s][b] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (NB + 2) @(negedge clk);          // histograms clear after reset
    enable = 1'b1;
    gen_on = 1'b1;
    // Window 2: one channel bursts beyond its 54-signal buffer.
    repeat (PERIOD * 2 + 500) @(negedge clk);
    burst_on = 1'b1;
    repeat (700) @(negedge clk);
    burst_on = 1'b0;
    // Event-building side stalls for more than two request periods.
    repeat (PERIOD * 2) @(negedge clk);
    stall = 1'b1;
    repeat (PERIOD * 2 + 1500) @(negedge clk);
    stall = 1'b0;
    repeat (PERIOD * 2) @(negedge clk);
    // Stop the front end; two more requests empty every buffer.
    gen_on = 1'b0;
    repeat (PERIOD * 2 + 200) @(negedge clk);
    enable = 1'b0;
    while (busy != '0 || in_pkt != 0) @(negedge clk);
    repeat (5) @(negedge clk);

    for (int g = 0; g < NCH; g++)
      check(expq[g].size() == 0, $sformatf("channel %0d: %0d signals never arrived", g, expq[g].size()));

    // CCM results against the bench's own account of the output stream.
    for (int l = 0; l < NL; l++) begin
      cpu_link = l[$clog2(NL)-1:0];
      #1;
      if (l < NS) begin
        check(cpu_dqa.packets == 32'(n_pkts[l]), $sformatf("link %0d packets %0d exp %0d", l, cpu_dqa.packets, n_pkts[l]));
        check(cpu_dqa.hit_words == 32'(n_hitw[l]), $sformatf("link %0d hit words", l));
        check(cpu_dqa.seq_gaps == 32'(n_gaps[l]), $sformatf("link %0d gaps %0d exp %0d", l, cpu_dqa.seq_gaps, n_gaps[l]));
        check(cpu_dqa.overflows == 32'(n_ovf[l]), $sformatf("link %0d overflows", l));
        check(cpu_dqa.len_errors == 0, "no length errors");
        check(cpu_dqa.module_id == modid_t'(l), "module id");
        for (int b = 0; b < NB; b++) begin
          cpu_bin = b[$clog2(NB)-1:0];
          #1 check(cpu_hist == 32'(hist[l][b]), $sformatf("link %0d bin %0d: %0d exp %0d", l, b, cpu_hist, hist[l][b]));
        end
      end else begin
        check(cpu_dqa.packets == 0, "idle link has no packets");
      end
    end
    @(negedge clk);
    cpu_clr = 1'b1; @(negedge clk); cpu_clr = 1'b0;
    repeat (NB + 2) @(negedge clk);
    cpu_link = '0; cpu_bin = '0;
    #1 check(cpu_dqa == '0 && cpu_hist == 0, "CPU clear");

    begin
      int pk, ov, gp, ms;
      pk = 0; ov = 0; gp = 0; ms = 0;
      foreach (n_pkts[s]) begin pk += n_pkts[s]; ov += n_ovf[s]; gp += n_gaps[s]; ms += int'(missed[s]); end
      $display("signals generated %0d", n_sig);
      need(pk, "readout packets");
      need(n_data_pkts, "packets carrying signals");
      need(n_during_readout, "signals recorded during readout");
      need(ov, "buffer overflow");
      need(n_stall, "event-building back-pressure cycles");
      need(n_multi_busy, "slaves competing for CCM output");
      need(int'(late), "request while a slave busy (late)");
      need(ms, "request missed (two while busy)");
      need(gp, "sequence gaps seen by CCM");
      need(n_last_bin, "ToT in last histogram bin");
      need(n_tot_events, "ToT extractions");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
