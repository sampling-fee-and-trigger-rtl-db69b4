// tb_ccm: the controller fabric with all sixteen links.  Each link sends
// bench-built packets (header with module ID = link and consecutive sequence
// numbers, lead/trail pairs with known ToT, trailer); link 2 skips a sequence
// number, link 5 sends one trailer with a wrong count, link 7 one with the
// overflow flag.  Sources pause and the output is back-pressured at random.
// The bench checks that every link's words leave unchanged and in order,
// and compares each link's quality record and ToT histogram, read through
// the processor port, with its own counts.
module tb_ccm;
  import daq_pkg::*;

  localparam int NL = 16, NB = 64, PKTS = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic  [NL-1:0] in_valid, in_last, in_ready;
  word_t [NL-1:0] in_data;
  logic out_valid, out_last, out_ready = 1'b0, cpu_clr = 1'b0;
  word_t out_data;
  logic [$clog2(NL)-1:0] cpu_link = '0;
  logic [$clog2(NB)-1:0] cpu_bin = '0;
  logic [31:0] cpu_hist;
  dqa_t cpu_dqa;
  logic [NL-1:0] tot_v;
  int checks = 0, failures = 0;

  ccm dut (.clk, .rst_n, .in_valid_i(in_valid), .in_data_i(in_data), .in_last_i(in_last),
           .in_ready_o(in_ready), .out_valid_o(out_valid), .out_data_o(out_data),
           .out_last_o(out_last), .out_ready_i(out_ready), .cpu_clr_i(cpu_clr),
           .cpu_link_i(cpu_link), .cpu_bin_i(cpu_bin), .cpu_hist_o(cpu_hist),
           .cpu_dqa_o(cpu_dqa), .tot_v_o(tot_v));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  // Per-link word lists built up front; expected counters alongside.
  word_t src [NL][$];
  bit    lst [NL][$];
  word_t fwd [NL][$];   // copy for checking the output
  int    e_pk [NL], e_hw [NL], e_gap [NL], e_len [NL], e_ovf [NL];
  int    e_hist [NL][NB];

  function automatic word_t hitw(bit lead, int ch, int coarse);
    return word_t'(hit_word_t'{rsv: 1'b0, lead: lead, ch: CH_W'(ch),
                               coarse: coarse_t'(coarse), fine: fine_t'($urandom)});
  endfunction

  task automatic build();
    for (int l = 0; l < NL; l++) begin
      int s;
      s = 10 * l;
      e_pk[l] = 0; e_hw[l] = 0; e_gap[l] = 0; e_len[l] = 0; e_ovf[l] = 0;
      for (int b = 0; b < NB; b++) e_hist[l][b] = 0;
      for (int p = 0; p < PKTS; p++) begin
        int n;
        bit bad, ovf;
        if (l == 2 && p == 3) begin s += 2; e_gap[l]++; end
        src[l].push_back({16'(l), 16'(s)}); lst[l].push_back(1'b0);
        s++;
        n = $urandom % 5;
        for (int k = 0; k < n; k++) begin
          int ch, t0, w;
          ch = $urandom % 192; t0 = $urandom % 4096; w = $urandom % 80;
          src[l].push_back(hitw(1'b1, ch, t0));     lst[l].push_back(1'b0);
          src[l].push_back(hitw(1'b0, ch, t0 + w)); lst[l].push_back(1'b0);
          e_hist[l][w >= NB ? NB - 1 : w]++;
        end
        e_hw[l] += 2 * n;
        bad = (l == 5 && p == 2);
        ovf = (l == 7 && p == 4);
        src[l].push_back(word_t'(trl_word_t'{overflow: ovf, rsv: '0, n_hits: 16'(bad ? 2 * n + 3 : 2 * n)}));
        lst[l].push_back(1'b1);
        e_pk[l]++;
        if (bad) e_len[l]++;
        if (ovf) e_ovf[l]++;
      end
      fwd[l] = src[l];
    end
  endtask

  logic [NL-1:0] on;
  bit go = 1'b0;     // sources start once the histograms are cleared
  always_comb
    for (int l = 0; l < NL; l++) begin
      in_valid[l] = on[l] && src[l].size() > 0;
      in_data[l]  = src[l].size() > 0 ? src[l][0] : '0;
      in_last[l]  = lst[l].size() > 0 ? lst[l][0] : 1'b0;
    end

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NL; l++)
      if (in_valid[l] && in_ready[l]) begin
        void'(src[l].pop_front());
        void'(lst[l].pop_front());
      end
  end
  always @(negedge clk) begin
    on <= go ? NL'($urandom | $urandom) : '0;
    out_ready <= ($urandom % 3) != 0;
  end

  int cur = -1, n_words = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    word_t e;
    if (cur < 0) cur = int'(out_data[31:16]);
    if (cur >= NL || fwd[cur].size() == 0) check(0, "unexpected word");
    else begin
      e = fwd[cur].pop_front();
      check(out_data == e, $sformatf("link %0d word %h exp %h", cur, out_data, e));
    end
    n_words++;
    if (out_last) cur = -1;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int left;
    on = '0;
    build();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (NB + 2) @(negedge clk);
    go = 1'b1;
    do begin
      @(negedge clk);
      left = 0;
      for (int l = 0; l < NL; l++) left += fwd[l].size();
    end while (left != 0);
    repeat (3) @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      cpu_link = l[$clog2(NL)-1:0];
      #1;
      check(cpu_dqa.packets == 32'(e_pk[l]), $sformatf("link %0d packets", l));
      check(cpu_dqa.hit_words == 32'(e_hw[l]), $sformatf("link %0d hit words", l));
      check(cpu_dqa.seq_gaps == 32'(e_gap[l]), $sformatf("link %0d gaps %0d", l, cpu_dqa.seq_gaps));
      check(cpu_dqa.len_errors == 32'(e_len[l]), $sformatf("link %0d length errors", l));
      check(cpu_dqa.overflows == 32'(e_ovf[l]), $sformatf("link %0d overflows", l));
      check(cpu_dqa.module_id == modid_t'(l), "module id");
      for (int b = 0; b < NB; b++) begin
        cpu_bin = b[$clog2(NB)-1:0];
        #1 check(cpu_hist == 32'(e_hist[l][b]), $sformatf("link %0d bin %0d: %0d exp %0d", l, b, cpu_hist, e_hist[l][b]));
      end
    end
    @(negedge clk);
    cpu_clr = 1'b1; @(negedge clk); cpu_clr = 1'b0;
    repeat (NB + 2) @(negedge clk);
    cpu_link = 4'd3; cpu_bin = '0;
    #1 check(cpu_dqa == '0 && cpu_hist == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
