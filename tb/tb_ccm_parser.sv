// tb_ccm_parser: feeds packets built by the bench (random header, random
// hit words, trailer with the right or a wrong count, random gaps between
// words) and checks every event the parser raises, in order.
module tb_ccm_parser;
  import daq_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic beat = 1'b0, last = 1'b0;
  word_t data = '0;
  logic hdr_v, hit_v, trl_v, trl_ovf, len_err;
  modid_t module_id;
  seq_t seq;
  hit_word_t hit;
  int checks = 0, failures = 0;

  ccm_parser dut (.clk, .rst_n, .beat_i(beat), .data_i(data), .last_i(last),
                  .hdr_v_o(hdr_v), .module_id_o(module_id), .seq_o(seq),
                  .hit_v_o(hit_v), .hit_o(hit), .trl_v_o(trl_v),
                  .trl_ovf_o(trl_ovf), .len_err_o(len_err));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Expected events: {kind, value}; kind 0 header, 1 hit, 2 trailer
  typedef struct { int kind; word_t v; bit err; } ev_t;
  ev_t expq[$];
  int n_ev = 0;

  always @(posedge clk) if (rst_n) begin
    if (hdr_v || hit_v || trl_v) begin
      ev_t e;
      if (hdr_v && expq.size() > 0 && expq[0].kind == 0) begin
        e = expq.pop_front();
        check({module_id, seq} == e.v, "header fields");
        n_ev++;
      end
      if (hit_v) begin
        e = expq.pop_front();
        check(e.kind == 1 && word_t'(hit) == e.v, $sformatf("hit %h exp %h", hit, e.v));
        n_ev++;
      end
      if (trl_v) begin
        e = expq.pop_front();
        check(e.kind == 2 && trl_ovf == e.v[31] && len_err == e.err, "trailer event");
        n_ev++;
      end
    end
  end

  task automatic send(input word_t w, input bit l);
    while (($urandom % 3) == 0) @(negedge clk);
    beat = 1'b1; data = w; last = l;
    @(negedge clk);
    beat = 1'b0; last = 1'b0; data = word_t'($urandom);   // junk between beats
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 40; p++) begin
      word_t h;
      int n;
      bit bad, ovf;
      h = word_t'($urandom);
      n = $urandom % 12;
      bad = (p % 7 == 3);
      ovf = (p % 5 == 1);
      expq.push_back('{0, h, 1'b0});
      send(h, 1'b0);
      for (int i = 0; i < n; i++) begin
        word_t w;
        w = {1'b0, 31'($urandom)};
        expq.push_back('{1, w, 1'b0});
        send(w, 1'b0);
      end
      begin
        trl_word_t t;
        t = '{overflow: ovf, rsv: '0, n_hits: 16'(bad ? n + 1 : n)};
        expq.push_back('{2, word_t'(t), bad});
        send(word_t'(t), 1'b1);
      end
      total += n + 2;
    end
    repeat (3) @(negedge clk);
    check(expq.size() == 0, $sformatf("%0d events not seen", expq.size()));
    check(n_ev == total, $sformatf("events %0d exp %0d", n_ev, total));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
