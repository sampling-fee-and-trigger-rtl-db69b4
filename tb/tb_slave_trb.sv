// tb_slave_trb: one slave board at its defaults (4 TDCs x 48 channels).
// The bench fires random pulses on all 192 channels, records each complete
// signal, sends readout requests with chosen sequence numbers, takes the
// packets apart (random back-pressure) and matches every signal per channel
// and in order; it checks header, trailer count, and that after the front
// end stops and one more readout every recorded signal has arrived.
module tb_slave_trb;
  import daq_pkg::*;

  localparam int NT = 4, NC = 48, NCH = NT * NC;

  logic clk = 1'b0, rst_n = 1'b0, req = 1'b0;
  seq_t seq = '0;
  logic  [NT-1:0][NC-1:0] hit = '0;
  fine_t [NT-1:0][NC-1:0] fine = '0;
  logic busy, out_valid, out_last, out_ready = 1'b0;
  logic [15:0] missed;
  word_t out_data;
  int checks = 0, failures = 0;

  slave_trb dut (.clk, .rst_n, .module_id_i(16'h0042), .hit_i(hit), .fine_i(fine),
                 .req_i(req), .seq_i(seq), .busy_o(busy), .missed_o(missed),
                 .out_valid_o(out_valid), .out_data_o(out_data), .out_last_o(out_last),
                 .out_ready_i(out_ready));

  always #5 clk = ~clk;

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

  signal_t expq [NCH][$];
  int      remain [NCH];
  signal_t cur [NCH];
  bit      gen_on = 1'b0;

  always @(negedge clk) begin
    for (int g = 0; g < NCH; g++) begin
      int t, c;
      t = g / NC; c = g % NC;
      fine[t][c] = fine_t'($urandom);
      if (hit[t][c]) begin
        if (remain[g] == 0) begin
          hit[t][c] = 1'b0;
          cur[g].trail = '{coarse: cnt, fine: fine[t][c]};
          expq[g].push_back(cur[g]);
        end else remain[g]--;
      end else if (gen_on && ($urandom % 3000) == 0) begin
        hit[t][c] = 1'b1;
        remain[g] = $urandom % 6;
        cur[g].lead = '{coarse: cnt, fine: fine[t][c]};
      end
    end
    out_ready <= ($urandom % 4) != 0;
  end

  int in_pkt = 0, pkt_hits = 0, n_pkts = 0, n_sigs = 0;
  seq_t exp_seq;
  hit_word_t lead_w;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (in_pkt == 0) begin
      check(out_data == {16'h0042, exp_seq}, $sformatf("header %h", out_data));
      in_pkt = 1; pkt_hits = 0;
    end else if (out_last) begin
      check(out_data[15:0] == 16'(pkt_hits), "trailer count");
      check(!out_data[31], "no overflow");
      in_pkt = 0; n_pkts++;
    end else begin
      hit_word_t w;
      w = hit_word_t'(out_data);
      pkt_hits++;
      if (w.lead) lead_w = w;
      else begin
        signal_t got;
        check(lead_w.ch == w.ch && int'(w.ch) < NCH, "trail after lead of same channel");
        got = '{lead: '{coarse: lead_w.coarse, fine: lead_w.fine}, trail: '{coarse: w.coarse, fine: w.fine}};
        if (expq[w.ch].size() == 0) check(0, $sformatf("channel %0d: unexpected", w.ch));
        else check(got == expq[w.ch].pop_front(), $sformatf("channel %0d signal", w.ch));
        n_sigs++;
      end
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (remain[g]) remain[g] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    gen_on = 1'b1;
    for (int r = 0; r < 8; r++) begin
      repeat (3000) @(negedge clk);
      if (r == 7) begin gen_on = 1'b0; repeat (20) @(negedge clk); end
      exp_seq = seq_t'(1000 + r);
      req = 1'b1; seq = exp_seq; @(negedge clk); req = 1'b0;
      @(negedge clk);
      while (busy) @(negedge clk);
    end
    check(n_pkts == 8, $sformatf("packets %0d", n_pkts));
    check(n_sigs > 100, $sformatf("signals %0d", n_sigs));
    check(missed == 0, "nothing missed");
    for (int g = 0; g < NCH; g++)
      check(expq[g].size() == 0, $sformatf("channel %0d: %0d signals not read", g, expq[g].size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
