// tb_data_transmitter: self-checking test of the slave readout engine.
//
// The TDC side is a behavioural model: channel (t,c) holds a number of
// signals set by the bench, and the k-th signal of a channel has time fields
// computed from (t, c, k), so the bench can predict every word.  The bench
// issues readout requests, accepts the packet with random back-pressure and
// compares header, hit words (channel order, lead before trail) and trailer
// (count, overflow) with its own prediction.  It also sends a request while
// a packet is in flight (served next, with its own sequence number) and two
// in a row while busy (the first of them counted as missed).
module tb_data_transmitter;
  import daq_pkg::*;

  localparam int N_TDC = 2;
  localparam int N_CH  = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req = 1'b0;
  seq_t seq = '0;
  logic busy;
  logic [15:0] missed;
  logic snap;
  logic [$clog2(N_CH)-1:0] rd_ch;
  logic [N_TDC-1:0] pop;
  logic [N_TDC-1:0][N_CH-1:0] pending;
  signal_t [N_TDC-1:0] head;
  logic [N_TDC-1:0] ovf;
  logic out_valid, out_last, out_ready = 1'b0;
  word_t out_data;

  int checks = 0, failures = 0;

  // TDC model state
  int stored [N_TDC][N_CH];   // signals waiting in the buffer
  int left   [N_TDC][N_CH];   // signals of the current snapshot
  int popped [N_TDC][N_CH];   // signals read so far, ever
  logic [N_TDC-1:0] ovf_set = '0;

  function automatic signal_t sig_of(int t, int c, int k);
    signal_t s;
    s.lead.coarse  = coarse_t'(t * 1000 + c * 100 + k);
    s.lead.fine    = fine_t'(k * 7 + c);
    s.trail.coarse = coarse_t'(t * 1000 + c * 100 + k + 20);
    s.trail.fine   = fine_t'(k * 3 + t);
    return s;
  endfunction

  data_transmitter #(.N_TDC(N_TDC), .N_CH(N_CH)) dut (
    .clk, .rst_n, .module_id_i(16'h00A7), .req_i(req), .seq_i(seq),
    .busy_o(busy), .missed_o(missed), .snap_o(snap), .rd_ch_o(rd_ch),
    .pop_o(pop), .pending_i(pending), .head_i(head), .ovf_i(ovf),
    .out_valid_o(out_valid), .out_data_o(out_data), .out_last_o(out_last),
    .out_ready_i(out_ready)
  );

  always #5 clk = ~clk;

  // Model outputs
  always_comb begin
    for (int t = 0; t < N_TDC; t++) begin
      for (int c = 0; c < N_CH; c++) pending[t][c] = left[t][c] != 0;
      head[t] = sig_of(t, int'(rd_ch), popped[t][rd_ch]);
    end
  end

  logic [N_TDC-1:0] ovf_q = '0;
  assign ovf = ovf_q;

  always @(posedge clk) begin
    if (snap) begin
      for (int t = 0; t < N_TDC; t++)
        for (int c = 0; c < N_CH; c++) begin
          left[t][c]   <= stored[t][c];
          stored[t][c] <= 0;
        end
      ovf_q   <= ovf_set;
      ovf_set <= '0;
    end
    for (int t = 0; t < N_TDC; t++)
      if (pop[t]) begin
        left[t][rd_ch]   <= left[t][rd_ch] - 1;
        popped[t][rd_ch] <= popped[t][rd_ch] + 1;
      end
  end

  // Random back-pressure
  always @(negedge clk) out_ready <= ($urandom % 4) != 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Collected words
  word_t pkt[$];
  logic  got_last = 1'b0;
  always @(posedge clk) if (out_valid && out_ready) begin
    pkt.push_back(out_data);
    if (out_last) got_last <= 1'b1;
  end

  task automatic request(input seq_t s);
    @(negedge clk); req = 1'b1; seq = s;
    @(negedge clk); req = 1'b0;
  endtask

  // Wait for one packet and check it against counts copied at its snapshot.
  task automatic check_packet(input seq_t s, input int cnt[N_TDC][N_CH],
                              input int base[N_TDC][N_CH], input bit exp_ovf);
    int n = 0, idx = 1;
    while (!got_last) @(negedge clk);
    got_last = 1'b0;
    check(pkt[0] == {16'h00A7, s}, $sformatf("header %h", pkt[0]));
    for (int t = 0; t < N_TDC; t++)
      for (int c = 0; c < N_CH; c++)
        for (int k = 0; k < cnt[t][c]; k++) begin
          signal_t e;
          hit_word_t wl, wt;
          e  = sig_of(t, c, base[t][c] + k);
          wl = '{rsv: 1'b0, lead: 1'b1, ch: CH_W'(t * N_CH + c), coarse: e.lead.coarse, fine: e.lead.fine};
          wt = '{rsv: 1'b0, lead: 1'b0, ch: CH_W'(t * N_CH + c), coarse: e.trail.coarse, fine: e.trail.fine};
          check(pkt[idx] == word_t'(wl), $sformatf("lead t%0d c%0d k%0d got %h exp %h", t, c, k, pkt[idx], wl));
          check(pkt[idx+1] == word_t'(wt), $sformatf("trail t%0d c%0d k%0d", t, c, k));
          idx += 2;
          n   += 2;
        end
    check(pkt.size() == idx + 1, $sformatf("packet length %0d exp %0d", pkt.size(), idx + 1));
    check(pkt[pkt.size()-1] == word_t'(trl_word_t'{overflow: exp_ovf, rsv: '0, n_hits: 16'(n)}),
          $sformatf("trailer %h", pkt[pkt.size()-1]));
    pkt.delete();
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt[N_TDC][N_CH], base[N_TDC][N_CH];
    foreach (stored[t, c]) begin stored[t][c] = 0; left[t][c] = 0; popped[t][c] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Packet 1: an empty board.
    cnt = stored; base = popped;
    request(16'd100);
    check_packet(16'd100, cnt, base, 1'b0);

    // Packets 2..6: random occupancies, overflow on some.
    for (int p = 0; p < 5; p++) begin
      foreach (stored[t, c]) stored[t][c] = $urandom % 4;
      ovf_set = (p == 2) ? 2'b10 : 2'b00;
      cnt = stored; base = popped;
      request(seq_t'(200 + p));
      check_packet(seq_t'(200 + p), cnt, base, p == 2);
    end

    // A request while busy is held and served next.
    foreach (stored[t, c]) stored[t][c] = 3;
    cnt = stored; base = popped;
    request(16'd300);
    repeat (4) @(negedge clk);
    check(busy, "busy while sending");
    request(16'd301);               // arrives during packet 300
    check_packet(16'd300, cnt, base, 1'b0);
    foreach (cnt[t, c]) begin cnt[t][c] = 0; base[t][c] = popped[t][c]; end
    check_packet(16'd301, cnt, base, 1'b0);
    check(missed == 0, "nothing missed yet");

    // Two more while busy: the first is replaced and counted as missed.
    foreach (stored[t, c]) stored[t][c] = 2;
    cnt = stored; base = popped;
    request(16'd400);
    repeat (4) @(negedge clk);
    request(16'd401);
    request(16'd402);
    check_packet(16'd400, cnt, base, 1'b0);
    foreach (cnt[t, c]) begin cnt[t][c] = 0; base[t][c] = popped[t][c]; end
    check_packet(16'd402, cnt, base, 1'b0);
    check(missed == 1, $sformatf("missed %0d exp 1", missed));
    repeat (3) @(negedge clk);
    check(!busy, "idle at the end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
