// tb_ccm_forwarder: sixteen sources send packets whose words carry
// {link, packet number, word number}; sources pause at random and the sink
// applies random back-pressure.  The bench checks that every packet leaves
// whole and unchanged (no interleaving of links inside a packet), that each
// link's packets leave in order and none is lost, and, in a phase where all
// links always have data, that links are served in round-robin order.
module tb_ccm_forwarder;
  import daq_pkg::*;

  localparam int N = 16;
  localparam int PKTS = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  logic  [N-1:0] in_valid, in_last, in_ready;
  word_t [N-1:0] in_data;
  logic out_valid, out_last, out_ready = 1'b0;
  word_t out_data;
  int checks = 0, failures = 0;
  bit saturate = 1'b0;

  ccm_forwarder #(.N_LINKS(N)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_data_i(in_data), .in_last_i(in_last),
    .in_ready_o(in_ready), .out_valid_o(out_valid), .out_data_o(out_data),
    .out_last_o(out_last), .out_ready_i(out_ready));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int len_of(int l, int p);
    return 1 + (l * 7 + p * 3) % 9;
  endfunction

  // Sources
  int pk [N], wd [N];
  logic [N-1:0] on;
  always_comb
    for (int l = 0; l < N; l++) begin
      in_valid[l] = on[l] && pk[l] < PKTS;
      in_data[l]  = {8'(l), 12'(pk[l]), 12'(wd[l])};
      in_last[l]  = wd[l] == len_of(l, pk[l]) - 1;
    end
  always @(posedge clk) begin
    for (int l = 0; l < N; l++)
      if (rst_n && in_valid[l] && in_ready[l]) begin
        if (in_last[l]) begin pk[l] <= pk[l] + 1; wd[l] <= 0; end
        else wd[l] <= wd[l] + 1;
      end
  end
  always @(negedge clk) begin
    on <= saturate ? '1 : N'($urandom | $urandom);
    out_ready <= saturate || ($urandom % 3 != 0);
  end

  // Sink
  int exp_pk [N];
  int cur_link = -1, cur_wd = 0, last_link = -1, n_pkts = 0, rr_ok = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int l, p, w;
    l = int'(out_data[31:24]); p = int'(out_data[23:12]); w = int'(out_data[11:0]);
    if (cur_link < 0) begin
      cur_link = l; cur_wd = 0;
      check(p == exp_pk[l], $sformatf("link %0d packet %0d exp %0d", l, p, exp_pk[l]));
      if (saturate && last_link >= 0) begin
        int nxt;
        nxt = -1;
        for (int k = 1; k <= N; k++)
          if (nxt < 0 && exp_pk[(last_link + k) % N] < PKTS) nxt = (last_link + k) % N;
        check(l == nxt, $sformatf("round robin %0d after %0d exp %0d", l, last_link, nxt));
        rr_ok++;
      end
    end
    check(l == cur_link && w == cur_wd, $sformatf("word %h in packet of link %0d", out_data, cur_link));
    check(out_last == (w == len_of(l, p) - 1), "last flag");
    cur_wd++;
    if (out_last) begin
      exp_pk[l]++;
      last_link = cur_link;
      cur_link = -1;
      n_pkts++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (pk[l]) begin pk[l] = 0; wd[l] = 0; exp_pk[l] = 0; end
    on = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (n_pkts == N * PKTS / 2);
    saturate = 1'b1;
    wait (n_pkts == N * PKTS * 3 / 4);
    saturate = 1'b0;
    wait (n_pkts == N * PKTS);
    repeat (5) @(negedge clk);
    foreach (exp_pk[l]) check(exp_pk[l] == PKTS, $sformatf("link %0d delivered %0d", l, exp_pk[l]));
    check(rr_ok > N, "round robin phase ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
