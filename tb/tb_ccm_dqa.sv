// tb_ccm_dqa: drives parser-style events (headers with consecutive and with
// skipped sequence numbers, hit events, trailers with and without overflow
// and length errors) and compares every field of the quality record with
// counts kept by the bench; then checks the clear.
module tb_ccm_dqa;
  import daq_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  logic hdr_v = 1'b0, hit_v = 1'b0, trl_v = 1'b0, trl_ovf = 1'b0, len_err = 1'b0;
  modid_t mid = '0;
  seq_t seq = '0;
  dqa_t dqa;
  int checks = 0, failures = 0;

  ccm_dqa dut (.clk, .rst_n, .clr_i(clr), .hdr_v_i(hdr_v), .module_id_i(mid),
               .seq_i(seq), .hit_v_i(hit_v), .trl_v_i(trl_v), .trl_ovf_i(trl_ovf),
               .len_err_i(len_err), .dqa_o(dqa));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int packets, hits, gaps, lerr, ovfs;
    seq_t s;
    packets = 0; hits = 0; gaps = 0; lerr = 0; ovfs = 0;
    s = 16'hFFF0;      // wraps through zero
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 60; p++) begin
      int n;
      if (p % 9 == 4) begin s += 3; gaps++; end
      else if (packets > 0) s += 1;
      hdr_v = 1'b1; seq = s; mid = 16'h0005; @(negedge clk); hdr_v = 1'b0;
      packets++;
      n = $urandom % 6;
      repeat (n) begin hit_v = 1'b1; @(negedge clk); hit_v = 1'b0; hits++; end
      trl_v = 1'b1; trl_ovf = (p % 4 == 2); len_err = (p % 11 == 7);
      @(negedge clk);
      if (trl_ovf) ovfs++;
      if (len_err) lerr++;
      trl_v = 1'b0; trl_ovf = 1'b0; len_err = 1'b0;
      @(negedge clk);
      check(dqa.packets == 32'(packets), $sformatf("packets %0d exp %0d", dqa.packets, packets));
      check(dqa.hit_words == 32'(hits), "hit words");
      check(dqa.seq_gaps == 32'(gaps), $sformatf("gaps %0d exp %0d", dqa.seq_gaps, gaps));
      check(dqa.len_errors == 32'(lerr), "length errors");
      check(dqa.overflows == 32'(ovfs), "overflows");
      check(dqa.last_seq == s && dqa.module_id == 16'h0005, "last seq / module id");
    end
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    check(dqa == '0, "clear");
    // First packet after clear is not compared with the old sequence number.
    hdr_v = 1'b1; seq = 16'd7; @(negedge clk); hdr_v = 1'b0;
    @(negedge clk);
    check(dqa.seq_gaps == 0 && dqa.packets == 1, "no gap after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
