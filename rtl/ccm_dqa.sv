// ccm_dqa: data quality assessment of one CCM input link.
//
// From the parser's events it keeps a record (daq_pkg::dqa_t) of the link:
// packets seen, hit words seen, sequence-number gaps (a header whose sequence
// number is not the previous one plus one; the first packet after reset or
// clear is not compared), packets whose trailer count disagreed with the
// data (length errors), packets flagged as overflowed by the slave, and the
// last sequence number and module ID seen.  Counters update one cycle after
// the event and are cleared by `clr_i`.
//
// From the source: the CCM performs data quality assessment.  Which
// quantities are watched is this design's own choice.
module ccm_dqa
  import daq_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clr_i,
  input  logic   hdr_v_i,
  input  modid_t module_id_i,
  input  seq_t   seq_i,
  input  logic   hit_v_i,
  input  logic   trl_v_i,
  input  logic   trl_ovf_i,
  input  logic   len_err_i,
  output dqa_t   dqa_o
);
  logic seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dqa_o <= '0;
      seen  <= 1'b0;
    end else if (clr_i) begin
      dqa_o <= '0;
      seen  <= 1'b0;
    end else begin
      if (hdr_v_i) begin
        dqa_o.packets   <= dqa_o.packets + 1'b1;
        dqa_o.last_seq  <= seq_i;
        dqa_o.module_id <= module_id_i;
        seen            <= 1'b1;
        if (seen && seq_i != dqa_o.last_seq + 1'b1) dqa_o.seq_gaps <= dqa_o.seq_gaps + 1'b1;
      end
      if (hit_v_i)               dqa_o.hit_words  <= dqa_o.hit_words + 1'b1;
      if (trl_v_i && len_err_i)  dqa_o.len_errors <= dqa_o.len_errors + 1'b1;
      if (trl_v_i && trl_ovf_i)  dqa_o.overflows  <= dqa_o.overflows + 1'b1;
    end
  end

endmodule
