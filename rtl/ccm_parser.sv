// ccm_parser: receiver-side parser of one slave packet stream in the CCM.
//
// The parser watches the words transferred on one input link (`beat_i` is
// valid & ready of that link) and decodes them by position: the first word of
// a packet is the header (module ID, sequence number), the word marked `last`
// is the trailer (overflow flag, number of hit words), every word between is
// a hit word.  For each it raises a one-cycle event one clock later:
//   hdr_v_o  with module_id_o / seq_o
//   hit_v_o  with hit_o (decoded hit word)
//   trl_v_o  with trl_ovf_o and len_err_o, set when the trailer's hit count
//            differs from the number of hit words actually received.
// A one-word packet (header that is also last) is reported as a header and a
// trailer with a length error.
//
// From the source: the CCM implements parsers of the readout board data
// format.  The data format itself (daq_pkg) is this design's own, because the
// source does not give it.
module ccm_parser
  import daq_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      beat_i,
  input  word_t     data_i,
  input  logic      last_i,
  output logic      hdr_v_o,
  output modid_t    module_id_o,
  output seq_t      seq_o,
  output logic      hit_v_o,
  output hit_word_t hit_o,
  output logic      trl_v_o,
  output logic      trl_ovf_o,
  output logic      len_err_o
);
  logic        in_pkt;
  logic [15:0] cnt;
  hdr_word_t   hdr;
  trl_word_t   trl;

  assign hdr = hdr_word_t'(data_i);
  assign trl = trl_word_t'(data_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt      <= 1'b0;
      cnt         <= '0;
      hdr_v_o     <= 1'b0;
      hit_v_o     <= 1'b0;
      trl_v_o     <= 1'b0;
      module_id_o <= '0;
      seq_o       <= '0;
      hit_o       <= '0;
      trl_ovf_o   <= 1'b0;
      len_err_o   <= 1'b0;
    end else begin
      hdr_v_o <= 1'b0;
      hit_v_o <= 1'b0;
      trl_v_o <= 1'b0;
      if (beat_i) begin
        if (!in_pkt) begin
          hdr_v_o     <= 1'b1;
          module_id_o <= hdr.module_id;
          seq_o       <= hdr.seq;
          cnt         <= '0;
          in_pkt      <= !last_i;
          if (last_i) begin
            trl_v_o   <= 1'b1;
            trl_ovf_o <= 1'b0;
            len_err_o <= 1'b1;
          end
        end else if (last_i) begin
          trl_v_o   <= 1'b1;
          trl_ovf_o <= trl.overflow;
          len_err_o <= trl.n_hits != cnt;
          in_pkt    <= 1'b0;
        end else begin
          hit_v_o <= 1'b1;
          hit_o   <= hit_word_t'(data_i);
          cnt     <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
