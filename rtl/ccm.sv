// ccm: fabric of the Central Controller Module.
//
// The CCM sits between the slaves and the event-building machines.  Each of
// its N_LINKS input links (sixteen Gigabit Ethernet inputs on the board)
// carries slave packets.  All links feed the forwarder (ccm_forwarder), which
// passes the original packets on to the output unchanged.  Every word that
// the forwarder takes from a link is also seen by that link's parser
// (ccm_parser), whose events drive the link's feature extraction and ToT
// histogram (ccm_analysis) and its data quality record (ccm_dqa).
//
// The processor of the SoC (outside this RTL) reads the results through a
// plain read port: `cpu_link_i` selects a link, `cpu_bin_i` a histogram bin;
// `cpu_hist_o` and `cpu_dqa_o` answer combinationally.  `cpu_clr_i` clears
// all histograms and quality records.
//
// From the source: sixteen inputs, parsers, feature extraction,
// histogramming, data quality assessment and forwarding of the original
// packets.  The per-link organisation and the read port are this design's
// own choices.
module ccm
  import daq_pkg::*;
#(
  parameter int unsigned N_LINKS = 16,
  parameter int unsigned N_BINS  = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic  [N_LINKS-1:0]  in_valid_i,
  input  word_t [N_LINKS-1:0]  in_data_i,
  input  logic  [N_LINKS-1:0]  in_last_i,
  output logic  [N_LINKS-1:0]  in_ready_o,
  output logic                 out_valid_o,
  output word_t                out_data_o,
  output logic                 out_last_o,
  input  logic                 out_ready_i,
  input  logic                 cpu_clr_i,
  input  logic [$clog2(N_LINKS)-1:0] cpu_link_i,
  input  logic [$clog2(N_BINS)-1:0]  cpu_bin_i,
  output logic [31:0]          cpu_hist_o,
  output dqa_t                 cpu_dqa_o,
  output logic [N_LINKS-1:0]   tot_v_o      // a ToT was extracted on that link
);
  logic [31:0] hist [N_LINKS];
  dqa_t        dqa  [N_LINKS];

  ccm_forwarder #(.N_LINKS(N_LINKS)) u_fwd (
    .clk, .rst_n,
    .in_valid_i, .in_data_i, .in_last_i, .in_ready_o,
    .out_valid_o, .out_data_o, .out_last_o, .out_ready_i
  );

  for (genvar l = 0; l < N_LINKS; l++) begin : g_link
    logic      hdr_v, hit_v, trl_v, trl_ovf, len_err;
    modid_t    module_id;
    seq_t      seq;
    hit_word_t hit;
    coarse_t   tot;
    logic [CH_W-1:0] tot_ch;
    logic      clr_busy;

    ccm_parser u_parser (
      .clk, .rst_n,
      .beat_i      (in_valid_i[l] && in_ready_o[l]),
      .data_i      (in_data_i[l]),
      .last_i      (in_last_i[l]),
      .hdr_v_o     (hdr_v),
      .module_id_o (module_id),
      .seq_o       (seq),
      .hit_v_o     (hit_v),
      .hit_o       (hit),
      .trl_v_o     (trl_v),
      .trl_ovf_o   (trl_ovf),
      .len_err_o   (len_err)
    );

    ccm_analysis #(.N_BINS(N_BINS)) u_ana (
      .clk, .rst_n,
      .hit_v_i    (hit_v),
      .hit_i      (hit),
      .clr_i      (cpu_clr_i),
      .clr_busy_o (clr_busy),
      .tot_v_o    (tot_v_o[l]),
      .tot_o      (tot),
      .tot_ch_o   (tot_ch),
      .rd_bin_i   (cpu_bin_i),
      .rd_data_o  (hist[l])
    );

    ccm_dqa u_dqa (
      .clk, .rst_n,
      .clr_i       (cpu_clr_i),
      .hdr_v_i     (hdr_v),
      .module_id_i (module_id),
      .seq_i       (seq),
      .hit_v_i     (hit_v),
      .trl_v_i     (trl_v),
      .trl_ovf_i   (trl_ovf),
      .len_err_i   (len_err),
      .dqa_o       (dqa[l])
    );
  end

  assign cpu_hist_o = hist[cpu_link_i];
  assign cpu_dqa_o  = dqa[cpu_link_i];

endmodule
