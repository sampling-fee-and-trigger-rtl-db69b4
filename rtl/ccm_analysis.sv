// ccm_analysis: online feature extraction and histogramming for one link.
//
// A complete signal arrives from the parser as a leading hit word followed by
// a trailing hit word of the same channel.  The unit keeps the last leading
// word; when the matching trailing word comes it computes the signal's
// time-over-threshold (ToT) in coarse clock periods,
//   tot = (trail.coarse - lead.coarse) mod 2^COARSE_W,
// reports it on `tot_v_o`/`tot_o`/`tot_ch_o` one cycle later and adds one to
// histogram bin min(tot, N_BINS-1).  The histogram is an array of N_BINS
// 32-bit counters that the processor reads through `rd_bin_i` / `rd_data_o`
// (combinational) and clears with `clr_i` (one bin per cycle, N_BINS cycles,
// `clr_busy_o` high meanwhile; events during the clear are not counted).
//
// From the source: the CCM performs feature extraction and histogramming.
// Which feature and which histogram are not given: ToT, the usual feature of
// a two-edge TDC measurement, and a ToT histogram are this design's choice,
// as are the bin count and the use of the coarse time only.
module ccm_analysis
  import daq_pkg::*;
#(
  parameter int unsigned N_BINS = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      hit_v_i,
  input  hit_word_t hit_i,
  input  logic      clr_i,
  output logic      clr_busy_o,
  output logic      tot_v_o,
  output coarse_t   tot_o,
  output logic [CH_W-1:0] tot_ch_o,
  input  logic [$clog2(N_BINS)-1:0] rd_bin_i,
  output logic [31:0] rd_data_o
);
  localparam int BW = $clog2(N_BINS);

  logic [31:0] hist [N_BINS];
  hit_word_t   lead_q;
  logic        have_lead;
  logic        pair;
  coarse_t     tot;
  logic [BW-1:0] bin, clr_idx;

  assign pair = hit_v_i && !hit_i.lead && have_lead && hit_i.ch == lead_q.ch;
  assign tot  = hit_i.coarse - lead_q.coarse;
  assign bin  = (32'(tot) >= N_BINS) ? BW'(N_BINS-1) : BW'(tot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lead_q     <= '0;
      have_lead  <= 1'b0;
      tot_v_o    <= 1'b0;
      tot_o      <= '0;
      tot_ch_o   <= '0;
      clr_busy_o <= 1'b1;      // the histogram is cleared after reset
      clr_idx    <= '0;
    end else begin
      tot_v_o <= 1'b0;
      if (hit_v_i) begin
        if (hit_i.lead) begin
          lead_q    <= hit_i;
          have_lead <= 1'b1;
        end else begin
          have_lead <= 1'b0;
        end
      end
      if (pair) begin
        tot_v_o  <= 1'b1;
        tot_o    <= tot;
        tot_ch_o <= hit_i.ch;
      end
      if (clr_i) begin
        clr_busy_o <= 1'b1;
        clr_idx    <= '0;
      end else if (clr_busy_o) begin
        clr_idx <= clr_idx + 1'b1;
        if (clr_idx == BW'(N_BINS-1)) clr_busy_o <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (clr_busy_o)  hist[clr_idx] <= '0;
    else if (pair)   hist[bin]     <= hist[bin] + 1'b1;
  end

  assign rd_data_o = hist[rd_bin_i];

endmodule
