// jpet_daq_top: the trigger-less readout chain of the PET scanner prototype.
//
// One master board paces the readout: every 20 us (50 kHz) it sends a readout
// request with a sequence number to the N_SLAVES slave boards.  Each slave
// has N_TDC TDC FPGAs of N_CH channels; every channel time-stamps both edges
// of its discriminator output and buffers up to DEPTH complete signals.  On a
// request a slave packs what its channels recorded since the last request
// into one packet, tagged with the sequence number and the slave's module ID
// (its index), and sends it on its own link.  Slave s drives CCM input link s;
// the CCM's remaining links are idle.  The CCM parses the packets, extracts
// and histograms the time-over-threshold and keeps quality counters per link,
// and forwards the original packets to the event-building output.
//
// Outside this RTL, and therefore ports of the top: the front-end analog
// electronics with the LVDS-buffer discriminators (`hit_i`, already sampled
// into the clock domain), the tapped delay lines (`fine_i`, the fine code of
// an edge in the cycle it is seen), the Ethernet links between boards (here
// direct valid/ready streams), the event-building network (`eb_*`) and the
// SoC processor (`cpu_*`).
//
// From the source: 1 master, 8 slaves, 4 TDC FPGAs x 48 channels per slave
// (8 x 4 x 12 = 384 photomultiplier inputs, each split into four thresholds),
// 54 signals per channel, 50 kHz readout, 16 CCM inputs.  Own choices: a
// single clock for the whole system and the module ID equal to the slave
// index.
module jpet_daq_top
  import daq_pkg::*;
#(
  parameter int unsigned N_SLAVES   = 8,
  parameter int unsigned N_TDC      = 4,
  parameter int unsigned N_CH       = 48,
  parameter int unsigned DEPTH      = 54,
  parameter int unsigned N_LINKS    = 16,
  parameter int unsigned N_BINS     = 64,
  parameter int unsigned CLK_HZ     = daq_pkg::DEF_CLK_HZ,
  parameter int unsigned READOUT_HZ = daq_pkg::DEF_READOUT_HZ
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enable_i,
  input  logic [N_SLAVES-1:0][N_TDC-1:0][N_CH-1:0]  hit_i,
  input  fine_t [N_SLAVES-1:0][N_TDC-1:0][N_CH-1:0] fine_i,
  // to the event-building machines
  output logic  eb_valid_o,
  output word_t eb_data_o,
  output logic  eb_last_o,
  input  logic  eb_ready_i,
  // processor read port and monitoring
  input  logic                       cpu_clr_i,
  input  logic [$clog2(N_LINKS)-1:0] cpu_link_i,
  input  logic [$clog2(N_BINS)-1:0]  cpu_bin_i,
  output logic [31:0]                cpu_hist_o,
  output dqa_t                       cpu_dqa_o,
  output logic [N_LINKS-1:0]         tot_v_o,
  output logic [15:0]                late_o,
  output logic [N_SLAVES-1:0]        late_slaves_o,
  output logic [N_SLAVES-1:0][15:0]  missed_o,
  output logic [N_SLAVES-1:0]        busy_o
);
  logic [N_SLAVES-1:0] req;
  seq_t                seq;

  logic  [N_LINKS-1:0] l_valid, l_last, l_ready;
  word_t [N_LINKS-1:0] l_data;

  initial assert (N_SLAVES <= N_LINKS) else $error("jpet_daq_top: more slaves than CCM links");

  master_trb #(.N_SLAVES(N_SLAVES), .CLK_HZ(CLK_HZ), .READOUT_HZ(READOUT_HZ)) u_master (
    .clk, .rst_n,
    .enable_i,
    .clr_i         (cpu_clr_i),
    .req_o         (req),
    .seq_o         (seq),
    .busy_i        (busy_o),
    .late_o,
    .late_slaves_o
  );

  for (genvar s = 0; s < N_SLAVES; s++) begin : g_slave
    slave_trb #(.N_TDC(N_TDC), .N_CH(N_CH), .DEPTH(DEPTH)) u_slave (
      .clk, .rst_n,
      .module_id_i (modid_t'(s)),
      .hit_i       (hit_i[s]),
      .fine_i      (fine_i[s]),
      .req_i       (req[s]),
      .seq_i       (seq),
      .busy_o      (busy_o[s]),
      .missed_o    (missed_o[s]),
      .out_valid_o (l_valid[s]),
      .out_data_o  (l_data[s]),
      .out_last_o  (l_last[s]),
      .out_ready_i (l_ready[s])
    );
  end

  for (genvar l = N_SLAVES; l < N_LINKS; l++) begin : g_idle
    assign l_valid[l] = 1'b0;
    assign l_data[l]  = '0;
    assign l_last[l]  = 1'b0;
  end

  ccm #(.N_LINKS(N_LINKS), .N_BINS(N_BINS)) u_ccm (
    .clk, .rst_n,
    .in_valid_i  (l_valid),
    .in_data_i   (l_data),
    .in_last_i   (l_last),
    .in_ready_o  (l_ready),
    .out_valid_o (eb_valid_o),
    .out_data_o  (eb_data_o),
    .out_last_o  (eb_last_o),
    .out_ready_i (eb_ready_i),
    .cpu_clr_i,
    .cpu_link_i,
    .cpu_bin_i,
    .cpu_hist_o,
    .cpu_dqa_o,
    .tot_v_o
  );

endmodule
