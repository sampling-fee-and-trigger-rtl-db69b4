// daq_pkg: constants and word formats shared by the readout chain.
//
// The readout is trigger-less: a master sends a readout request at a fixed
// rate (50 kHz), every slave board empties its TDC buffers into one packet
// tagged with the request's sequence number and the board's module ID, and a
// central controller parses, analyses and forwards those packets.
//
// Numbers that follow the source description: 50 kHz readout rate, 48 TDC
// channels per FPGA, four TDC FPGAs per board (five FPGAs, one of them the
// controller), 54 complete signals buffered per channel, eight slaves,
// sixteen CCM input links.  Everything else here is this design's own choice:
// the 200 MHz clock, the 12-bit coarse and 10-bit fine time fields, 16-bit
// sequence number and module ID, and the 32-bit packet word layout below.
//
// Packet layout (one 32-bit word per beat, `last` marks the final word):
//   word 0        header   {module_id[15:0], seq[15:0]}
//   word 1..n     hit      {1'b0, lead, ch[7:0], coarse[11:0], fine[9:0]}
//                 each complete signal gives a leading word then a trailing word
//   word n+1      trailer  {overflow, 15'b0, n_hit_words[15:0]}   (last = 1)
package daq_pkg;

  localparam int unsigned DEF_CLK_HZ     = 200_000_000;  // assumed system clock
  localparam int unsigned DEF_READOUT_HZ = 50_000;       // readout request rate

  localparam int COARSE_W = 12;
  localparam int FINE_W   = 10;
  localparam int CH_W     = 8;
  localparam int SEQ_W    = 16;
  localparam int MODID_W  = 16;
  localparam int WORD_W   = 32;

  typedef logic [COARSE_W-1:0] coarse_t;
  typedef logic [FINE_W-1:0]   fine_t;
  typedef logic [SEQ_W-1:0]    seq_t;
  typedef logic [MODID_W-1:0]  modid_t;
  typedef logic [WORD_W-1:0]   word_t;

  // One edge time: coarse clock count and fine (delay-line) code.
  typedef struct packed {
    coarse_t coarse;
    fine_t   fine;
  } tstamp_t;

  // One complete signal: leading and trailing edge.
  typedef struct packed {
    tstamp_t lead;
    tstamp_t trail;
  } signal_t;

  typedef struct packed {
    logic      rsv;
    logic      lead;    // 1: leading edge, 0: trailing edge
    logic [CH_W-1:0] ch; // channel on the board, tdc*48 + channel
    coarse_t   coarse;
    fine_t     fine;
  } hit_word_t;

  typedef struct packed {
    modid_t module_id;
    seq_t   seq;
  } hdr_word_t;

  typedef struct packed {
    logic        overflow;
    logic [14:0] rsv;
    logic [15:0] n_hits;
  } trl_word_t;

  // Per-link data-quality record kept by the central controller.
  typedef struct packed {
    logic [31:0] packets;
    logic [31:0] hit_words;
    logic [31:0] seq_gaps;
    logic [31:0] len_errors;
    logic [31:0] overflows;
    seq_t        last_seq;
    modid_t      module_id;
  } dqa_t;

endpackage
