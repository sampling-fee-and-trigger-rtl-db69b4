// tdc_channel: one TDC input channel with its signal buffer.
//
// The discriminator output `hit_i` (already sampled into the clock domain,
// one bit per clock) is watched for both edges.  A rising edge latches the
// current coarse count and the fine code from the delay line as the leading
// time; the next falling edge completes the signal and the pair
// (leading, trailing) is written into a circular buffer of DEPTH entries.
// Following the source, a channel has rising and falling edge detection and
// room for 54 complete signals between two readouts (DEPTH = 54).
//
// Readout: a one-cycle `snap_i` marks the readout boundary.  The number of
// signals then stored is copied into `left_o`; the reader pops exactly that
// many with `pop_i`, reading the oldest one on `head_o` (combinational from
// the buffer).  Signals completed after the snapshot stay for the next
// readout, so the channel keeps recording while it is read.  A signal that
// finds the buffer full is dropped and raises a sticky overflow flag, which is
// copied to `ovf_o` and cleared at the next snapshot.
//
// Own choices (the source is silent): a falling edge without a preceding
// rising edge is ignored; pulses shorter than one clock are not seen; the
// buffer is a plain array with wrap-around pointers.
module tdc_channel
  import daq_pkg::*;
#(
  parameter int unsigned DEPTH = 54
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    hit_i,      // discriminator level, synchronous
  input  fine_t   fine_i,     // fine code of the edge in this cycle
  input  coarse_t coarse_i,   // coarse counter
  input  logic    snap_i,     // readout boundary
  input  logic    pop_i,      // remove the head signal (only while left_o != 0)
  output signal_t head_o,
  output logic [$clog2(DEPTH+1)-1:0] left_o,   // signals still to read this readout
  output logic    ovf_o       // a signal was lost in the window before the last snapshot
);
  localparam int PW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH+1);

  signal_t         mem [DEPTH];
  logic [PW-1:0]   wr_ptr, rd_ptr;
  logic [CW-1:0]   count;
  logic            hit_q, have_lead, ovf_sticky;
  tstamp_t         lead_q;
  logic            rise, fall, push, do_push;

  assign rise    = hit_i & ~hit_q;
  assign fall    = ~hit_i & hit_q;
  assign push    = fall & have_lead;
  assign do_push = push & (count != CW'(DEPTH) || pop_i);

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= '{lead: lead_q, trail: '{coarse: coarse_i, fine: fine_i}};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_q      <= 1'b0;
      have_lead  <= 1'b0;
      lead_q     <= '0;
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      left_o     <= '0;
      ovf_sticky <= 1'b0;
      ovf_o      <= 1'b0;
    end else begin
      hit_q <= hit_i;
      if (rise) begin
        lead_q    <= '{coarse: coarse_i, fine: fine_i};
        have_lead <= 1'b1;
      end else if (fall) begin
        have_lead <= 1'b0;
      end
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (pop_i)   rd_ptr <= inc(rd_ptr);
      count <= count + CW'(do_push) - CW'(pop_i);

      if (snap_i) begin
        left_o     <= count;
        ovf_o      <= ovf_sticky | (push & ~do_push);
        ovf_sticky <= 1'b0;
      end else begin
        if (pop_i) left_o <= left_o - 1'b1;
        if (push & ~do_push) ovf_sticky <= 1'b1;
      end
    end
  end

  assign head_o = mem[rd_ptr];

  // The reader never pops what the snapshot did not count, and never
  // pops in the snapshot cycle.
  a_pop_legal:  assert property (@(posedge clk) disable iff (!rst_n) pop_i |-> left_o != 0);
  a_no_pop_snap: assert property (@(posedge clk) disable iff (!rst_n) !(pop_i && snap_i));

endmodule
