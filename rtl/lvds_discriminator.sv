// lvds_discriminator: behavioural model of an FPGA LVDS input buffer used as
// a comparator.  Not synthesizable logic: it stands for an analog input cell.
//
// The differential input buffer of the FPGA switches its output when the
// voltages on its positive and negative inputs cross.  Putting the analog
// photomultiplier signal on one input (`in_p`, volts) and a threshold on the
// other (`in_n`, volts) turns it into a discriminator whose logic output is
// high while the signal is above the threshold; inside the FPGA that output
// feeds the TDC's tapped delay line directly.  In the front end each
// amplified signal is split into four paths with four thresholds, so four of
// these buffers serve one photomultiplier.
//
// The model follows the source's description of this use of the buffer.  The
// propagation delay T_PD_PS and the hysteresis HYST_MV are this model's own
// parameters (both 0 by default: an ideal comparator); PMT pulses are
// negative-going in practice, so the model works on whichever polarity the
// caller chooses by the order of the inputs.
`timescale 1ps / 1ps
module lvds_discriminator #(
  parameter int unsigned T_PD_PS = 0,
  parameter real         HYST_MV = 0.0
) (
  input  real  in_p,
  input  real  in_n,
  output logic out
);
  logic state;

  initial state = 1'b0;

  always @(in_p or in_n) begin
    if (!state && (in_p - in_n) > HYST_MV * 0.0005)
      state <= #(T_PD_PS) 1'b1;
    else if (state && (in_n - in_p) > HYST_MV * 0.0005)
      state <= #(T_PD_PS) 1'b0;
  end

  assign out = state;

endmodule
