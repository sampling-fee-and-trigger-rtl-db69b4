// tb_lvds_discriminator: four discriminators at four thresholds watch the
// same triangular pulse, as in the four-path front end.  The bench computes
// the crossing times of the ramp itself and checks that each output rises
// and falls at its crossing (within one time step), that higher thresholds
// rise later and fall earlier, and that a threshold above the peak never
// fires.
`timescale 1ps / 1ps
module tb_lvds_discriminator;
  real sig;
  real thr [5] = '{0.05, 0.10, 0.20, 0.40, 0.90};
  logic [4:0] out;
  int checks = 0, failures = 0;
  longint t_rise [5], t_fall [5];

  for (genvar i = 0; i < 5; i++) begin : g_d
    lvds_discriminator u_d (.in_p(sig), .in_n(thr[i]), .out(out[i]));
    initial begin t_rise[i] = -1; t_fall[i] = -1; end
    always @(posedge out[i]) t_rise[i] = $time;
    always @(negedge out[i]) t_fall[i] = $time;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Triangle: 0 V at t0, 0.5 V peak after RISE ps, back to 0 after FALL ps.
  localparam int STEP = 10, RISE = 2000, FALL = 6000;
  localparam real PEAK = 0.5;

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    sig = 0.0;
    #1000;
    t0 = $time;
    for (int t = 0; t <= RISE + FALL; t += STEP) begin
      sig = (t <= RISE) ? PEAK * t / RISE : PEAK * (RISE + FALL - t) / FALL;
      #STEP;
    end
    sig = 0.0;
    #1000;
    for (int i = 0; i < 4; i++) begin
      real er, ef;
      er = t0 + thr[i] / PEAK * RISE;
      ef = t0 + RISE + (1.0 - thr[i] / PEAK) * FALL;
      check(t_rise[i] >= 0 && real'(t_rise[i]) - er <= 2 * STEP && real'(t_rise[i]) - er >= -STEP,
            $sformatf("threshold %0d rise at %0d exp %0f", i, t_rise[i], er));
      check(t_fall[i] >= 0 && real'(t_fall[i]) - ef <= 2 * STEP && real'(t_fall[i]) - ef >= -STEP,
            $sformatf("threshold %0d fall at %0d exp %0f", i, t_fall[i], ef));
      if (i > 0) begin
        check(t_rise[i] > t_rise[i-1], "higher threshold rises later");
        check(t_fall[i] < t_fall[i-1], "higher threshold falls earlier");
      end
    end
    check(t_rise[4] < 0 && out[4] == 1'b0, "threshold above the peak never fires");
    check(out[3:0] == '0, "all low after the pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
