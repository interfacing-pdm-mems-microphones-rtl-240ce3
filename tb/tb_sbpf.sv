// tb_sbpf: checks the spike band-pass filter at its default settings
// (corners 70.2 Hz and 12.02 kHz at a 50 MHz clock).
// The input is a PDM-like stream: one signed spike every 16 cycles whose
// polarity comes from a first-order sigma-delta of u(t) (net input rate
// u * 3.125 M spikes/s).
//  1. DC (u = 0.5): after settling, the net output must be below 1 % of the
//     net input (DC rejection).
//  2. Tones at 1 kHz (in band) and 20 kHz (above the upper corner): the ratio of
//     the output and input Fourier amplitudes at the tone frequency must
//     match |wH/(jw+wH) - wL/(jw+wL)| within 0.08, and the phase its
//     argument within 0.4 rad (the loop delays are a few cycles).
//  3. Input of alternating polarity (u = 0) gives under 1 % as many output
//     spikes as input spikes.
module tb_sbpf
  import psi_pkg::*;
;
  localparam real FCLK = 50.0e6;
  localparam real PI   = 3.14159265358979;
  localparam real WH   = 50.0e6 / 512.0 * 198.0 / 256.0;
  localparam real WL   = 50.0e6 / 32768.0 * 74.0 / 256.0;

  logic clk = 1'b0, rst_n = 1'b0;
  spike_t sin, sout;
  logic sat_h, sat_l, ovf;
  int checks = 0, failures = 0;
  longint cyc = 0;
  real u_amp = 0.0, u_off = 0.5, f_tone = 0.0, integ = 0.0;
  int ph = 0;
  // measurement accumulators
  real si, ci, so, co;
  longint net_in = 0, net_out = 0, n_out = 0, n_ovf = 0, n_sat = 0;

  sbpf dut (.clk, .rst_n, .spike_in(sin), .spike_out(sout),
            .sat_h, .sat_l, .overflow(ovf));

  always #10 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  always @(posedge clk) if (rst_n) begin
    real th;
    cyc++;
    th = 2.0 * PI * f_tone * real'(cyc) / FCLK;
    if (sin.pos || sin.neg) begin
      net_in += sin.pos ? 1 : -1;
      si += (sin.pos ? 1.0 : -1.0) * $sin(th); ci += (sin.pos ? 1.0 : -1.0) * $cos(th);
    end
    if (sout.pos || sout.neg) begin
      net_out += sout.pos ? 1 : -1;
      n_out++;
      so += (sout.pos ? 1.0 : -1.0) * $sin(th); co += (sout.pos ? 1.0 : -1.0) * $cos(th);
    end
    n_ovf += ovf; n_sat += sat_h + sat_l;
    ph = (ph + 1) % 16;
    if (ph == 0) begin
      real u;
      u = u_off + u_amp * $sin(th);
      integ += u;
      if (integ >= 0.0) begin sin.pos <= 1'b1; sin.neg <= 1'b0; integ -= 1.0; end
      else              begin sin.pos <= 1'b0; sin.neg <= 1'b1; integ += 1.0; end
    end else sin <= SPIKE_NONE;
  end

  task automatic clear();
    si = 0.0; ci = 0.0; so = 0.0; co = 0.0; net_in = 0; net_out = 0; n_out = 0;
  endtask

  // Phase of the ideal response at f, in radians.
  function automatic real expected_phase(real f);
    real w, r1, i1, r2, i2;
    w  = 2.0 * PI * f;
    r1 = WH * WH / (WH * WH + w * w); i1 = -WH * w / (WH * WH + w * w);
    r2 = WL * WL / (WL * WL + w * w); i2 = -WL * w / (WL * WL + w * w);
    return $atan2(i1 - i2, r1 - r2);
  endfunction

  function automatic real wrap(real p);
    while (p > PI)  p -= 2.0 * PI;
    while (p < -PI) p += 2.0 * PI;
    return p;
  endfunction

  function automatic real expected_gain(real f);
    real w, r1, i1, r2, i2;
    w  = 2.0 * PI * f;
    // wH/(jw+wH) = wH(wH - jw)/(wH^2+w^2)
    r1 = WH * WH / (WH * WH + w * w); i1 = -WH * w / (WH * WH + w * w);
    r2 = WL * WL / (WL * WL + w * w); i2 = -WL * w / (WL * WL + w * w);
    return $sqrt((r1 - r2) * (r1 - r2) + (i1 - i2) * (i1 - i2));
  endfunction

  task automatic tone(real f, int periods);
    real g, e, p, pe;
    f_tone = f; u_off = 0.0; u_amp = 0.5;
    repeat (int'(2.0 * FCLK / f)) @(posedge clk);         // settle two periods
    @(posedge clk); clear();
    repeat (int'(real'(periods) * FCLK / f)) @(posedge clk);
    g = $sqrt(so * so + co * co) / $sqrt(si * si + ci * ci);
    e = expected_gain(f);
    $display("tone %0.0f Hz: gain %f expected %f", f, g, e);
    check(fabs(g - e) < 0.08, $sformatf("gain at %0.0f Hz: %f vs %f", f, g, e));
    // phase of output relative to input (sin/cos projections)
    p  = wrap($atan2(co, so) - $atan2(ci, si));
    pe = expected_phase(f);
    $display("tone %0.0f Hz: phase %f expected %f", f, p, pe);
    check(fabs(wrap(p - pe)) < 0.4, $sformatf("phase at %0.0f Hz: %f vs %f", f, p, pe));
  endtask

  initial begin
    sin = SPIKE_NONE;
    clear();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // 1. DC rejection
    u_off = 0.5; u_amp = 0.0;
    repeat (int'(10.0 * FCLK / WL)) @(posedge clk);
    @(posedge clk); clear();
    repeat (400000) @(posedge clk);
    $display("DC: net in %0d net out %0d", net_in, net_out);
    check(net_in > 10000, "DC input present");
    check(fabs(real'(net_out)) < 0.01 * real'(net_in), $sformatf("DC rejection: %0d of %0d", net_out, net_in));
    // 2. tones (the DC offset is removed first; let the low filter discharge)
    u_off = 0.0;
    repeat (int'(10.0 * FCLK / WL)) @(posedge clk);
    tone(1000.0, 10);
    tone(20000.0, 80);
    // 3. silence
    u_amp = 0.0; f_tone = 0.0;
    repeat (20000) @(posedge clk);
    @(posedge clk); clear();
    repeat (200000) @(posedge clk);
    check(n_out < 125, $sformatf("silence: %0d output spikes for 12500 input spikes", n_out));
    check(n_ovf == 0 && n_sat == 0, $sformatf("no overflow (%0d) or saturation (%0d)", n_ovf, n_sat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
