// tb_psi_top: end-to-end test of the binaural PDM-to-spikes interface at its
// default (full) size, and the 500 Hz tone experiment.
// Two behavioural PDM microphones hear a 500 Hz tone: right at amplitude 0.5
// with a +0.02 offset, left at 0.3 with a -0.03 offset and a quarter-period
// phase shift (full scale 1.0). An AER receiver answers the handshake in 4
// cycles per phase. The run lasts 30 ms at 50 MHz. Checks:
//  * PDM clock: one rising edge every 16 system cycles (3.125 MHz);
//  * front end: one spike per PDM bit, positive exactly for the '1' bits;
//  * band-pass output in the last 20 ms (tone periods 6..15): polarity
//    changes between consecutive spikes ("zero crossings") equal 2 per tone
//    period (20, tolerance 2), while the front-end output changes polarity
//    more than 100 times as often;
//  * the output tone amplitude matches the band-pass gain at 500 Hz within
//    10 %, the microphone offset is removed (net output under 1 % of net
//    front-end input over whole periods);
//  * AER: every address 0..7 is seen; each event is delivered or reported
//    lost.
// Each mechanism (PDM clock, positive and negative front-end spikes, hold &
// fire cancellation, DC removal, AER delivery, AER drop) is counted and a
// mechanism that never happened counts as a failure.
module tb_psi_top
  import psi_pkg::*;
;
  localparam real FCLK = 50.0e6;
  localparam real PI   = 3.14159265358979;
  localparam real F0   = 500.0;
  localparam real WH   = 50.0e6 / 512.0 * 198.0 / 256.0;
  localparam real WL   = 50.0e6 / 32768.0 * 74.0 / 256.0;
  localparam int  RUN_CYCLES  = 1_500_000;   // 30 ms
  localparam int  MEAS_START  = 500_000;     // 10 ms

  logic clk = 1'b0, rst_n = 1'b0;
  logic pdm_clk, dat_r, dat_l, aer_req, aer_ack = 1'b0, filt_sat, filt_ovf;
  logic [7:0] aer_lost;
  logic [2:0] aer_addr;
  spike_t pfc_r, pfc_l, sbpf_r, sbpf_l;
  int bits_r, ones_r, bits_l, ones_l;
  int checks = 0, failures = 0;
  longint cyc = 0;

  psi_top dut (
    .clk, .rst_n, .pdm_clk, .pdm_dat_r(dat_r), .pdm_dat_l(dat_l),
    .pfc_r, .pfc_l, .sbpf_r, .sbpf_l,
    .aer_req, .aer_ack, .aer_addr, .aer_lost,
    .filt_sat, .filt_overflow(filt_ovf)
  );

  pdm_mic_model #(.FREQ_HZ(F0), .AMP(0.5), .OFFSET(0.02))
    mic_r (.pdm_clk, .pdm_dat(dat_r), .bits(bits_r), .ones(ones_r));
  pdm_mic_model #(.FREQ_HZ(F0), .AMP(0.3), .OFFSET(-0.03), .PHASE(PI / 2.0))
    mic_l (.pdm_clk, .pdm_dat(dat_l), .bits(bits_l), .ones(ones_l));

  always #10 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // ---- observation --------------------------------------------------------
  longint pdm_rises = 0, last_rise = -1, bad_period = 0;
  logic   prev_pdm = 1'b0;
  longint pfc_pos [2], pfc_neg [2], pfc_zc [2], out_zc [2], net_pfc [2], net_out [2];
  int     last_pfc [2], last_out [2];
  real    s_out [2], c_out [2];
  longint ev_fired = 0, ev_got = 0, ev_lost = 0, cancels = 0;
  longint addr_seen [8];

  function automatic int sv(spike_t s);
    return s.pos ? 1 : (s.neg ? -1 : 0);
  endfunction

  initial begin
    foreach (pfc_pos[i]) begin
      pfc_pos[i] = 0; pfc_neg[i] = 0; pfc_zc[i] = 0; out_zc[i] = 0;
      net_pfc[i] = 0; net_out[i] = 0; last_pfc[i] = 0; last_out[i] = 0;
      s_out[i] = 0.0; c_out[i] = 0.0;
    end
    foreach (addr_seen[i]) addr_seen[i] = 0;
  end

  always @(posedge clk) if (rst_n) begin
    spike_t p [2], o [2];
    real th;
    cyc++;
    if (pdm_clk && !prev_pdm) begin
      if (last_rise >= 0 && cyc - last_rise != 16) bad_period++;
      last_rise = cyc;
      pdm_rises++;
    end
    prev_pdm = pdm_clk;
    p[0] = pfc_r; p[1] = pfc_l; o[0] = sbpf_r; o[1] = sbpf_l;
    th = 2.0 * PI * F0 * real'(cyc) / FCLK;
    for (int e = 0; e < 2; e++) begin
      int v, w;
      v = sv(p[e]); w = sv(o[e]);
      pfc_pos[e] += p[e].pos; pfc_neg[e] += p[e].neg;
      if (cyc >= MEAS_START) begin
        if (v != 0 && last_pfc[e] != 0 && v != last_pfc[e]) pfc_zc[e]++;
        if (w != 0 && last_out[e] != 0 && w != last_out[e]) out_zc[e]++;
        net_pfc[e] += v; net_out[e] += w;
        s_out[e] += real'(w) * $sin(th); c_out[e] += real'(w) * $cos(th);
      end
      if (v != 0) last_pfc[e] = v;
      if (w != 0) last_out[e] = w;
    end
    ev_fired += (pfc_r.pos + pfc_r.neg + pfc_l.pos + pfc_l.neg
               + sbpf_r.pos + sbpf_r.neg + sbpf_l.pos + sbpf_l.neg);
    ev_lost  += $countones(aer_lost);
    // hold & fire cancellation: an opposite pair meets in a subtractor
    if (dut.u_sbpf_r.u_shf.h != 0 && dut.u_sbpf_r.u_shf.h_nxt == 0) cancels++;
  end

  // AER receiver: 4 cycles per handshake phase.
  initial begin
    forever begin
      @(posedge clk);
      if (aer_req && !aer_ack) begin
        ev_got++;
        addr_seen[aer_addr]++;
        repeat (4) @(posedge clk);
        aer_ack <= 1'b1;
        wait (!aer_req);
        repeat (4) @(posedge clk);
        aer_ack <= 1'b0;
      end
    end
  end

  initial begin
    real amp, expected_amp, g, w, r1, i1, r2, i2;
    int amp_in [2];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (RUN_CYCLES) @(posedge clk);
    // PDM clock
    check(bad_period == 0, $sformatf("PDM clock periods not 16 cycles: %0d", bad_period));
    check(pdm_rises >= RUN_CYCLES / 16 - 1 && pdm_rises <= RUN_CYCLES / 16 + 1,
          $sformatf("PDM clock edges %0d", pdm_rises));
    // front end against the microphone models (one bit may be in flight)
    check(pfc_pos[0] + pfc_neg[0] >= bits_r - 1 && pfc_pos[0] + pfc_neg[0] <= bits_r,
          $sformatf("right: %0d spikes for %0d bits", pfc_pos[0] + pfc_neg[0], bits_r));
    check(pfc_pos[0] >= ones_r - 1 && pfc_pos[0] <= ones_r,
          $sformatf("right: %0d positive spikes for %0d ones", pfc_pos[0], ones_r));
    check(pfc_pos[1] + pfc_neg[1] >= bits_l - 1 && pfc_pos[1] + pfc_neg[1] <= bits_l,
          $sformatf("left: %0d spikes for %0d bits", pfc_pos[1] + pfc_neg[1], bits_l));
    check(pfc_pos[1] >= ones_l - 1 && pfc_pos[1] <= ones_l,
          $sformatf("left: %0d positive spikes for %0d ones", pfc_pos[1], ones_l));
    // band-pass output
    w  = 2.0 * PI * F0;
    r1 = WH * WH / (WH * WH + w * w); i1 = -WH * w / (WH * WH + w * w);
    r2 = WL * WL / (WL * WL + w * w); i2 = -WL * w / (WL * WL + w * w);
    g  = $sqrt((r1 - r2) * (r1 - r2) + (i1 - i2) * (i1 - i2));
    for (int e = 0; e < 2; e++) begin
      real a_in, tm;
      a_in = (e == 0) ? 0.5 : 0.3;
      tm   = real'(RUN_CYCLES - MEAS_START) / FCLK;
      amp  = 2.0 / tm * $sqrt(s_out[e] * s_out[e] + c_out[e] * c_out[e]);
      expected_amp = a_in * 3.125e6 * g;
      $display("ear %0d: output zero crossings %0d, front-end zero crossings %0d, amplitude %0.0f /s (expected %0.0f), net front end %0d, net output %0d",
               e, out_zc[e], pfc_zc[e], amp, expected_amp, net_pfc[e], net_out[e]);
      check(out_zc[e] >= 18 && out_zc[e] <= 22, $sformatf("ear %0d: %0d output zero crossings, expected 20", e, out_zc[e]));
      check(pfc_zc[e] > 100 * out_zc[e], $sformatf("ear %0d: front-end zero crossings %0d", e, pfc_zc[e]));
      check(fabs(amp - expected_amp) < 0.1 * expected_amp, $sformatf("ear %0d: amplitude %f vs %f", e, amp, expected_amp));
      check(fabs(real'(net_out[e])) < 0.01 * fabs(real'(net_pfc[e])), $sformatf("ear %0d: offset not removed (%0d of %0d)", e, net_out[e], net_pfc[e]));
    end
    // AER
    foreach (addr_seen[i]) check(addr_seen[i] > 0, $sformatf("AER address %0d never sent", i));
    check(ev_fired - ev_lost - ev_got >= 0 && ev_fired - ev_lost - ev_got <= 8,
          $sformatf("AER: fired %0d, delivered %0d, lost %0d", ev_fired, ev_got, ev_lost));
    // mechanisms
    check(pdm_rises > 0, "mechanism: PDM clock");
    check(pfc_pos[0] > 0 && pfc_neg[0] > 0, "mechanism: positive and negative front-end spikes");
    check(cancels > 0, $sformatf("mechanism: hold & fire cancellation (%0d)", cancels));
    check(net_pfc[0] != 0, "mechanism: offset present at the front end for DC removal");
    check(ev_got > 0, "mechanism: AER delivery");
    check(ev_lost > 0, "mechanism: AER drop under overload");
    check(!filt_sat && !filt_ovf, "no filter saturation at the end of the run");
    $display("mechanisms: pdm_edges=%0d pfc_pos=%0d pfc_neg=%0d shf_cancel=%0d aer_sent=%0d aer_lost=%0d",
             pdm_rises, pfc_pos[0] + pfc_pos[1], pfc_neg[0] + pfc_neg[1], cancels, ev_got, ev_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (RUN_CYCLES + 100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
