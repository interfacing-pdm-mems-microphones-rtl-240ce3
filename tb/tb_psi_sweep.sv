// tb_psi_sweep: frequency sweep of the whole interface, 20 Hz to 20 kHz.
// Seven interface instances at their default settings each hear one tone of
// amplitude 0.5 (both ears) from the behavioural PDM microphone: 20, 70,
// 200, 1000, 5000, 12000 and 20000 Hz. After 25 ms of settling the
// Fourier amplitude of the right-ear band-pass output at the tone frequency
// is measured over 100 ms and divided by the input amplitude
// (0.5 * 3.125 M spikes/s). Each gain must lie within 0.06 of the ideal
// first-order pair |wH/(jw+wH) - wL/(jw+wL)|, with wH = 2*pi*12.02 kHz and
// wL = 2*pi*70.2 Hz, and the mid-band gain must exceed both ends.
module tb_psi_sweep
  import psi_pkg::*;
;
  localparam real FCLK = 50.0e6;
  localparam real PI   = 3.14159265358979;
  localparam real WH   = 50.0e6 / 512.0 * 198.0 / 256.0;
  localparam real WL   = 50.0e6 / 32768.0 * 74.0 / 256.0;
  localparam int  NF   = 7;
  localparam int  SETTLE = 1_250_000;   // 25 ms
  localparam int  MEAS   = 5_000_000;   // 100 ms

  function automatic real freq(int i);
    case (i)
      0: return 20.0;     1: return 70.0;     2: return 200.0;
      3: return 1000.0;   4: return 5000.0;   5: return 12000.0;
      default: return 20000.0;
    endcase
  endfunction

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  longint cyc = 0;
  real s_acc [NF], c_acc [NF], gain [NF];

  always #10 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real ideal(real f);
    real w, r1, i1, r2, i2;
    w  = 2.0 * PI * f;
    r1 = WH * WH / (WH * WH + w * w); i1 = -WH * w / (WH * WH + w * w);
    r2 = WL * WL / (WL * WL + w * w); i2 = -WL * w / (WL * WL + w * w);
    return $sqrt((r1 - r2) * (r1 - r2) + (i1 - i2) * (i1 - i2));
  endfunction

  for (genvar i = 0; i < NF; i++) begin : g_f
    logic pdm_clk, dat, req;
    logic [7:0] lost;
    logic [2:0] addr;
    logic sat, ovf;
    spike_t pr, pl, sr, sl;
    int bits, ones;

    pdm_mic_model #(.FREQ_HZ(freq(i)), .AMP(0.5), .OFFSET(0.0))
      mic (.pdm_clk, .pdm_dat(dat), .bits, .ones);

    psi_top dut (
      .clk, .rst_n, .pdm_clk, .pdm_dat_r(dat), .pdm_dat_l(dat),
      .pfc_r(pr), .pfc_l(pl), .sbpf_r(sr), .sbpf_l(sl),
      .aer_req(req), .aer_ack(req), .aer_addr(addr), .aer_lost(lost),
      .filt_sat(sat), .filt_overflow(ovf)
    );

    always @(posedge clk) if (rst_n && cyc >= SETTLE && cyc < SETTLE + MEAS) begin
      real th, v;
      th = 2.0 * PI * freq(i) * real'(cyc) / FCLK;
      v  = sr.pos ? 1.0 : (sr.neg ? -1.0 : 0.0);
      if (v != 0.0) begin
        s_acc[i] += v * $sin(th);
        c_acc[i] += v * $cos(th);
      end
    end
  end

  always @(posedge clk) if (rst_n) cyc++;

  initial begin
    foreach (s_acc[i]) begin s_acc[i] = 0.0; c_acc[i] = 0.0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (SETTLE + MEAS + 10) @(posedge clk);
    for (int i = 0; i < NF; i++) begin
      real amp, e;
      amp = 2.0 / (real'(MEAS) / FCLK) * $sqrt(s_acc[i] * s_acc[i] + c_acc[i] * c_acc[i]);
      gain[i] = amp / (0.5 * 3.125e6);
      e = ideal(freq(i));
      $display("sweep %7.0f Hz: gain %f (%6.2f dB), ideal %f", freq(i), gain[i],
               20.0 * $log10(gain[i]), e);
      check(fabs(gain[i] - e) < 0.06, $sformatf("gain at %0.0f Hz: %f vs %f", freq(i), gain[i], e));
    end
    check(gain[3] > gain[0] && gain[3] > gain[NF-1], "band-pass shape");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (SETTLE + MEAS + 100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
