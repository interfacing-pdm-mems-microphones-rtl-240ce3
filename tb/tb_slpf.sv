// tb_slpf: checks the spike low-pass filter against its first-order model.
// Two filters get the same input: the default one (low corner, 70.2 Hz) and
// the high-corner setting used in the band-pass (N=10, k_fb=198/256,
// tau = 1/75530 s = 662 cycles at 50 MHz).
//  1. Step: input of one positive spike every 16 cycles from reset. A
//     first-order low-pass with unity gain emits r*(t - tau*(1-exp(-t/tau)))
//     spikes by time t; the high-corner filter's count is checked at t = tau,
//     3*tau and 10*tau.
//  2. DC gain: after settling, both filters must emit as many spikes as they
//     receive, within 2 %.
//  3. Negative input gives negative output spikes only.
//  4. Full-rate input (a spike every cycle) saturates the high-corner
//     integrator.
module tb_slpf
  import psi_pkg::*;
;
  localparam real TAU_H = 50.0e6 / (50.0e6 / 512.0 * 198.0 / 256.0);   // cycles
  localparam real TAU_L = 50.0e6 / (50.0e6 / 32768.0 * 74.0 / 256.0);

  logic clk = 1'b0, rst_n = 1'b0;
  spike_t sin, out_l, out_h;
  logic sat_l, sat_h;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint in_p = 0, in_n = 0, hp = 0, hn = 0, lp = 0, ln = 0, sat_cnt = 0;
  int period = 16, polarity = 1, ph = 0;

  slpf dut_l (.clk, .rst_n, .spike_in(sin), .spike_out(out_l), .sat(sat_l));
  slpf #(.N(10), .GEN_DIV(1), .FB_M(8), .FB_K(198), .OUT_M(8), .OUT_K(198)) dut_h (
    .clk, .rst_n, .spike_in(sin), .spike_out(out_h), .sat(sat_h));

  always #10 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    in_p += sin.pos; in_n += sin.neg;
    hp += out_h.pos; hn += out_h.neg; lp += out_l.pos; ln += out_l.neg;
    sat_cnt += sat_h;
    ph = (ph + 1) % period;
    if (period > 0 && ph == 0) begin
      sin.pos <= (polarity > 0); sin.neg <= (polarity < 0);
    end else sin <= SPIKE_NONE;
  end

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real model(real t, real tau, real r);
    return r * (t - tau * (1.0 - $exp(-t / tau)));
  endfunction

  task automatic reset_counts();
    in_p = 0; in_n = 0; hp = 0; hn = 0; lp = 0; ln = 0; sat_cnt = 0;
  endtask

  initial begin
    real e;
    sin = SPIKE_NONE;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // 1. step response of the high-corner filter
    wait (cyc == longint'(TAU_H));
    e = model(TAU_H, TAU_H, 1.0 / 16.0);
    check(fabs(real'(hp) - e) <= 4.0, $sformatf("step @tau: %0d vs %f", hp, e));
    wait (cyc == longint'(3.0 * TAU_H));
    e = model(3.0 * TAU_H, TAU_H, 1.0 / 16.0);
    check(fabs(real'(hp) - e) <= 6.0, $sformatf("step @3tau: %0d vs %f", hp, e));
    wait (cyc == longint'(10.0 * TAU_H));
    e = model(10.0 * TAU_H, TAU_H, 1.0 / 16.0);
    check(fabs(real'(hp) - e) <= 8.0, $sformatf("step @10tau: %0d vs %f", hp, e));
    check(hn == 0, "no negative spikes for positive input");
    // 2. DC gain after settling (low-corner filter: wait 8 tau)
    wait (cyc == longint'(8.0 * TAU_L));
    @(posedge clk); reset_counts();
    repeat (400000) @(posedge clk);
    check(fabs(real'(hp - in_p)) <= 0.02 * real'(in_p), $sformatf("DC gain high: %0d / %0d", hp, in_p));
    check(fabs(real'(lp - in_p)) <= 0.02 * real'(in_p), $sformatf("DC gain low: %0d / %0d", lp, in_p));
    check(ln == 0 && hn == 0, "no negative spikes at positive DC");
    check(sat_cnt == 0, "no saturation at 1/16 rate");
    // 3. negative input
    polarity = -1;
    repeat (20 * 662) @(posedge clk);
    @(posedge clk); reset_counts();
    repeat (100000) @(posedge clk);
    check(hp == 0, $sformatf("high filter positive spikes at negative input: %0d", hp));
    check(fabs(real'(hn - in_n)) <= 0.02 * real'(in_n), $sformatf("negative gain high: %0d / %0d", hn, in_n));
    // 4. full rate saturates the high-corner integrator
    polarity = 1; period = 1;
    repeat (20000) @(posedge clk);
    check(sat_cnt > 0, "saturation at full input rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
