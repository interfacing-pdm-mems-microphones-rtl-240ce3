// sbpf: second-order spike band-pass filter.
//
// The structure follows the paper: the input spike stream feeds two
// first-order spike low-pass filters (slpf) in parallel, and a Spike Hold &
// Fire (shf) subtracts the output of the low-cut-off filter (its - input)
// from the output of the high-cut-off filter (its + input). With both
// low-pass filters at unity DC gain, H(s) = wH/(s+wH) - wL/(s+wL): DC cancels
// and only the band between the two corners remains. All buses are two-wire
// signed spike buses.
//
// Default settings (this design's choice, aimed at the 70 Hz to 12 kHz band
// quoted for the measured interface, at a 50 MHz clock):
//   high filter: N = 10, K_BW = 50e6/512 = 97656/s, k_fb = 198/256,
//                wH = 75530 rad/s, fH = 12.02 kHz
//   low filter:  N = 16, K_BW = 50e6/32768 = 1525.9/s, k_fb = 74/256,
//                wL = 441.1 rad/s, fL = 70.2 Hz
// Both use OUT = FB, so each has unity DC gain.
//
// Timing: an input spike can first affect the output 4 cycles later (3 in the
// slpf, 1 in the shf). sat_h / sat_l report an integrator clipping; overflow
// reports a spike lost in the shf.
module sbpf
  import psi_pkg::*;
#(
  parameter int unsigned H_N       = 10,
  parameter int unsigned H_GEN_DIV = 1,
  parameter int unsigned H_FB_K    = 198,
  parameter int unsigned L_N       = 16,
  parameter int unsigned L_GEN_DIV = 1,
  parameter int unsigned L_FB_K    = 74,
  parameter int unsigned K_M       = 8    // resolution of both gain fractions
) (
  input  logic   clk,
  input  logic   rst_n,
  input  spike_t spike_in,
  output spike_t spike_out,
  output logic   sat_h,
  output logic   sat_l,
  output logic   overflow
);

  spike_t hf_spk, lf_spk;

  slpf #(.N(H_N), .GEN_DIV(H_GEN_DIV), .FB_M(K_M), .FB_K(H_FB_K),
         .OUT_M(K_M), .OUT_K(H_FB_K)) u_slpf_hf (
    .clk, .rst_n, .spike_in, .spike_out(hf_spk), .sat(sat_h)
  );

  slpf #(.N(L_N), .GEN_DIV(L_GEN_DIV), .FB_M(K_M), .FB_K(L_FB_K),
         .OUT_M(K_M), .OUT_K(L_FB_K)) u_slpf_lf (
    .clk, .rst_n, .spike_in, .spike_out(lf_spk), .sat(sat_l)
  );

  shf u_shf (
    .clk, .rst_n, .a(hf_spk), .b(lf_spk), .spike_out, .overflow
  );

endmodule
