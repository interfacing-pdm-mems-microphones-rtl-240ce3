// psi_top: binaural PDM-to-spikes interface (PSI) with AER monitor output.
//
// Connects two PDM MEMS microphones (right and left) to a spiking system.
// pdm_clock_gen divides the system clock by 16 into the microphone clock;
// pdm_edge_detector turns each PDM bit of each microphone into one signed
// spike (the front-end output, "PFC"); one sbpf per ear band-pass filters
// that spike stream into spikes spread in time (the PSI output). Both stages
// of both ears also go to aer_out so that they can be logged as
// address-events. The PSI output buses are ports: in the full system they
// feed a neuromorphic auditory sensor, which is not part of this design.
//
// AER address map (3 bits): addr[2] = ear (0 right, 1 left), addr[1] = stage
// (1 front end, 0 band-pass output), addr[0] = polarity (1 positive,
// 0 negative). For one ear this is the paper's map: 3/2 front-end
// positive/negative, 1/0 filtered positive/negative. The ear bit and the
// right-before-left order (as in the paper's system figure, right channels
// first) are this design's choice.
//
// Timing: one front-end spike per ear every 16 system cycles (3.125 MHz at
// 50 MHz); band-pass output spikes appear from 4 cycles after their causes.
// The front-end streams produce far more events than a parallel AER link can
// carry; lost counts those dropped at the AER port.
module psi_top
  import psi_pkg::*;
(
  input  logic   clk,             // system clock, 50 MHz in the reference system
  input  logic   rst_n,
  output logic   pdm_clk,         // to both microphones
  input  logic   pdm_dat_r,       // right microphone data
  input  logic   pdm_dat_l,       // left microphone data
  output spike_t pfc_r,           // front-end spikes, right
  output spike_t pfc_l,           // front-end spikes, left
  output spike_t sbpf_r,          // PSI output spikes, right
  output spike_t sbpf_l,          // PSI output spikes, left
  output logic   aer_req,
  input  logic   aer_ack,
  output logic [2:0] aer_addr,
  output logic [7:0] aer_lost,    // per address: an event was dropped at the AER port
  output logic   filt_sat,        // a filter integrator clipped
  output logic   filt_overflow    // a hold-and-fire lost a spike
);

  spike_t [1:0] pfc;
  logic   [7:0] ev;
  logic         sat_hr, sat_lr, sat_hl, sat_ll, ovf_r, ovf_l;

  pdm_clock_gen #(.DIV(PDM_CLK_DIV)) u_clk_gen (
    .clk, .rst_n, .pdm_clk
  );

  pdm_edge_detector #(.CHANNELS(2)) u_edge (
    .clk, .rst_n, .pdm_clk, .pdm_dat({pdm_dat_l, pdm_dat_r}), .spikes(pfc)
  );

  assign pfc_r = pfc[0];
  assign pfc_l = pfc[1];

  sbpf u_sbpf_r (
    .clk, .rst_n, .spike_in(pfc_r), .spike_out(sbpf_r),
    .sat_h(sat_hr), .sat_l(sat_lr), .overflow(ovf_r)
  );

  sbpf u_sbpf_l (
    .clk, .rst_n, .spike_in(pfc_l), .spike_out(sbpf_l),
    .sat_h(sat_hl), .sat_l(sat_ll), .overflow(ovf_l)
  );

  assign filt_sat      = sat_hr | sat_lr | sat_hl | sat_ll;
  assign filt_overflow = ovf_r | ovf_l;

  assign ev = {pfc_l.pos, pfc_l.neg, sbpf_l.pos, sbpf_l.neg,
               pfc_r.pos, pfc_r.neg, sbpf_r.pos, sbpf_r.neg};

  aer_out #(.LINES(8), .ADDR_W(3)) u_aer (
    .clk, .rst_n, .spk(ev), .aer_req, .aer_ack, .aer_addr, .lost(aer_lost)
  );

endmodule
