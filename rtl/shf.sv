// shf: Spike Hold & Fire, a spike-rate subtractor.
//
// Produces a spike stream whose rate is the rate of input a minus the rate of
// input b, which is what the paper asks of it. Spikes of b count with their
// sign inverted. Rather than passing spikes straight through, the block holds
// them: a spike that meets an opposite spike cancels with it, and a held spike
// is fired only when a second spike of the same sign arrives. This removes
// the opposite-sign pairs that a plain merge would let through (the source of
// high-frequency chatter in the output).
//
// How it works. A small signed count h (-HOLD_MAX..HOLD_MAX) is the number of
// held spikes. Each cycle t = h + a - b (a, b each -1, 0, +1). If t >= 2 a
// positive spike fires and h becomes t-1; if t <= -2 a negative spike fires
// and h becomes t+1; otherwise nothing fires and h becomes t. At most one
// spike leaves per cycle, so sustained input rates near the clock rate can
// overflow h; it is then clipped and the overflow output pulses (the lost
// spike is counted nowhere else). The exact hold rule and the hold depth are
// this design's choices; the paper names the block and its function only.
//
// Timing: the output is registered; a spike that completes a pair fires in
// the next cycle. A single spike (h = +1 or -1) can remain held
// indefinitely; that is the expected static error of one spike.
module shf
  import psi_pkg::*;
#(
  parameter int unsigned HOLD_MAX = 3   // held spikes before overflow
) (
  input  logic   clk,
  input  logic   rst_n,
  input  spike_t a,          // + input
  input  spike_t b,          // - input
  output spike_t spike_out,
  output logic   overflow    // a spike was lost this cycle
);

  localparam int HW = $clog2(HOLD_MAX + 3) + 2;  // width of h and t, signed

  localparam logic signed [HW-1:0] HMAX = HW'(HOLD_MAX);
  localparam logic signed [HW-1:0] TWO  = HW'(2);
  localparam logic signed [HW-1:0] ONE  = HW'(1);

  logic signed [HW-1:0] h, t, h_nxt;
  logic                 fire_p, fire_n, ovf;

  always_comb begin
    t      = h + HW'(spike_value(a)) - HW'(spike_value(b));
    fire_p = (t >=  TWO);
    fire_n = (t <= -TWO);
    if      (fire_p) h_nxt = t - ONE;
    else if (fire_n) h_nxt = t + ONE;
    else             h_nxt = t;
    ovf = 1'b0;
    if (h_nxt > HMAX) begin
      h_nxt = HMAX;
      ovf   = 1'b1;
    end else if (h_nxt < -HMAX) begin
      h_nxt = -HMAX;
      ovf   = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h         <= '0;
      spike_out <= SPIKE_NONE;
      overflow  <= 1'b0;
    end else begin
      h             <= h_nxt;
      spike_out.pos <= fire_p;
      spike_out.neg <= fire_n;
      overflow      <= ovf;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(spike_out.pos && spike_out.neg));

endmodule
