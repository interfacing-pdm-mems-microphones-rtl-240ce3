// slpf: first-order spike-based low-pass filter.
//
// Filters the rate of a signed spike stream with a first-order low-pass
// response. The structure is an integrate-and-generate loop:
//   * an N-bit signed saturating integrator counts +1 for every positive
//     input spike and -1 for every negative one, and subtracts the feedback
//     spikes (a positive feedback spike counts -1);
//   * spike_gen turns the integrator value x into spikes at rate
//     x * K_BW, with K_BW = f_clk / (GEN_DIV * 2^(N-1));
//   * spike_div feeds FB_K/2^FB_M of those spikes back to the integrator and a
//     second spike_div scales the output by OUT_K/2^OUT_M.
// The loop gives H(s) = k_out*K_BW / (s + k_fb*K_BW): cut-off
// w_c = k_fb*K_BW rad/s and DC gain k_out/k_fb, where k_fb = FB_K/2^FB_M and
// k_out = OUT_K/2^OUT_M. Setting OUT = FB gives unity DC gain. The paper
// gives only the filter's function and refers to earlier work for its
// insides; this loop is the simplest circuit that has that function, and the
// integer settings are this design's own.
//
// Interface: spike_in / spike_out are two-wire signed spike buses. An input
// spike changes the integrator in the next cycle and can cause an output
// spike 3 cycles after it arrives (integrator, generator and divider
// registers). The integrator saturates at +/-(2^(N-1)-1); sat pulses when an
// update was clipped.
module slpf
  import psi_pkg::*;
#(
  parameter int unsigned N       = 16,   // integrator width
  parameter int unsigned GEN_DIV = 1,    // generator enable every GEN_DIV cycles
  parameter int unsigned FB_M    = 8,
  parameter int unsigned FB_K    = 74,
  parameter int unsigned OUT_M   = 8,
  parameter int unsigned OUT_K   = 74
) (
  input  logic   clk,
  input  logic   rst_n,
  input  spike_t spike_in,
  output spike_t spike_out,
  output logic   sat          // integrator clipped this cycle
);

  localparam logic signed [N+1:0] XMAX = (N+2)'((1 << (N - 1)) - 1);

  logic signed [N-1:0] x;
  logic signed [N+1:0] x_sum;
  spike_t              gen_spk, fb_spk;
  logic                gen_en;

  // Generator time base.
  if (GEN_DIV <= 1) begin : g_nodiv
    assign gen_en = 1'b1;
  end else begin : g_div
    logic [$clog2(GEN_DIV)-1:0] dcnt;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) dcnt <= '0;
      else        dcnt <= (dcnt == ($clog2(GEN_DIV))'(GEN_DIV - 1)) ? '0 : dcnt + 1'b1;
    end
    assign gen_en = (dcnt == '0);
  end

  // Integrator: input minus feedback, saturating.
  assign x_sum = (N+2)'(x) + (N+2)'(spike_value(spike_in)) - (N+2)'(spike_value(fb_spk));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x   <= '0;
      sat <= 1'b0;
    end else begin
      sat <= 1'b0;
      if (x_sum > XMAX) begin
        x   <= N'(XMAX);
        sat <= 1'b1;
      end else if (x_sum < -XMAX) begin
        x   <= N'(-XMAX);
        sat <= 1'b1;
      end else begin
        x <= N'(x_sum);
      end
    end
  end

  spike_gen #(.N(N)) u_gen (
    .clk, .rst_n, .en(gen_en), .value(x), .spk_out(gen_spk)
  );

  spike_div #(.M(FB_M), .K(FB_K)) u_fb_div (
    .clk, .rst_n, .spk_in(gen_spk), .spk_out(fb_spk)
  );

  spike_div #(.M(OUT_M), .K(OUT_K)) u_out_div (
    .clk, .rst_n, .spk_in(gen_spk), .spk_out(spike_out)
  );

endmodule
