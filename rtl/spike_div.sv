// spike_div: spike frequency divider (helper of slpf).
//
// Passes K out of every 2^M input spikes, keeping their sign, so the output
// rate is the input rate times K/2^M. An M-bit counter advances on every input
// spike of either sign; a spike is passed when the bit-reversed counter is
// below K. Reversing the bits spreads the passed spikes evenly over the 2^M
// sequence instead of bunching them. K = 2^M passes every spike. The output is
// registered: one cycle of latency. The bit-reversal spreading and the K/2^M
// form of the gain are this design's choices.
module spike_div
  import psi_pkg::*;
#(
  parameter int unsigned M = 8,        // resolution of the fraction
  parameter int unsigned K = 1 << M    // numerator, 0 .. 2^M
) (
  input  logic   clk,
  input  logic   rst_n,
  input  spike_t spk_in,
  output spike_t spk_out
);

  logic [M-1:0] cnt;
  logic [M:0]   rev;
  logic         pass;

  assign rev  = {1'b0, M'(bitrev32(32'(cnt), M))};
  assign pass = (rev < (M+1)'(K));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      spk_out <= SPIKE_NONE;
    end else begin
      spk_out <= SPIKE_NONE;
      if (spk_in.pos || spk_in.neg) begin
        cnt <= cnt + 1'b1;
        if (pass) spk_out <= spk_in;
      end
    end
  end

  initial begin
    assert (K <= (1 << M)) else $error("spike_div: K must not exceed 2^M");
  end

endmodule
