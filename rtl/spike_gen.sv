// spike_gen: uniform spike generator (helper of slpf).
//
// Converts a signed number into a spike stream whose rate is proportional to
// it: on every enabled cycle (en high) a spike of the number's sign fires when
// |value| is greater than the bit-reversed value of a free-running (N-1)-bit
// counter. Over 2^(N-1) enabled cycles exactly |value| spikes fire, spread
// evenly, so the rate is |value| / 2^(N-1) times the enable rate. The
// reverse-bitwise comparison is this design's choice of the simplest evenly
// spaced generator. The output is registered: one cycle of latency.
module spike_gen
  import psi_pkg::*;
#(
  parameter int unsigned N = 16        // width of the signed value
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,      // generator time base
  input  logic signed [N-1:0] value,   // must stay within +/-(2^(N-1)-1)
  output spike_t              spk_out
);

  logic [N-2:0] cnt;
  logic [N-2:0] rev;
  logic [N-2:0] mag;
  logic         fire;

  assign rev  = (N-1)'(bitrev32(32'(cnt), N - 1));
  assign mag  = value[N-1] ? (N-1)'(-value) : value[N-2:0];
  assign fire = en && (mag > rev);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      spk_out <= SPIKE_NONE;
    end else begin
      if (en) cnt <= cnt + 1'b1;
      spk_out.pos <= fire && !value[N-1];
      spk_out.neg <= fire &&  value[N-1];
    end
  end

endmodule
