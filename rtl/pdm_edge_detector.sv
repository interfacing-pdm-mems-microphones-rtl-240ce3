// pdm_edge_detector: PDM edge detector of the PDM front-end circuit.
//
// Turns each PDM bit of each microphone into one signed spike lasting one
// system-clock cycle: a '1' becomes a positive spike and a '0' a negative
// spike, as the paper specifies. The resulting spike stream is not yet spread
// in time: exactly one spike per PDM clock period on each channel.
//
// How it works. The microphone data inputs are asynchronous to the system
// clock and pass through a two-flop synchroniser. A two-state FSM
// (S_LOW / S_HIGH) follows the level of the PDM clock generated on chip. On a
// low-to-high transition it samples every channel whose FALLING_EDGE bit is 0;
// on a high-to-low transition it samples the channels whose bit is 1. This
// allows two microphones that drive data on opposite clock phases. The
// sampling edge, the synchroniser and the per-channel edge selection are this
// design's choices; the paper only names an FSM edge detector.
//
// Timing: if pdm_clk changes at clock edge E, the FSM sees it at edge E+1 and
// the spike is on spikes[c] from E+1 to E+2, one cycle wide. The bit it
// carries is pdm_dat as captured by the first synchroniser flop at edge E-1.
// Two microphones sharing one data line on opposite clock phases can be
// served by wiring the line to two channels and setting FALLING_EDGE for one.
module pdm_edge_detector
  import psi_pkg::*;
#(
  parameter int unsigned           CHANNELS     = 2,   // 2 = binaural
  parameter logic [CHANNELS-1:0]   FALLING_EDGE = '0   // per channel: sample on falling edge
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     pdm_clk,              // from pdm_clock_gen
  input  logic [CHANNELS-1:0]      pdm_dat,              // asynchronous microphone data
  output spike_t [CHANNELS-1:0]    spikes                // one spike per PDM bit
);

  typedef enum logic {S_LOW, S_HIGH} state_t;

  state_t                state;
  logic [CHANNELS-1:0]   dat_meta, dat_sync;
  logic                  rise, fall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dat_meta <= '0;
      dat_sync <= '0;
    end else begin
      dat_meta <= pdm_dat;
      dat_sync <= dat_meta;
    end
  end

  assign rise = (state == S_LOW)  &&  pdm_clk;
  assign fall = (state == S_HIGH) && !pdm_clk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOW;
    end else begin
      unique case (state)
        S_LOW:  if (pdm_clk)  state <= S_HIGH;
        S_HIGH: if (!pdm_clk) state <= S_LOW;
        default:              state <= S_LOW;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spikes <= '0;
    end else begin
      for (int c = 0; c < CHANNELS; c++) begin
        if ((rise && !FALLING_EDGE[c]) || (fall && FALLING_EDGE[c])) begin
          spikes[c].pos <=  dat_sync[c];
          spikes[c].neg <= !dat_sync[c];
        end else begin
          spikes[c] <= SPIKE_NONE;
        end
      end
    end
  end

  // A channel never fires both polarities at once.
  for (genvar c = 0; c < CHANNELS; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) !(spikes[c].pos && spikes[c].neg));
  end

endmodule
