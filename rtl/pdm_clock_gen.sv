// pdm_clock_gen: PDM clock generator of the PDM front-end circuit.
//
// Divides the system clock by DIV to produce the microphone clock. With the
// reference 50 MHz system clock and DIV = 16 the output is 3.125 MHz, the
// highest clock the microphones accept; both numbers follow the paper. A
// counter runs 0..DIV-1; the clock is high for the first DIV/2 counts and low
// for the rest, so the duty cycle is 50 % for even DIV (the duty cycle is this
// design's choice). pdm_clk is a register output, so it can leave the chip
// without glitches. After reset the first rising edge appears one cycle after
// rst_n is released, and one rising edge follows every DIV cycles.
module pdm_clock_gen #(
  parameter int unsigned DIV = psi_pkg::PDM_CLK_DIV  // system clocks per PDM clock
) (
  input  logic clk,
  input  logic rst_n,
  output logic pdm_clk   // divided clock to the microphones
);

  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      pdm_clk <= 1'b0;
    end else begin
      cnt     <= (cnt == CW'(DIV - 1)) ? '0 : cnt + 1'b1;
      pdm_clk <= (cnt < CW'(DIV / 2));
    end
  end

  initial begin
    assert (DIV >= 2) else $error("pdm_clock_gen: DIV must be at least 2");
  end

endmodule
