// pdm_mic_model: behavioural model of a PDM MEMS microphone (testbench only).
//
// Not synthesizable. Stands in for the off-chip microphone: a second-order
// sigma-delta modulator, clocked by the PDM clock, that encodes
// OFFSET + AMP*sin(2*pi*FREQ_HZ*t + PHASE) (full scale = 1.0) as a 1-bit
// stream. A new bit is driven after each falling edge of pdm_clk, so it is
// stable at the next rising edge, where the interface samples it. The model
// counts the bits it has sent (bits) and the ones among them (ones), so a
// testbench can check the interface against them.
module pdm_mic_model #(
  parameter real FREQ_HZ = 500.0,
  parameter real AMP     = 0.5,
  parameter real OFFSET  = 0.02,
  parameter real PHASE   = 0.0,
  parameter real FS_HZ   = 3.125e6   // PDM clock rate, for the time axis
) (
  input  logic pdm_clk,
  output logic pdm_dat,
  output int   bits,
  output int   ones
);

  real i1, i2, u, y;

  initial begin
    i1 = 0.0; i2 = 0.0; y = 0.0;
    pdm_dat = 1'b0;
    bits = 0; ones = 0;
  end

  always @(negedge pdm_clk) begin
    u  = OFFSET + AMP * $sin(2.0 * 3.14159265358979 * FREQ_HZ * real'(bits) / FS_HZ + PHASE);
    i1 = i1 + u - y;
    i2 = i2 + i1 - 2.0 * y;
    y  = (i2 >= 0.0) ? 1.0 : -1.0;
    pdm_dat = (y > 0.0);
  end

  // Count each bit when the interface samples it (rising edge).
  always @(posedge pdm_clk) begin
    bits = bits + 1;
    if (pdm_dat) ones = ones + 1;
  end

endmodule
