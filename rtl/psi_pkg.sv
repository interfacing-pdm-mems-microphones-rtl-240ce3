// psi_pkg: types and constants shared by the PDM-to-spikes interface.
//
// A signed spike travels on a two-wire bus: one wire fires for a positive
// spike, the other for a negative spike, each for exactly one system-clock
// cycle. Both wires high in the same cycle never happens on a bus driven by
// the blocks here. The default constants describe the reference system: a
// 50 MHz system clock divided by 16 into a 3.125 MHz PDM clock. The filter
// corner frequencies (about 70 Hz and 12 kHz) are the band edges quoted for
// the measured interface; the integer settings that produce them are this
// design's own choice (see sbpf.sv).
package psi_pkg;

  // Two-wire signed spike bus.
  typedef struct packed {
    logic pos;  // positive spike, one cycle wide
    logic neg;  // negative spike, one cycle wide
  } spike_t;

  localparam spike_t SPIKE_NONE = '{pos: 1'b0, neg: 1'b0};

  // PDM clock divider of the reference system (50 MHz / 16 = 3.125 MHz).
  localparam int unsigned PDM_CLK_DIV = 16;

  // Signed value of a spike bus: +1, -1 or 0.
  function automatic logic signed [1:0] spike_value(spike_t s);
    return s.pos ? 2'sd1 : (s.neg ? -2'sd1 : 2'sd0);
  endfunction

  // Bit reversal used by the uniform spike generators and dividers.
  function automatic logic [31:0] bitrev32(logic [31:0] v, int unsigned w);
    logic [31:0] r;
    r = '0;
    for (int i = 0; i < 32; i++) begin
      if (i < w) r[i] = v[w - 1 - i];
    end
    return r;
  endfunction

endpackage
