// tb_shf: checks the Spike Hold & Fire subtractor.
// Directed cases: a lone spike is held, a second spike of the same sign
// fires one, an opposite spike cancels a held one, simultaneous a+ and b+
// cancel, a- and b+ add into a negative spike. Random phase: spikes of random
// sign on both inputs at 10 % density each; the signed output count must
// follow a - b with a difference of at most one held spike after a flush,
// and must never fire both polarities. Saturated phase: both inputs firing
// "+a, -b" every cycle must raise overflow.
module tb_shf
  import psi_pkg::*;
;
  logic clk = 1'b0, rst_n = 1'b0;
  spike_t a, b, y;
  logic ovf;
  int checks = 0, failures = 0;
  longint sum_in = 0, sum_out = 0, n_out = 0, n_ovf = 0;

  shf dut (.clk, .rst_n, .a, .b, .spike_out(y), .overflow(ovf));

  always #10 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    sum_out += y.pos ? 1 : (y.neg ? -1 : 0);
    n_out   += (y.pos || y.neg);
    n_ovf   += ovf;
    check(!(y.pos && y.neg), "both polarities");
  end

  // Apply one input pair for a cycle, then return the output seen after it.
  task automatic step(spike_t ia, spike_t ib, output spike_t o);
    a <= ia; b <= ib;
    @(posedge clk);
    a <= SPIKE_NONE; b <= SPIKE_NONE;
    sum_in += spike_value(ia) - spike_value(ib);
    @(posedge clk);
    o = y;
  endtask

  localparam spike_t P = '{pos: 1'b1, neg: 1'b0};
  localparam spike_t N = '{pos: 1'b0, neg: 1'b1};
  localparam spike_t Z = '{pos: 1'b0, neg: 1'b0};

  initial begin
    spike_t o;
    a = Z; b = Z;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    step(P, Z, o); check(o == Z, "lone + is held");
    step(P, Z, o); check(o == P, "second + fires");
    step(N, Z, o); check(o == Z, "opposite spike cancels held one");
    step(Z, P, o); check(o == Z, "b+ is held as negative");
    step(Z, P, o); check(o == N, "second b+ fires negative");
    step(Z, N, o); check(o == Z, "b- cancels held negative");
    step(P, P, o); check(o == Z, "a+ and b+ together cancel");
    step(N, P, o); check(o == N, "a- with b+ fires negative");
    step(P, Z, o); check(o == Z, "held negative cancelled by a+");
    check(sum_in == sum_out, $sformatf("directed bookkeeping in=%0d out=%0d", sum_in, sum_out));
    // random phase
    repeat (20000) begin
      spike_t ra, rb;
      ra = Z; rb = Z;
      if ($urandom_range(9) == 0) ra = $urandom_range(1) ? P : N;
      if ($urandom_range(9) == 0) rb = $urandom_range(1) ? P : N;
      a <= ra; b <= rb;
      sum_in += spike_value(ra) - spike_value(rb);
      @(posedge clk);
    end
    a <= Z; b <= Z;
    repeat (4) @(posedge clk);
    check(n_ovf == 0, "no overflow at 10 % density");
    check(sum_in - sum_out <= 1 && sum_in - sum_out >= -1,
          $sformatf("random bookkeeping in=%0d out=%0d", sum_in, sum_out));
    check(n_out > 500, $sformatf("random phase fired %0d spikes", n_out));
    // overflow
    a <= P; b <= N;
    repeat (20) @(posedge clk);
    a <= Z; b <= Z;
    repeat (3) @(posedge clk);
    check(n_ovf > 0, "overflow at saturated input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
