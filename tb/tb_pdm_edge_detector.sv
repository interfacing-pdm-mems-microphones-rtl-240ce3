// tb_pdm_edge_detector: checks the PDM edge detector with two channels.
// Channel 0 is sampled on the rising PDM clock edge (its data changes after
// falling edges), channel 1 on the falling edge (data changes after rising
// edges). The testbench makes its own PDM clock (16-cycle period), drives
// random bits, records the bit each channel holds at its sampling edge and
// expects exactly one spike of that polarity, 2 cycles after the edge, and
// no other spikes.
module tb_pdm_edge_detector
  import psi_pkg::*;
;
  logic clk = 1'b0, rst_n = 1'b0, pdm_clk = 1'b0;
  logic [1:0] pdm_dat = '0;
  spike_t [1:0] spikes;
  int checks = 0, failures = 0, cyc = 0, ph = 0;
  int exp_cyc [2][$];
  logic exp_val [2][$];
  int n_pos = 0, n_neg = 0;

  pdm_edge_detector #(.CHANNELS(2), .FALLING_EDGE(2'b10)) dut (
    .clk, .rst_n, .pdm_clk, .pdm_dat, .spikes
  );

  always #10 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // Reference: PDM clock, data changes, expected spikes.
  always @(posedge clk) if (rst_n) begin
    cyc++;
    // observe DUT outputs (values from before this edge)
    for (int c = 0; c < 2; c++) begin
      if (spikes[c].pos || spikes[c].neg) begin
        check(!(spikes[c].pos && spikes[c].neg), "both polarities");
        if (exp_cyc[c].size() == 0) check(0, $sformatf("ch%0d unexpected spike", c));
        else begin
          int ec; logic ev;
          ec = exp_cyc[c].pop_front(); ev = exp_val[c].pop_front();
          check(cyc == ec, $sformatf("ch%0d latency: at %0d expected %0d", c, cyc, ec));
          check(spikes[c].pos == ev && spikes[c].neg == !ev, $sformatf("ch%0d polarity", c));
          if (spikes[c].pos) n_pos++; else n_neg++;
        end
      end
      if (exp_cyc[c].size() > 0) check(exp_cyc[c][0] >= cyc, $sformatf("ch%0d missing spike", c));
    end
    // drive the PDM clock: high for 8, low for 8
    ph = (ph + 1) % 16;
    if (ph == 0) begin            // rising edge
      pdm_clk <= 1'b1;
      exp_cyc[0].push_back(cyc + 2); exp_val[0].push_back(pdm_dat[0]);
      pdm_dat[1] <= 1'($urandom);  // channel 1 data changes after the rising edge
    end else if (ph == 8) begin   // falling edge
      pdm_clk <= 1'b0;
      if (pdm_clk) begin exp_cyc[1].push_back(cyc + 2); exp_val[1].push_back(pdm_dat[1]); end
      pdm_dat[0] <= 1'($urandom);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (16 * 500) @(posedge clk);
    #1;
    check(n_pos > 300 && n_neg > 300, $sformatf("spike mix pos=%0d neg=%0d", n_pos, n_neg));
    check(n_pos + n_neg >= 996, $sformatf("spike total %0d", n_pos + n_neg));
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
