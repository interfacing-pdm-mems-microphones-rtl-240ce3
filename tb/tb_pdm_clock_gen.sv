// tb_pdm_clock_gen: checks the PDM clock divider at its default DIV = 16:
// period of 16 system cycles, 8 high and 8 low, first rising edge one cycle
// after reset, and 100 rising edges in 1600 cycles.
module tb_pdm_clock_gen;
  logic clk = 1'b0, rst_n = 1'b0, pdm_clk;
  int checks = 0, failures = 0;
  int cyc = 0, last_rise = -1, rises = 0, high_cnt = 0, first_rise = -1;
  logic prev = 1'b0;

  pdm_clock_gen dut (.clk, .rst_n, .pdm_clk);

  always #10 clk = ~clk;   // 50 MHz

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (pdm_clk && !prev) begin
      rises++;
      if (first_rise < 0) first_rise = cyc;
      if (last_rise >= 0) check(cyc - last_rise == 16, $sformatf("period %0d", cyc - last_rise));
      last_rise = cyc;
    end
    if (!pdm_clk && prev) begin
      check(high_cnt == 8, $sformatf("high time %0d", high_cnt));
    end
    high_cnt = pdm_clk ? high_cnt + 1 : 0;
    prev = pdm_clk;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (1600) @(posedge clk);
    #1;
    check(rises == 100, $sformatf("rises %0d", rises));
    check(first_rise == 2, $sformatf("first rise seen at cycle %0d", first_rise));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
