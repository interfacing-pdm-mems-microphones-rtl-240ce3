// tb_aer_out: checks the spike-to-AER interface with 8 lines.
// A receiver model answers the four-phase handshake after a random delay of
// 1..6 cycles per phase and logs each address at the rising edge of req. The
// testbench fires random spikes, then stops and lets the bus drain. Checks:
// every spike is either delivered with its own line's address or reported
// lost (spikes(line) = delivered(line) + lost(line)), lost events happen
// when spikes come faster than the bus, no line starves, req never falls
// before ack, and the address holds while req is high.
module tb_aer_out;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] spk = '0;
  logic req, ack = 1'b0;
  logic [7:0] lost;
  logic [2:0] addr;
  int checks = 0, failures = 0;
  int fired [8], got [8], lost_n = 0;
  logic prev_req = 1'b0;
  logic [2:0] held_addr;

  aer_out #(.LINES(8)) dut (.clk, .rst_n, .spk, .aer_req(req), .aer_ack(ack),
                            .aer_addr(addr), .lost);

  always #10 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Receiver (the AER-to-USB bridge side).
  initial begin
    forever begin
      @(posedge clk);
      if (req && !ack) begin
        got[addr]++;
        held_addr = addr;
        repeat ($urandom_range(1, 6)) @(posedge clk);
        ack <= 1'b1;
        while (req) begin
          @(posedge clk);
          if (req) check(addr == held_addr, "address changed while req high");
        end
        repeat ($urandom_range(1, 6)) @(posedge clk);
        ack <= 1'b0;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (prev_req && !req) check(ack, "req fell without ack");
    prev_req = req;
    lost_n += $countones(lost);
  end

  task automatic run(int cycles, int density_pct);
    repeat (cycles) begin
      logic [7:0] s;
      for (int i = 0; i < 8; i++) begin
        s[i] = ($urandom_range(99) < density_pct);
        fired[i] += s[i];
      end
      spk <= s;
      @(posedge clk);
    end
    spk <= '0;
  endtask

  initial begin
    int tot_f, tot_g;
    foreach (fired[i]) begin fired[i] = 0; got[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // slow: about one spike every 250 cycles in total, nothing should be lost
    run(20000, 0);
    for (int k = 0; k < 80; k++) begin
      spk[$urandom_range(7)] <= 1'b1;
      @(posedge clk);
      spk <= '0;
      repeat (249) @(posedge clk);
    end
    repeat (100) @(posedge clk);
    tot_g = 0; foreach (got[i]) tot_g += got[i];
    check(tot_g == 80 && lost_n == 0, $sformatf("slow traffic: %0d of 80 delivered, %0d lost", tot_g, lost_n));
    foreach (got[i]) got[i] = 0;
    lost_n = 0;
    // fast: 5 % per line per cycle, far beyond the bus rate
    run(20000, 5);
    repeat (400) @(posedge clk);
    tot_f = 0; tot_g = 0;
    foreach (fired[i]) begin tot_f += fired[i]; tot_g += got[i]; end
    check(tot_f == tot_g + lost_n, $sformatf("fast traffic: fired %0d = got %0d + lost %0d", tot_f, tot_g, lost_n));
    check(lost_n > 0, "events are lost under overload");
    foreach (got[i]) check(got[i] > tot_g / 16, $sformatf("line %0d served %0d times", i, got[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
