// Bench for scl_tick_gen: with the default 100 MHz clock and 1.6 MHz SCL
// ceiling the quarter-bit strobe must come every 16 cycles (SCL 1.5625 MHz,
// not above 1.6 MHz); with `en` low no strobe may appear. A second instance
// at 12 MHz / 1 MHz checks the rounding (3 cycles per quarter bit).
module scl_tick_gen_tb;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #5 clk = ~clk;
  logic tick, tick2;
  int checks = 0, failures = 0;

  scl_tick_gen dut (.clk, .rst_n, .en, .tick);
  scl_tick_gen #(.CLK_HZ(12_000_000), .SCL_HZ(1_000_000)) dut2 (.clk, .rst_n, .en, .tick(tick2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic en_d = 1'b0;
  int unsigned last = 0, last2 = 0, cyc = 0, n = 0, n2 = 0, bad = 0, bad2 = 0, while_off = 0;
  always @(posedge clk) begin
    cyc++;
    en_d <= en;
    if (tick) begin
      if (!en && !en_d) while_off++;
      if (last != 0 && cyc - last != 16) bad++;
      last = cyc; n++;
    end
    if (tick2) begin
      if (last2 != 0 && cyc - last2 != 3) bad2++;
      last2 = cyc; n2++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    n = 0; n2 = 0; last = 0; last2 = 0; while_off = 0;
    repeat (100) @(negedge clk);
    check(n == 0 && n2 == 0, "no strobe while disabled");
    en = 1'b1;
    repeat (1600) @(negedge clk);
    check(n >= 99 && n <= 100, $sformatf("%0d strobes in 1600 cycles", n));
    check(bad == 0, "strobe spacing 16 cycles (SCL 1.5625 MHz)");
    check(n2 >= 532 && bad2 == 0, "rounded-up divider 3 cycles at 12 MHz / 1 MHz");
    en = 1'b0;
    @(negedge clk);
    n = 0; while_off = 0;
    repeat (100) @(negedge clk);
    check(n == 0 && while_off == 0, "strobe stops when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
