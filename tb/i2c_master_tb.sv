// Self-checking bench for i2c_master: one master, two accelerometer models on
// one bus (SEL high and SEL low addresses). It reads WHO_AM_I from both,
// addresses an absent device (expects NACK), writes and reads back CTRL_REG4,
// then reads STATUS and the six output bytes and compares them with the
// model's known sample formula. It also checks the SCL period (64 cycles) and
// the length of a read (39 bits) and a write (29 bits) transaction.
module i2c_master_tb;
  import tactile_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic tick, start, busy, nack, scl_low, sda_low, m1_low, m0_low;
  logic [7:0] rdata;
  logic [15:0] ns1, ns0;
  i2c_req_t req;
  wire scl = ~scl_low;
  wire sda = ~(sda_low | m1_low | m0_low);

  scl_tick_gen u_tick (.clk, .rst_n, .en(1'b1), .tick);
  i2c_master dut (.clk, .rst_n, .tick, .start, .req, .busy, .rdata, .nack,
                  .scl_low, .sda_low, .sda_in(sda));
  lis3dsh_model #(.ADDR(ADDR_SEL1), .ID(8'd1), .ODR_CYCLES(50000), .PHASE(100))
    s1 (.clk, .rst_n, .alive(1'b1), .scl, .sda, .sda_low(m1_low), .nsamp(ns1));
  lis3dsh_model #(.ADDR(ADDR_SEL0), .ID(8'd2), .ODR_CYCLES(50000), .PHASE(100))
    s0 (.clk, .rst_n, .alive(1'b1), .scl, .sda, .sda_low(m0_low), .nsamp(ns0));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned len;
  task automatic xact(input bit rd, input logic [6:0] a, input logic [7:0] r,
                      input logic [7:0] w);
    @(negedge clk);
    req = '{rd: rd, addr: a, regad: r, wdata: w};
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    len = 1;
    while (busy) begin @(negedge clk); len++; end
  endtask

  // SCL period measurement
  int unsigned last_rise = 0, cyc = 0, per_bad = 0, per_seen = 0;
  logic scl_d = 1'b1;
  always @(posedge clk) begin
    cyc++;
    scl_d <= scl;
    if (scl && !scl_d) begin
      if (last_rise != 0 && busy && (cyc - last_rise) < 200) begin
        per_seen++;
        if (cyc - last_rise < 64) per_bad++;
      end
      last_rise = cyc;
    end
  end

  logic [15:0] x;
  logic [7:0] b[6];
  initial begin
    start = 1'b0; req = '0;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);

    xact(1, ADDR_SEL1, REG_WHO_AM_I, 0);
    check(!nack && rdata == WHO_AM_I_VAL, "WHO_AM_I of SEL-high device");
    check(len >= 39*64 - 16 && len <= 39*64 + 16, $sformatf("read length %0d cycles", len));
    xact(1, ADDR_SEL0, REG_WHO_AM_I, 0);
    check(!nack && rdata == WHO_AM_I_VAL, "WHO_AM_I of SEL-low device");
    xact(1, 7'h55, REG_WHO_AM_I, 0);
    check(nack, "absent device answers NACK");

    xact(0, ADDR_SEL1, REG_CTRL4, CTRL4_VAL);
    check(!nack, "write acknowledged");
    check(len >= 29*64 - 16 && len <= 29*64 + 16, $sformatf("write length %0d cycles", len));
    xact(1, ADDR_SEL1, REG_CTRL4, 0);
    check(rdata == CTRL4_VAL, "CTRL_REG4 read back");
    xact(1, ADDR_SEL0, REG_CTRL4, 0);
    check(rdata == 8'h00, "other device untouched");

    begin
      logic [15:0] n0;
      n0 = ns1;
      while (ns1 == n0) @(negedge clk);
    end
    xact(1, ADDR_SEL1, REG_STATUS, 0);
    check(rdata[STATUS_ZYXDA_BIT], "status shows new data");
    for (int i = 0; i < 6; i++) begin
      xact(1, ADDR_SEL1, REG_OUT_X_L + 8'(i), 0);
      b[i] = rdata;
    end
    x = {b[1], b[0]};
    check(x[15:8] == 8'd1, "X high byte carries sensor id");
    check({b[3], b[2]} == (x ^ 16'h5555), "Y matches sample formula");
    check({b[5], b[4]} == 16'(x + 16'h1234), "Z matches sample formula");
    xact(1, ADDR_SEL1, REG_STATUS, 0);
    check(!rdata[STATUS_ZYXDA_BIT], "status cleared after reading Z_H");
    check(per_seen > 100 && per_bad == 0, $sformatf("SCL period >= 64 cycles (%0d short of %0d)", per_bad, per_seen));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
