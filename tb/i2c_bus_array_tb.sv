// Bench for i2c_bus_array with four buses: bus 0 carries a SEL-high and a
// SEL-low sensor, bus 1 only a SEL-high one, bus 2 both, bus 3 none. One
// command goes to all enabled buses at once. Checks: WHO_AM_I reads per
// group, NACK on buses without the addressed sensor, zero result and no SCL
// activity on disabled buses, identical SCL waveforms on all active buses
// (lockstep), the 39-SCL-period read time, and a broadcast write followed by
// per-bus data reads.
module i2c_bus_array_tb;
  import tactile_pkg::*;
  localparam int unsigned NB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, sel = 1, rd = 1, busy;
  logic [7:0] regad = '0, wdata = '0;
  logic [NB-1:0] en = '0, nack, scl_low, sda_low, sda_in, s1_low, s0_low;
  logic [NB-1:0][7:0] rdata;

  i2c_bus_array #(.NB(NB)) dut (.clk, .rst_n, .start, .sel, .rd, .regad, .wdata, .en,
    .busy, .rdata, .nack, .scl_low, .sda_low, .sda_in);

  for (genvar b = 0; b < NB; b++) begin : g_bus
    wire scl = ~scl_low[b];
    assign sda_in[b] = ~(sda_low[b] | s1_low[b] | s0_low[b]);
    logic [15:0] n1, n0;
    if (b < 3) begin : g1
      lis3dsh_model #(.ADDR(ADDR_SEL1), .ID(8'(10 + b)), .ODR_CYCLES(30000), .PHASE(100))
        u1 (.clk, .rst_n, .alive(1'b1), .scl, .sda(sda_in[b]), .sda_low(s1_low[b]), .nsamp(n1));
    end else begin : g1n
      assign s1_low[b] = 1'b0;
    end
    if (b == 0 || b == 2) begin : g0
      lis3dsh_model #(.ADDR(ADDR_SEL0), .ID(8'(20 + b)), .ODR_CYCLES(30000), .PHASE(100))
        u0 (.clk, .rst_n, .alive(1'b1), .scl, .sda(sda_in[b]), .sda_low(s0_low[b]), .nsamp(n0));
    end else begin : g0n
      assign s0_low[b] = 1'b0;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned len;
  task automatic cmd(input logic s, input logic r, input logic [7:0] ra,
                     input logic [7:0] wd, input logic [NB-1:0] e);
    @(negedge clk);
    sel = s; rd = r; regad = ra; wdata = wd; en = e; start = 1;
    @(negedge clk);
    start = 0;
    len = 1;
    while (busy) begin @(negedge clk); len++; end
  endtask

  // lockstep: SCL of buses 0 and 2 must match whenever both are enabled and
  // no NACK cut one of them short; a disabled bus keeps SCL high
  int unsigned skew = 0, idle_toggle = 0;
  logic [NB-1:0] en_act;
  always @(posedge clk) begin
    if (start) en_act <= en;
    if (busy && en_act[0] && en_act[2] && !nack[0] && !nack[2] && scl_low[0] != scl_low[2]) skew++;
    if (busy && !en_act[3] && scl_low[3]) idle_toggle++;
  end

  initial begin
    en_act = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    cmd(1, 1, REG_WHO_AM_I, 0, 4'b1111);
    check(rdata[0] == WHO_AM_I_VAL && rdata[1] == WHO_AM_I_VAL && rdata[2] == WHO_AM_I_VAL,
          "WHO_AM_I of SEL-high sensors");
    check(nack == 4'b1000, "NACK only on the empty bus");
    check(len >= 39 * 64 - 16 && len <= 39 * 64 + 16, $sformatf("read takes %0d cycles", len));

    cmd(0, 1, REG_WHO_AM_I, 0, 4'b0111);
    check(rdata[0] == WHO_AM_I_VAL && rdata[2] == WHO_AM_I_VAL, "WHO_AM_I of SEL-low sensors");
    check(nack == 4'b0010, "NACK where no SEL-low sensor exists");
    check(rdata[3] == 8'h00, "disabled bus reads zero");

    cmd(1, 0, REG_CTRL4, CTRL4_VAL, 4'b0111);
    check(nack == 4'b0000, "broadcast write acknowledged");
    cmd(0, 0, REG_CTRL4, CTRL4_VAL, 4'b0101);
    cmd(1, 1, REG_CTRL4, 0, 4'b0111);
    check(rdata[0] == CTRL4_VAL && rdata[1] == CTRL4_VAL && rdata[2] == CTRL4_VAL, "CTRL_REG4 read back");
    repeat (2000) @(negedge clk);
    cmd(1, 1, REG_OUT_X_L + 8'd1, 0, 4'b0111);
    check(rdata[0] == 8'd10 && rdata[1] == 8'd11 && rdata[2] == 8'd12, "X_H carries each sensor's id");
    cmd(0, 1, REG_OUT_X_L + 8'd1, 0, 4'b0101);
    check(rdata[0] == 8'd20 && rdata[2] == 8'd22 && rdata[1] == 8'd0, "SEL-low X_H per bus");
    check(skew == 0, $sformatf("buses in lockstep (%0d skewed cycles)", skew));
    check(idle_toggle == 0, "disabled bus stays quiet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
