// Workload bench: the array configurations of N = 6, 9, 15, 18, 24, 27, 33,
// 36 and 42 sensors, obtained by cutting off whole branches of the flexible
// circuit (digit I carries 6 sensors on buses 20-22, digits II to V carry 9
// sensors on five buses each). The design is at its default size.
//
// For each configuration the bench silences the sensors of the removed
// branches, starts a measurement, decodes three frames and stops. It checks
// that the identity check finds exactly the attached sensors, that attached
// sensors deliver their own samples, that removed ones read as zero while the
// frame keeps its 255-byte layout, and that frames still follow the sensor
// output rate.
module tactile_daq_branches_tb;
  import tactile_pkg::*;

  localparam int unsigned ODR_CYCLES = 62_500;
  localparam int unsigned NFB        = 252;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int unsigned acc_num(int unsigned b, bit sel);
    if (b < 20) return 10 * (b / 5) + 2 * (b % 5) + (sel ? 1 : 2);
    return 41 + 2 * (b - 20) + (sel ? 0 : 1);
  endfunction
  // branch of a bus: 0 = digit V, 1 = IV, 2 = III, 3 = II, 4 = I
  function automatic int unsigned branch_of(int unsigned b);
    return (b < 20) ? b / 5 : 4;
  endfunction

  logic [4:0] attached = 5'b11111;

  logic cmd_valid = 1'b0, tx_ready = 1'b0, tx_valid, running;
  logic [7:0] cmd_data = '0, tx_data;
  logic [N_BUS-1:0] scl_low, sda_low, sda_in, present_sel1, present_sel0;
  logic [31:0] frames, stat_retries, fifo_stalls;
  logic [2:0]  fscale;

  tactile_daq_top dut (
    .clk, .rst_n, .cmd_valid, .cmd_data, .tx_valid, .tx_ready, .tx_data,
    .scl_low, .sda_low, .sda_in, .running, .fscale, .present_sel1,
    .present_sel0, .frames, .stat_retries, .fifo_stalls
  );

  logic [N_BUS-1:0] s1_low, s0_low;
  for (genvar b = 0; b < N_BUS; b++) begin : g_bus
    wire scl = ~scl_low[b];
    wire on  = attached[branch_of(b)];
    assign sda_in[b] = ~(sda_low[b] | s1_low[b] | s0_low[b]);
    logic [15:0] n1, n0;
    lis3dsh_model #(.ADDR(ADDR_SEL1), .ID(8'(acc_num(b, 1))), .ODR_CYCLES(ODR_CYCLES),
                    .PHASE(300 + 211 * b))
      u_s1 (.clk, .rst_n, .alive(on), .scl, .sda(sda_in[b]), .sda_low(s1_low[b]), .nsamp(n1));
    if (SEL0_WIRED_DEFAULT[b]) begin : g_s0
      lis3dsh_model #(.ADDR(ADDR_SEL0), .ID(8'(acc_num(b, 0))), .ODR_CYCLES(ODR_CYCLES),
                      .PHASE(700 + 173 * b))
        u_s0 (.clk, .rst_n, .alive(on), .scl, .sda(sda_in[b]), .sda_low(s0_low[b]), .nsamp(n0));
    end else begin : g_none
      assign s0_low[b] = 1'b0;
      assign n0 = '0;
    end
  end

  // host side on the falling edge
  logic [7:0] fbuf [$];
  int unsigned nframes = 0, bad_words = 0, bad_hdr = 0;
  always @(negedge clk) begin
    tx_ready = ($urandom_range(3) != 0);
    if (tx_valid && tx_ready) fbuf.push_back(tx_data);
  end

  task automatic decode_frame();
    int unsigned pos;
    logic [7:0] raw [2][6][N_BUS];
    if (fbuf[0] != SYNC0 || fbuf[1] != SYNC1) bad_hdr++;
    pos = 3;
    for (int g = 1; g >= 0; g--)
      for (int r = 0; r < 6; r++)
        for (int b = 0; b < N_BUS; b++)
          if (g == 1 || SEL0_WIRED_DEFAULT[b]) begin raw[g][r][b] = fbuf[pos]; pos++; end
    for (int g = 1; g >= 0; g--)
      for (int b = 0; b < N_BUS; b++)
        if (g == 1 || SEL0_WIRED_DEFAULT[b]) begin
          logic [15:0] x, y, z;
          x = {raw[g][1][b], raw[g][0][b]};
          y = {raw[g][3][b], raw[g][2][b]} ^ 16'h5555;
          z = 16'({raw[g][5][b], raw[g][4][b]} - 16'h1234);
          if (attached[branch_of(b)]) begin
            if (x[15:8] != 8'(acc_num(b, g[0])) || y[15:8] != x[15:8] || z[15:8] != x[15:8]
                || 8'(y[7:0] - x[7:0]) > 2 || 8'(z[7:0] - x[7:0]) > 2) bad_words++;
          end else if ({raw[g][1][b], raw[g][0][b]} != 0 || {raw[g][3][b], raw[g][2][b]} != 0 ||
                       {raw[g][5][b], raw[g][4][b]} != 0) begin
            bad_words++;
          end
        end
    nframes++;
    repeat (3 + NFB) void'(fbuf.pop_front());
  endtask

  task automatic send_cmd(input logic [7:0] c);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_data = c;
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  // the nine configurations named for the array: branch subsets
  localparam logic [4:0] CONFIGS [9] = '{
    5'b10000,  //  6: digit I
    5'b01000,  //  9: digit II
    5'b11000,  // 15: digits I, II
    5'b00011,  // 18: digits V, IV
    5'b10011,  // 24: digits I, V, IV
    5'b00111,  // 27: digits V, IV, III
    5'b10111,  // 33: digits I, V, IV, III
    5'b01111,  // 36: digits II to V
    5'b11111   // 42: all
  };
  localparam int unsigned NEXP [9] = '{6, 9, 15, 18, 24, 27, 33, 36, 42};

  int unsigned t0, n_before, w_before;
  initial begin
    repeat (10) @(negedge clk);
    rst_n = 1'b1;
    repeat (10) @(negedge clk);
    for (int c = 0; c < 9; c++) begin
      int unsigned npres;
      logic [N_BUS-1:0] e1, e0;
      attached = CONFIGS[c];
      for (int b = 0; b < N_BUS; b++) begin
        e1[b] = attached[branch_of(b)];
        e0[b] = attached[branch_of(b)] && SEL0_WIRED_DEFAULT[b];
      end
      n_before = nframes;
      w_before = bad_words;
      send_cmd(CMD_START);
      t0 = frames;
      while (nframes < n_before + 4) begin
        @(posedge clk);
        if (fbuf.size() >= 3 + NFB) decode_frame();
      end
      npres = $countones(present_sel1) + $countones(present_sel0);
      check(npres == NEXP[c], $sformatf("N=%0d: %0d sensors found", NEXP[c], npres));
      check(present_sel1 == e1 && present_sel0 == e0, $sformatf("N=%0d: presence map", NEXP[c]));
      check(bad_words == w_before, $sformatf("N=%0d: %0d bad words", NEXP[c], bad_words - w_before));
      send_cmd(CMD_STOP);
      while (running) begin
        @(posedge clk);
        if (fbuf.size() >= 3 + NFB) decode_frame();
      end
      repeat (2000) begin
        @(posedge clk);
        if (fbuf.size() >= 3 + NFB) decode_frame();
      end
      check(fbuf.size() == 0, $sformatf("N=%0d: whole frames only", NEXP[c]));
    end
    check(bad_hdr == 0, "frame headers");
    $display("configurations=9 frames=%0d", nframes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
