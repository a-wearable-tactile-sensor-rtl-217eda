// End-to-end bench for the acquisition firmware at its default size: 23 I2C
// buses with 42 accelerometer models wired as on the flexible PCB (bus b, SEL
// high: the odd numbered sensor; SEL low: the even numbered one, absent on
// the fifth bus of the four long branches). Sensor 46 is made silent to stand
// for a missing sensor.
//
// The bench sends a start command, receives the byte stream and decodes every
// frame: header, frame counter, and for each of the 42 positions the X, Y, Z
// words, which must carry the sensor's number and follow the model's sample
// formula, with a sample index that advances from frame to frame. It checks
// the identity-check result, the zero-filled slot of the silent sensor, the
// frame period (one frame per sensor output period, and below the 763 us
// sampling interval of the published design), FIFO back-pressure (the host
// stops reading for a while), stop / restart commands, and the range command
// (CTRL_REG5 of every present sensor after a start, command accepted only
// while idle, reserved codes ignored). Each mechanism
// (identity check rejecting a sensor, status re-poll, FIFO stall, stop,
// restart) must be seen at least once.
module tactile_daq_top_tb;
  import tactile_pkg::*;

  localparam int unsigned ODR_CYCLES = 62_500;  // 1600 Hz at 100 MHz
  localparam int unsigned DEAD_BUS   = 22;      // sensor 46: bus 22, SEL low
  localparam int unsigned NFB        = 252;     // payload bytes per frame

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;   // 100 MHz

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int unsigned acc_num(int unsigned b, bit sel);
    if (b < 20) return 10 * (b / 5) + 2 * (b % 5) + (sel ? 1 : 2);
    return 41 + 2 * (b - 20) + (sel ? 0 : 1);
  endfunction

  // ---- DUT ----------------------------------------------------------------
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

  // ---- sensor array -------------------------------------------------------
  logic [N_BUS-1:0] s1_low, s0_low;
  logic [7:0] c5_s1 [N_BUS];   // CTRL_REG5 of each sensor
  logic [7:0] c5_s0 [N_BUS];
  for (genvar b = 0; b < N_BUS; b++) begin : g_bus
    wire scl = ~scl_low[b];
    assign sda_in[b] = ~(sda_low[b] | s1_low[b] | s0_low[b]);
    logic [15:0] n1, n0;
    lis3dsh_model #(.ADDR(ADDR_SEL1), .ID(8'(acc_num(b, 1))), .ODR_CYCLES(ODR_CYCLES),
                    .PHASE(500 + 97 * b))
      u_s1 (.clk, .rst_n, .alive(1'b1), .scl, .sda(sda_in[b]), .sda_low(s1_low[b]), .nsamp(n1));
    assign c5_s1[b] = u_s1.ctrl5;
    if (SEL0_WIRED_DEFAULT[b]) begin : g_s0
      lis3dsh_model #(.ADDR(ADDR_SEL0), .ID(8'(acc_num(b, 0))), .ODR_CYCLES(ODR_CYCLES),
                      .PHASE(900 + 131 * b))
        u_s0 (.clk, .rst_n, .alive(b != DEAD_BUS), .scl, .sda(sda_in[b]), .sda_low(s0_low[b]), .nsamp(n0));
      assign c5_s0[b] = u_s0.ctrl5;
    end else begin : g_none
      assign s0_low[b] = 1'b0;
      assign c5_s0[b] = 8'h00;
      assign n0 = '0;
    end
  end

  // ---- stream receiver and frame checker -------------------------------------
  logic [7:0] fbuf [$];
  int unsigned nframes = 0, last_hdr_cyc = 0, cyc = 0, per_min = '1, per_max = 0, per_n = 0, per_sum = 0;
  logic [7:0]  last_cnt;
  logic [7:0]  last_n [N_BUS][2];
  bit          have_last = 0;
  bit          host_reads = 1'b1;
  int unsigned seen_reject = 0, seen_retry = 0, seen_stall = 0, seen_stop = 0, seen_restart = 0;
  int unsigned bad_bytes = 0, bad_seq = 0;

  task automatic decode_frame();
    int unsigned pos;
    logic [7:0] raw [2][6][N_BUS];
    // header
    check(fbuf[0] == SYNC0 && fbuf[1] == SYNC1, "frame header sync bytes");
    if (have_last) check(fbuf[2] == 8'(last_cnt + 1), "frame counter advances by one");
    last_cnt = fbuf[2];
    pos = 3;
    for (int g = 1; g >= 0; g--)
      for (int r = 0; r < 6; r++)
        for (int b = 0; b < N_BUS; b++)
          if (g == 1 || SEL0_WIRED_DEFAULT[b]) begin
            raw[g][r][b] = fbuf[pos];
            pos++;
          end
    check(pos == 3 + NFB, "frame length 255 bytes");
    for (int g = 1; g >= 0; g--)
      for (int b = 0; b < N_BUS; b++)
        if (g == 1 || SEL0_WIRED_DEFAULT[b]) begin
          logic [15:0] x, y, z;
          x = {raw[g][1][b], raw[g][0][b]};
          y = {raw[g][3][b], raw[g][2][b]};
          z = {raw[g][5][b], raw[g][4][b]};
          if (g == 0 && b == DEAD_BUS) begin
            if (x != 0 || y != 0 || z != 0) bad_bytes++;
          end else begin
            // X, Y and Z are separate reads, so Y or Z may already belong to
            // the next sample or the one after
            logic [15:0] yn, zn;
            yn = y ^ 16'h5555;
            zn = 16'(z - 16'h1234);
            if (x[15:8] != 8'(acc_num(b, g[0])) || yn[15:8] != x[15:8] || zn[15:8] != x[15:8]
                || 8'(yn[7:0] - x[7:0]) > 2 || 8'(zn[7:0] - x[7:0]) > 2) begin
              bad_bytes++;
              if (bad_bytes < 5) $display("bad sample bus %0d sel %0d: %h %h %h", b, g, x, y, z);
            end
            if (have_last) begin
              logic [7:0] d;
              d = x[7:0] - last_n[b][g];
              if (d == 0 || d > 3) begin
                bad_seq++;
                if (bad_seq < 5) $display("sample index bus %0d sel %0d: %0d -> %0d", b, g, last_n[b][g], x[7:0]);
              end
            end
            last_n[b][g] = x[7:0];
          end
        end
    have_last = 1;
    nframes++;
    repeat (3 + NFB) void'(fbuf.pop_front());
  endtask

  // The host side works on the falling edge: it sets tx_ready, and a byte
  // offered with tx_ready high is taken by the DUT on the next rising edge.
  always @(negedge clk) begin
    cyc++;
    tx_ready = host_reads && ($urandom_range(3) != 0);
    if (tx_valid && tx_ready) begin
      fbuf.push_back(tx_data);
    end
  end

  // frame period, taken from the sequencer's frame counter while no FIFO
  // stall happens in between
  logic [31:0] frames_d = '0, stalls_d = '0;
  always @(posedge clk) begin
    frames_d <= frames;
    stalls_d <= fifo_stalls;
    if (frames != frames_d) begin
      if (last_hdr_cyc != 0 && fifo_stalls == stalls_d && frames == frames_d + 1) begin
        per_n++;
        per_sum += cyc - last_hdr_cyc;
        if (cyc - last_hdr_cyc < per_min) per_min = cyc - last_hdr_cyc;
        if (cyc - last_hdr_cyc > per_max) per_max = cyc - last_hdr_cyc;
      end
      last_hdr_cyc = cyc;
    end
    if (fifo_stalls != stalls_d || !running) last_hdr_cyc = 0;
  end

  task automatic wait_frames(input int unsigned n);
    int unsigned target;
    target = nframes + n;
    while (nframes < target) begin
      @(posedge clk);
      if (fbuf.size() >= 3 + NFB) decode_frame();
    end
  endtask

  // every present sensor holds CTRL_REG5 = v (the dead one is not written)
  function automatic bit c5_all(input logic [7:0] v);
    for (int b = 0; b < N_BUS; b++) begin
      if (c5_s1[b] != v) return 1'b0;
      if (SEL0_WIRED_DEFAULT[b] && b != DEAD_BUS && c5_s0[b] != v) return 1'b0;
    end
    return 1'b1;
  endfunction

  task automatic send_cmd(input logic [7:0] c);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_data = c;
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  int unsigned stalls0, fr0;
  initial begin
    repeat (10) @(negedge clk);
    rst_n = 1'b1;
    repeat (10) @(negedge clk);
    check(!running, "idle after reset");

    send_cmd(CMD_START);
    check(running, "running after start command");
    wait_frames(1);
    // identity check: 23 SEL-high sensors and 18 of the 19 SEL-low ones
    check(present_sel1 == '1, "all SEL-high sensors present");
    check(present_sel0 == (SEL0_WIRED_DEFAULT & ~(23'd1 << DEAD_BUS)), "SEL-low presence map");
    if (!present_sel0[DEAD_BUS]) seen_reject++;

    wait_frames(4);

    // host stops reading: the FIFO fills and the sequencer waits
    host_reads = 1'b0;
    stalls0 = fifo_stalls;
    repeat (6 * ODR_CYCLES) @(posedge clk);
    check(fifo_stalls > stalls0, "FIFO back-pressure stalls frames");
    if (fifo_stalls > stalls0) seen_stall++;
    host_reads = 1'b1;
    wait_frames(5);

    // stop, then restart
    send_cmd(CMD_STOP);
    fr0 = 0;
    while (running && fr0 < 4 * ODR_CYCLES) begin
      @(posedge clk);
      fr0++;
      if (fbuf.size() >= 3 + NFB) decode_frame();
    end
    check(!running, "stop command ends the measurement at a frame boundary");
    if (!running) seen_stop++;
    repeat (3000) begin
      @(posedge clk);
      if (fbuf.size() >= 3 + NFB) decode_frame();
    end
    while (fbuf.size() >= 3 + NFB) decode_frame();
    check(fbuf.size() == 0, "no partial frame left after stop");
    // choose +-16 g, then restart
    check(fscale == 3'd0 && c5_all(8'h00), "default range +-2 g written to all sensors");
    send_cmd(CMD_RANGE + 8'd7);       // reserved code: ignored
    check(fscale == 3'd0, "reserved range code ignored");
    send_cmd(CMD_RANGE + 8'd4);
    check(fscale == 3'd4, "range command accepted while idle");
    fr0 = frames;
    send_cmd(CMD_START);
    have_last = 0;
    wait_frames(3);
    check(frames > fr0, "frames resume after restart");
    check(c5_all(8'h20), "range +-16 g written to every present sensor");
    send_cmd(CMD_RANGE + 8'd1);
    check(fscale == 3'd4, "range command ignored while running");
    if (frames > fr0) seen_restart++;

    if (stat_retries > 0) seen_retry++;
    check(bad_bytes == 0, $sformatf("%0d bad sensor words", bad_bytes));
    check(bad_seq == 0, $sformatf("%0d sample index jumps", bad_seq));
    // a frame needs at least 14 read transactions of 39 SCL periods; on
    // average it follows the sensors' output period; no frame may take
    // longer than the 763 us sampling interval of the published design
    check(per_n > 3 && per_min >= 14 * 39 * 64 - 64 && per_max <= 76_300 &&
          per_sum / per_n >= ODR_CYCLES * 9 / 10 && per_sum / per_n <= ODR_CYCLES * 11 / 10,
          $sformatf("frame period %0d..%0d cycles, mean %0d over %0d frames",
                    per_min, per_max, per_sum / (per_n == 0 ? 1 : per_n), per_n));
    check(seen_reject > 0, "identity check rejected a sensor");
    check(seen_retry > 0, "status re-poll happened");
    check(seen_stall > 0, "FIFO stall happened");
    check(seen_stop > 0 && seen_restart > 0, "stop and restart happened");
    $display("frames=%0d decoded=%0d status_repolls=%0d fifo_stall_cycles=%0d period=%0d..%0d mean %0d cycles",
             frames, nframes, stat_retries, fifo_stalls, per_min, per_max, per_sum / (per_n == 0 ? 1 : per_n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
