// Bench for acq_ctrl with three buses and a transaction-level stand-in for
// the I2C bus array (a command completes 30 cycles after it starts). Bus 0
// has both sensors, bus 1's SEL-low sensor does not answer, bus 2 has no
// SEL-low sensor wired. The first STATUS poll of each group reports "no new
// data", the second reports data ready. The bench compares the sequence of
// bus commands with the sampling protocol (WHO_AM_I per group, CTRL_REG5
// and CTRL_REG4 writes to the present sensors, then per frame STATUS polling of the
// SEL-high and then the SEL-low group, and six data reads for the SEL-high
// group followed by the SEL-low group), checks every
// group handed to the packer (bytes, zero fill, mask), the frame header
// numbering, the FIFO-room stall and the stop command. The range command
// (+-8 g here) is sent before the start and must show up as the CTRL_REG5
// value; a range command while running must be ignored.
module acq_ctrl_tb;
  import tactile_pkg::*;
  localparam int unsigned NB = 3;
  localparam logic [NB-1:0] WIRED0 = 3'b011;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, bus_start, bus_sel, bus_rd, hdr_valid, grp_valid, running;
  logic [7:0] cmd_data = '0, bus_regad, bus_wdata, hdr_frame;
  logic [NB-1:0] bus_en, present_sel1, present_sel0, grp_mask;
  logic [NB-1:0][7:0] grp_bytes;
  logic [31:0] frames, stat_retries, fifo_stalls;
  logic [2:0]  fscale;
  logic bus_busy = 0, pk_busy = 0, frame_room = 1;
  logic [NB-1:0][7:0] bus_rdata = '0;
  logic [NB-1:0] bus_nack = '0;

  acq_ctrl #(.NB(NB), .SEL0_WIRED(WIRED0)) dut (.clk, .rst_n, .cmd_valid, .cmd_data,
    .bus_start, .bus_sel, .bus_rd, .bus_regad, .bus_wdata, .bus_en, .bus_busy,
    .bus_rdata, .bus_nack, .hdr_valid, .hdr_frame, .grp_valid, .grp_bytes, .grp_mask,
    .pk_busy, .frame_room, .running, .fscale, .present_sel1, .present_sel0, .frames,
    .stat_retries, .fifo_stalls);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- bus stand-in ------------------------------------------------------
  typedef struct packed { logic sel; logic rd; logic [7:0] regad; logic [NB-1:0] en; } cmd_t;
  cmd_t log_q [$];
  int   polls [2] = '{0, 0};
  int unsigned start_while_busy = 0, bad_wdata = 0;

  function automatic bit exists(int b, bit s);
    return s ? 1'b1 : (b == 0);
  endfunction

  // the stand-ins sample the DUT on the falling edge
  always @(negedge clk) begin
    if (bus_start) begin
      cmd_t c;
      if (bus_busy) start_while_busy++;
      c = '{sel: bus_sel, rd: bus_rd, regad: bus_regad, en: bus_en};
      log_q.push_back(c);
      if (!bus_rd && bus_wdata != (bus_regad == REG_CTRL5 ? ctrl5_val(3'd3) : CTRL4_VAL)) bad_wdata++;
      fork
        begin
          @(posedge clk);   // like the bus array: busy from the cycle after start
          bus_busy <= 1'b1;
          repeat (30) @(negedge clk);
          for (int b = 0; b < NB; b++) begin
            if (!c.en[b]) begin
              bus_rdata[b] <= 8'h00; bus_nack[b] <= 1'b0;
            end else if (!exists(b, c.sel)) begin
              bus_rdata[b] <= 8'hFF; bus_nack[b] <= 1'b1;
            end else begin
              bus_nack[b] <= 1'b0;
              if (c.regad == REG_WHO_AM_I) bus_rdata[b] <= WHO_AM_I_VAL;
              else if (c.regad == REG_STATUS) bus_rdata[b] <= (polls[c.sel] > 0) ? 8'h08 : 8'h00;
              else bus_rdata[b] <= 8'(c.sel * 128 + b * 16 + (c.regad - REG_OUT_X_L));
            end
          end
          if (c.regad == REG_STATUS) polls[c.sel]++;
          if (c.regad == REG_OUT_X_L + 8'd5) polls[c.sel] = 0;
          bus_busy <= 1'b0;
        end
      join_none
    end
  end

  // ---- packer stand-in: busy 5 cycles after each request -------------------
  typedef struct packed { logic [NB-1:0][7:0] bytes; logic [NB-1:0] mask; } grp_t;
  grp_t grp_q [$];
  logic [7:0] hdr_q [$];
  int unsigned req_while_busy = 0;
  always @(negedge clk) begin
    if (hdr_valid || grp_valid) begin
      if (pk_busy) req_while_busy++;
      if (hdr_valid) hdr_q.push_back(hdr_frame);
      if (grp_valid) grp_q.push_back('{bytes: grp_bytes, mask: grp_mask});
      fork begin
        pk_busy <= 1'b1;
        repeat (5) @(negedge clk);
        pk_busy <= 1'b0;
      end join_none
    end
  end

  task automatic send_cmd(input logic [7:0] c);
    @(negedge clk);
    cmd_valid = 1; cmd_data = c;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // expected command stream
  cmd_t exp_q [$];
  task automatic exp_frame();
    for (int s = 1; s >= 0; s--) begin
      logic [NB-1:0] pres;
      pres = s ? 3'b111 : 3'b001;
      exp_q.push_back('{sel: s[0], rd: 1, regad: REG_STATUS, en: pres});
      exp_q.push_back('{sel: s[0], rd: 1, regad: REG_STATUS, en: pres});
    end
    for (int s = 1; s >= 0; s--) begin
      logic [NB-1:0] pres;
      pres = s ? 3'b111 : 3'b001;
      for (int r = 0; r < 6; r++)
        exp_q.push_back('{sel: s[0], rd: 1, regad: REG_OUT_X_L + 8'(r), en: pres});
    end
  endtask

  int unsigned nfr, st0, ngrp_bad;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(!running, "idle after reset");
    send_cmd(CMD_RANGE + 8'd3);
    check(fscale == 3'd3, "range command taken while idle");
    send_cmd(CMD_START);
    while (frames < 3) @(negedge clk);
    send_cmd(CMD_RANGE + 8'd1);
    check(fscale == 3'd3, "range command ignored while running");
    // FIFO has no room: no new frame may start
    frame_room = 0;
    nfr = frames;
    st0 = fifo_stalls;
    repeat (3000) @(negedge clk);
    check(frames == nfr, "no frame starts without FIFO room");
    check(fifo_stalls > st0, "stall cycles counted");
    frame_room = 1;
    while (frames < nfr + 2) @(negedge clk);
    send_cmd(CMD_STOP);
    while (running) @(negedge clk);
    repeat (100) @(negedge clk);
    nfr = frames;

    check(present_sel1 == 3'b111 && present_sel0 == 3'b001, "presence from WHO_AM_I");
    // expected command sequence
    exp_q.push_back('{sel: 1, rd: 1, regad: REG_WHO_AM_I, en: 3'b111});
    exp_q.push_back('{sel: 0, rd: 1, regad: REG_WHO_AM_I, en: WIRED0});
    exp_q.push_back('{sel: 1, rd: 0, regad: REG_CTRL5, en: 3'b111});
    exp_q.push_back('{sel: 0, rd: 0, regad: REG_CTRL5, en: 3'b001});
    exp_q.push_back('{sel: 1, rd: 0, regad: REG_CTRL4, en: 3'b111});
    exp_q.push_back('{sel: 0, rd: 0, regad: REG_CTRL4, en: 3'b001});
    for (int f = 0; f < nfr; f++) exp_frame();
    check(log_q.size() == exp_q.size(), $sformatf("%0d bus commands, expected %0d", log_q.size(), exp_q.size()));
    begin
      int unsigned bad = 0;
      for (int i = 0; i < log_q.size() && i < exp_q.size(); i++)
        if (log_q[i] != exp_q[i]) begin
          bad++;
          if (bad < 4) $display("cmd %0d: got %p expected %p", i, log_q[i], exp_q[i]);
        end
      check(bad == 0, "bus command sequence follows the sampling protocol");
    end
    // groups handed to the packer
    check(grp_q.size() == 12 * nfr, $sformatf("%0d groups for %0d frames", grp_q.size(), nfr));
    ngrp_bad = 0;
    for (int i = 0; i < grp_q.size(); i++) begin
      int r; bit s;
      r = (i % 12) % 6;
      s = (i % 12) < 6;
      for (int b = 0; b < NB; b++) begin
        logic [7:0] e;
        e = (s || b == 0) ? 8'(s * 128 + b * 16 + r) : 8'h00;
        if (grp_q[i].bytes[b] != e) ngrp_bad++;
      end
      if (grp_q[i].mask != (s ? 3'b111 : WIRED0)) ngrp_bad++;
    end
    check(ngrp_bad == 0, $sformatf("%0d wrong bytes or masks handed to the packer", ngrp_bad));
    check(hdr_q.size() == nfr, "one header per frame");
    begin
      int unsigned hb = 0;
      for (int i = 1; i < hdr_q.size(); i++) if (hdr_q[i] != 8'(hdr_q[i-1] + 1)) hb++;
      check(hb == 0, "header frame numbers consecutive");
    end
    check(stat_retries == 2 * nfr, $sformatf("%0d status re-polls for %0d frames", stat_retries, nfr));
    check(start_while_busy == 0 && req_while_busy == 0, "handshakes respected");
    check(bad_wdata == 0, "write data: CTRL_REG5 with the chosen range, CTRL_REG4 = 0x9F");
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
