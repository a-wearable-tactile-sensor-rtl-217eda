// Bench for sample_packer: sends headers and groups of bus bytes with random
// masks while the FIFO side reports `full` at random, and compares the byte
// stream with a reference queue built from the same inputs (header SYNC0,
// SYNC1, frame number; then the masked bytes in bus order). Also checks that
// an unstalled 23-byte group takes 23 cycles.
module sample_packer_tb;
  import tactile_pkg::*;
  localparam int unsigned NB = 23;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic hdr_valid = 0, grp_valid = 0, busy, out_valid, out_full = 0;
  logic [7:0] hdr_frame = 0, out_data;
  logic [NB-1:0][7:0] grp_bytes = '0;
  logic [NB-1:0] grp_mask = '0;
  logic stall_en = 0;

  sample_packer #(.NB(NB)) dut (.clk, .rst_n, .hdr_valid, .hdr_frame, .grp_valid,
    .grp_bytes, .grp_mask, .busy, .out_valid, .out_data, .out_full);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] expq [$];
  int unsigned got = 0, mism = 0;
  // FIFO side on the falling edge: set `full`, then take the byte the packer
  // offers; it is written on the next rising edge.
  always @(negedge clk) begin
    out_full = stall_en && ($urandom_range(2) == 0);
    #1;
    if (out_valid) begin
      if (out_full) mism++;
      if (expq.size() == 0 || expq.pop_front() != out_data) mism++;
      got++;
    end
  end

  task automatic send_hdr(input logic [7:0] f);
    while (busy) @(negedge clk);
    hdr_valid = 1; hdr_frame = f;
    expq.push_back(SYNC0); expq.push_back(SYNC1); expq.push_back(f);
    @(negedge clk);
    hdr_valid = 0;
  endtask

  task automatic send_grp(input logic [NB-1:0] m);
    while (busy) @(negedge clk);
    grp_valid = 1; grp_mask = m;
    for (int b = 0; b < NB; b++) begin
      grp_bytes[b] = 8'($urandom);
      if (m[b]) expq.push_back(grp_bytes[b]);
    end
    @(negedge clk);
    grp_valid = 0;
  endtask

  int unsigned t0, t1;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // timing of one unstalled group
    send_grp('1);
    t0 = 0;
    while (busy) begin @(negedge clk); t0++; end
    check(t0 == NB, $sformatf("23-byte group takes %0d cycles", t0));
    // frames with the array's masks, then random masks, with stalls
    stall_en = 1;
    for (int f = 0; f < 20; f++) begin
      send_hdr(8'(f));
      for (int r = 0; r < 6; r++) send_grp('1);
      for (int r = 0; r < 6; r++) send_grp(SEL0_WIRED_DEFAULT);
      send_grp(NB'($urandom));
    end
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    check(mism == 0, $sformatf("%0d stream mismatches", mism));
    check(expq.size() == 0, "every expected byte was sent");
    check(got > 20 * 255, "bytes were produced");
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
