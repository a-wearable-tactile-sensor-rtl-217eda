// Synchronous FIFO used as the transmit buffer between the sensor sampling
// logic and the USB link.
//
// The sampling sequence produces one 255-byte frame per sample period at a
// steady rate, while the USB side drains bytes in bursts whenever the host
// polls. The buffer absorbs that difference. It is a plain circular buffer in
// an array (mapped to block RAM), with a read side that follows valid/ready:
// `rd_valid` is high while the FIFO holds data, and a byte leaves when
// `rd_ready` is also high. Writes while `full` are a protocol error (asserted).
// `count` gives the fill level, from which the sequencer decides whether a
// whole frame still fits. The depth is this design's choice: the published
// design does not describe its buffering.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  output logic                     full,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic [W-1:0]             rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_valid && rd_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(do_wr) - $bits(count)'(do_rd);
    end
  end

  assign full     = (count == ($bits(count))'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
endmodule
