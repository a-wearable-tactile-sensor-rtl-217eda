// Data-acquisition firmware for a wearable array of 42 three-axis
// accelerometers (126 channels) spread over the back of the hand.
//
// The sensors hang on 23 I2C buses, two per bus where possible (one with its
// SEL pin high, one with it low, so they answer at different addresses). The
// host starts and stops a measurement with one-byte commands over the USB
// link, and can choose the measurement range (+-2 to +-16 g) between
// measurements. The sequencer (acq_ctrl) first checks each sensor's identity
// and configures it, then loops over sample frames: it polls the status registers
// until every sensor has a new sample and reads X, Y and Z, low byte first,
// from all SEL-high sensors at once over the 23 buses, then from the SEL-low
// sensors. The packer turns each set of 23 parallel bytes into a stream with a
// 3-byte header per frame, and a FIFO buffers that stream for the USB link.
//
//   cmd_valid/cmd_data -> acq_ctrl -> i2c_bus_array (23 x i2c_master) -> pins
//                            |
//                            +-> sample_packer -> sync_fifo -> tx_* (to USB)
//
// Interface: open-drain I2C pins per bus (`scl_low`, `sda_low` pull the line
// low, `sda_in` reads it; pads and pull-ups are outside). The USB bridge chip
// is outside too: it delivers command bytes on cmd_valid/cmd_data and takes
// the byte stream on tx_valid/tx_ready/tx_data. With the default 100 MHz
// clock SCL runs at 1.5625 MHz (the published ceiling is 1.6 MHz); one
// frame carries 255 bytes. Bus count, addresses, protocol order and the SCL
// ceiling follow the published design; command codes, frame format, FIFO
// depth and clock frequency are this design's choices.
module tactile_daq_top
  import tactile_pkg::*;
#(
  parameter int unsigned   CLK_HZ     = 100_000_000,
  parameter int unsigned   SCL_HZ     = 1_600_000,
  parameter int unsigned   FIFO_DEPTH = 1024,
  parameter logic [N_BUS-1:0] SEL0_WIRED = SEL0_WIRED_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host commands from the USB bridge
  input  logic                 cmd_valid,
  input  logic [7:0]           cmd_data,
  // sample stream to the USB bridge
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output logic [7:0]           tx_data,
  // I2C buses (open drain)
  output logic [N_BUS-1:0]     scl_low,
  output logic [N_BUS-1:0]     sda_low,
  input  logic [N_BUS-1:0]     sda_in,
  // status
  output logic                 running,
  output logic [2:0]           fscale,
  output logic [N_BUS-1:0]     present_sel1,
  output logic [N_BUS-1:0]     present_sel0,
  output logic [31:0]          frames,
  output logic [31:0]          stat_retries,
  output logic [31:0]          fifo_stalls
);
  localparam int unsigned FRAME_BYTES = frame_bytes(SEL0_WIRED);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic                  bus_start, bus_sel, bus_rd, bus_busy;
  logic [7:0]            bus_regad, bus_wdata;
  logic [N_BUS-1:0]      bus_en, bus_nack;
  logic [N_BUS-1:0][7:0] bus_rdata;

  logic                  hdr_valid, grp_valid, pk_busy, pk_valid, fifo_full;
  logic [7:0]            hdr_frame, pk_data;
  logic [N_BUS-1:0][7:0] grp_bytes;
  logic [N_BUS-1:0]      grp_mask;
  logic [CW-1:0]         fifo_count;
  logic                  frame_room;

  assign frame_room = (FIFO_DEPTH - 32'(fifo_count)) >= FRAME_BYTES;

  acq_ctrl #(.NB(N_BUS), .SEL0_WIRED(SEL0_WIRED)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_data,
    .bus_start, .bus_sel, .bus_rd, .bus_regad, .bus_wdata, .bus_en,
    .bus_busy, .bus_rdata, .bus_nack,
    .hdr_valid, .hdr_frame, .grp_valid, .grp_bytes, .grp_mask,
    .pk_busy, .frame_room,
    .running, .fscale, .present_sel1, .present_sel0, .frames, .stat_retries, .fifo_stalls
  );

  i2c_bus_array #(.NB(N_BUS), .CLK_HZ(CLK_HZ), .SCL_HZ(SCL_HZ)) u_buses (
    .clk, .rst_n, .start(bus_start), .sel(bus_sel), .rd(bus_rd),
    .regad(bus_regad), .wdata(bus_wdata), .en(bus_en),
    .busy(bus_busy), .rdata(bus_rdata), .nack(bus_nack),
    .scl_low, .sda_low, .sda_in
  );

  sample_packer #(.NB(N_BUS)) u_pack (
    .clk, .rst_n, .hdr_valid, .hdr_frame, .grp_valid, .grp_bytes, .grp_mask,
    .busy(pk_busy), .out_valid(pk_valid), .out_data(pk_data), .out_full(fifo_full)
  );

  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(pk_valid), .wr_data(pk_data), .full(fifo_full),
    .rd_valid(tx_valid), .rd_ready(tx_ready), .rd_data(tx_data), .count(fifo_count)
  );
endmodule
