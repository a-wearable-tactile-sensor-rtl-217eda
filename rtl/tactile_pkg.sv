// Shared types and constants of the wearable tactile array DAQ firmware.
//
// The array has 42 three-axis accelerometers on 23 I2C buses. Each bus carries
// one accelerometer with its SEL pin tied high (I2C address 0011101b, the odd
// numbered sensors) and, on 19 of the 23 buses, a second one with SEL tied low
// (address 0011110b, the even numbered sensors). Bus count, addresses and the
// 1.6 MHz SCL ceiling are the published design's, and so is the fact that
// the range is selectable from +-2 to +-16 g; the register numbers and values
// are those of the accelerometer part (LIS3DSH), and the frame header and
// command codes are this design's own choice.
package tactile_pkg;

  // ---- array geometry ------------------------------------------------------
  localparam int unsigned N_BUS = 23;           // I2C buses
  localparam int unsigned N_SENSORS = 42;       // accelerometers
  localparam int unsigned BYTES_PER_SAMPLE = 6; // X_L X_H Y_L Y_H Z_L Z_H

  // Buses that carry a second (SEL low) accelerometer. Buses are numbered
  // 0..22: 0-4 serve accelerometers 1-9, 5-9 serve 11-19, 10-14 serve 21-29,
  // 15-19 serve 31-39 and 20-22 serve 41-46. The fifth bus of each of the
  // four long branches has one sensor only (9, 19, 29, 39).
  localparam logic [N_BUS-1:0] SEL0_WIRED_DEFAULT = 23'b111_01111_01111_01111_01111;

  // ---- I2C addresses (7 bit) -------------------------------------------------
  localparam logic [6:0] ADDR_SEL1 = 7'b0011101;
  localparam logic [6:0] ADDR_SEL0 = 7'b0011110;

  // ---- accelerometer registers (vendor register map) ---------------------------
  localparam logic [7:0] REG_WHO_AM_I = 8'h0F;
  localparam logic [7:0] REG_CTRL4    = 8'h20;
  localparam logic [7:0] REG_CTRL5    = 8'h24;
  localparam logic [7:0] REG_STATUS   = 8'h27;
  localparam logic [7:0] REG_OUT_X_L  = 8'h28;
  localparam logic [7:0] WHO_AM_I_VAL = 8'h3F;
  // CTRL_REG4: output data rate 1600 Hz (ODR=1001), block data update on
  // (the two bytes of a word come from the same sample), X, Y, Z enabled.
  localparam logic [7:0] CTRL4_VAL    = 8'h9F;
  localparam int unsigned STATUS_ZYXDA_BIT = 3;
  // CTRL_REG5: anti-aliasing bandwidth 800 Hz (BW=00), full scale FSCALE in
  // bits 5:3 (0: +-2 g, 1: +-4 g, 2: +-6 g, 3: +-8 g, 4: +-16 g).
  localparam logic [2:0] FSCALE_MAX = 3'd4;
  function automatic logic [7:0] ctrl5_val(logic [2:0] fscale);
    return {2'b00, fscale, 3'b000};
  endfunction

  // ---- output stream -----------------------------------------------------------
  localparam logic [7:0] SYNC0 = 8'hA5;
  localparam logic [7:0] SYNC1 = 8'h5A;
  localparam int unsigned HEADER_BYTES = 3;     // SYNC0, SYNC1, frame counter

  // ---- host commands (one byte each) ------------------------------------------
  localparam logic [7:0] CMD_STOP  = 8'h00;
  localparam logic [7:0] CMD_START = 8'h01;
  // 0x10 + FSCALE code selects the measurement range for the next start
  localparam logic [7:0] CMD_RANGE = 8'h10;

  // One register transaction on an I2C bus.
  typedef struct packed {
    logic       rd;     // 1: single-register read, 0: single-register write
    logic [6:0] addr;   // 7-bit slave address
    logic [7:0] regad;  // register address
    logic [7:0] wdata;  // data for a write
  } i2c_req_t;

  // Bytes in one output frame for a given SEL-low population.
  function automatic int unsigned frame_bytes(logic [N_BUS-1:0] sel0_wired);
    return HEADER_BYTES + BYTES_PER_SAMPLE * (N_BUS + $countones(sel0_wired));
  endfunction

endpackage
