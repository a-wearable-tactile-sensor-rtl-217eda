// Behavioural model of one three-axis accelerometer as seen on its I2C bus
// (kind: behavioural model, testbench only).
//
// It answers at I2C address ADDR (0011101b with SEL high, 0011110b with SEL
// low) and implements the registers the acquisition firmware uses: WHO_AM_I
// (0x0F, reads 0x3F), CTRL_REG4 (0x20, writable), CTRL_REG5 (0x24, writable
// and readable as `ctrl5`; the range only changes the scale of the real
// part's data, so the model does not use it), STATUS (0x27, bit 3 = new
// X/Y/Z data) and OUT_X_L..OUT_Z_H (0x28..0x2D). Once CTRL_REG4 has a non-zero
// data-rate field it takes a new sample every ODR_CYCLES clock cycles, the
// first one PHASE cycles after the write. With the block-data-update bit
// (CTRL_REG4 bit 3) set, a new sample is held back between the read of an
// axis' low byte and its high byte, so the two bytes of a word always match.
// Sample n of sensor ID is
//   X = {ID, n[7:0]},  Y = X ^ 16'h5555,  Z = X + 16'h1234
// so a checker can recognise both the sensor and the sample. STATUS bit 3 is
// set by each new sample and cleared when OUT_Z_H is read. With `alive` low
// the device does not acknowledge, as if its branch had been cut off.
//
// The model runs on the system clock and detects SCL edges by sampling, so
// SCL must be much slower than `clk` (16 cycles per quarter bit by default).
// `sda_low` pulls the shared SDA line low; the bus is wired-AND in the bench.
module lis3dsh_model #(
  parameter logic [6:0]  ADDR       = 7'b0011101,
  parameter logic [7:0]  ID         = 8'd1,
  parameter int unsigned ODR_CYCLES = 62_500,
  parameter int unsigned PHASE      = 1000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic alive,
  input  logic scl,
  input  logic sda,
  output logic sda_low,
  output logic [15:0] nsamp
);
  typedef enum logic [1:0] {SL_IDLE, SL_RX, SL_TX, SL_WAIT} sstate_e;

  sstate_e     state;
  logic        scl_q, sda_q;
  logic [3:0]  bitc;
  logic [7:0]  shreg, txb, ptr, ctrl4, ctrl5;
  logic        rw, mack, zyxda, lock, pend;
  logic [7:0]  latest;
  logic [1:0]  byte_idx;
  logic [15:0] ox, oy, oz;
  int unsigned odr_cnt;

  function automatic logic [7:0] reg_rd(logic [7:0] a);
    case (a)
      8'h0F:   return 8'h3F;
      8'h20:   return ctrl4;
      8'h24:   return ctrl5;
      8'h27:   return {4'b0, zyxda, 3'b0};
      8'h28:   return ox[7:0];
      8'h29:   return ox[15:8];
      8'h2A:   return oy[7:0];
      8'h2B:   return oy[15:8];
      8'h2C:   return oz[7:0];
      8'h2D:   return oz[15:8];
      default: return 8'h00;
    endcase
  endfunction

  wire [7:0] rd_now  = reg_rd(ptr);
  wire [7:0] rd_next = reg_rd(ptr + 8'd1);

  wire rise  = scl && !scl_q;
  wire fall  = !scl && scl_q;
  wire start = scl && scl_q && sda_q && !sda;
  wire stop  = scl && scl_q && !sda_q && sda;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= SL_IDLE; scl_q <= 1'b1; sda_q <= 1'b1; bitc <= '0;
      shreg <= '0; txb <= '0; ptr <= '0; ctrl4 <= '0; ctrl5 <= '0; byte_idx <= '0;
      rw <= 1'b0; mack <= 1'b0; lock <= 1'b0; pend <= 1'b0; latest <= '0; zyxda <= 1'b0; ox <= '0; oy <= '0; oz <= '0;
      odr_cnt <= PHASE; nsamp <= '0; sda_low <= 1'b0;
    end else begin
      scl_q <= scl;
      sda_q <= sda;

      // sample generation
      if (ctrl4[7:4] != 4'd0) begin
        if (odr_cnt == 0) begin
          nsamp <= nsamp + 1'b1;
          zyxda <= 1'b1;
          odr_cnt <= ODR_CYCLES - 1;
          latest <= nsamp[7:0];
          pend  <= 1'b1;
        end else begin
          odr_cnt <= odr_cnt - 1;
        end
      end

      // block data update (CTRL_REG4 bit 3): output registers are not
      // refreshed between the read of a low byte and of its high byte
      if (pend && !(ctrl4[3] && lock)) begin
        ox   <= {ID, latest};
        oy   <= {ID, latest} ^ 16'h5555;
        oz   <= {ID, latest} + 16'h1234;
        pend <= 1'b0;
      end

      if (start) begin
        state <= SL_RX; bitc <= '0; byte_idx <= '0; sda_low <= 1'b0;
      end else if (stop) begin
        state <= SL_IDLE; sda_low <= 1'b0;
      end else if (rise) begin
        if (state == SL_RX && bitc < 4'd8) shreg <= {shreg[6:0], sda};
        if (state == SL_TX && bitc == 4'd8) mack <= !sda;  // master ACK: continue
        if (state == SL_RX || state == SL_TX) bitc <= bitc + 1'b1;
      end else if (fall) begin
        if (state == SL_RX) begin
          if (bitc == 4'd8) begin
            if (byte_idx == 2'd0) begin
              if (alive && shreg[7:1] == ADDR) begin
                sda_low <= 1'b1;
                rw      <= shreg[0];
              end else begin
                state <= SL_WAIT;
              end
            end else if (byte_idx == 2'd1) begin
              sda_low <= 1'b1;
              ptr     <= shreg;
            end else begin
              sda_low <= 1'b1;
              if (ptr == 8'h20) ctrl4 <= shreg;
              if (ptr == 8'h24) ctrl5 <= shreg;
              ptr <= ptr + 1'b1;
            end
          end else if (bitc == 4'd9) begin
            sda_low <= 1'b0;
            bitc    <= '0;
            if (byte_idx != 2'd3) byte_idx <= byte_idx + 1'b1;
            if (byte_idx == 2'd0 && rw) begin
              state   <= SL_TX;
              txb     <= rd_now;
              sda_low <= !rd_now[7];
              if (ptr == 8'h2D) zyxda <= 1'b0;
              if (ptr inside {8'h28, 8'h2A, 8'h2C}) lock <= 1'b1;
              if (ptr inside {8'h29, 8'h2B, 8'h2D}) lock <= 1'b0;
            end
          end
        end else if (state == SL_TX) begin
          if (bitc < 4'd8) begin
            sda_low <= !txb[3'(7 - bitc)];
          end else if (bitc == 4'd8) begin
            sda_low <= 1'b0;
          end else begin
            bitc <= '0;
            if (mack) begin // master acknowledged: next register
              ptr     <= ptr + 1'b1;
              txb     <= rd_next;
              sda_low <= !rd_next[7];
              if (ptr + 1'b1 == 8'h2D) zyxda <= 1'b0;
            end else begin
              state <= SL_WAIT;
            end
          end
        end
      end
    end
  end
endmodule
