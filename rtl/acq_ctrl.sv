// Acquisition sequencer: runs the sampling protocol of the sensor array over
// the 23 lockstep I2C buses.
//
// On a start command from the host it
//   1. reads WHO_AM_I of the SEL-high group, then of the SEL-low group, and
//      marks as present every sensor that acknowledges and returns 0x3F (a
//      cut-off branch or a missing sensor is simply skipped from then on);
//   2. writes CTRL_REG5 of every present sensor with the measurement range
//      last chosen by the host (+-2 g after reset), then CTRL_REG4 (1600 Hz
//      output rate, block data update, X/Y/Z on) so the sensors start
//      converting;
//   3. repeats one sample frame until a stop command arrives:
//        wait until the transmit FIFO can hold a whole frame, emit the header;
//        poll STATUS of the SEL-high group until every present sensor reports
//          new X/Y/Z data, then the same for the SEL-low group, so that all
//          42 sensors have a new sample before any is read;
//        read X_L, X_H, Y_L, Y_H, Z_L, Z_H of the SEL-high group, then of the
//          SEL-low group.
// After each register read the byte of every bus in the group is handed to
// the packer (zero for a sensor that is not present), so a frame always has
// the same length.
//
// Following the published design: identity check before each measurement,
// status-register check of all sensors before each sample to keep the buses
// in step, SEL-high (odd numbered) sensors before SEL-low ones, and X, Y, Z
// each low byte first, a selectable range. This design's own choices: the
// command bytes (0x01 start, 0x00 stop, 0x10..0x14 range while idle, other
// bytes ignored), the CTRL_REG5/CTRL_REG4 writes, the polling without delay,
// zero-filling absent sensors, and stopping only at a frame boundary.
//
// Counters: `frames` (frames started), `stat_retries` (status polls that found
// some sensor without new data) and `fifo_stalls` (cycles spent waiting for
// FIFO room before a frame). `fscale` is the range code in use (it changes
// only while idle). The frame rate is set by the slower of the I2C traffic
// (14 transactions per frame) and the sensors' own output rate.
module acq_ctrl
  import tactile_pkg::*;
#(
  parameter int unsigned    NB         = N_BUS,
  parameter logic [NB-1:0]  SEL0_WIRED = SEL0_WIRED_DEFAULT
) (
  input  logic               clk,
  input  logic               rst_n,
  // host command
  input  logic               cmd_valid,
  input  logic [7:0]         cmd_data,
  // I2C bus array
  output logic               bus_start,
  output logic               bus_sel,
  output logic               bus_rd,
  output logic [7:0]         bus_regad,
  output logic [7:0]         bus_wdata,
  output logic [NB-1:0]      bus_en,
  input  logic               bus_busy,
  input  logic [NB-1:0][7:0] bus_rdata,
  input  logic [NB-1:0]      bus_nack,
  // packer
  output logic               hdr_valid,
  output logic [7:0]         hdr_frame,
  output logic               grp_valid,
  output logic [NB-1:0][7:0] grp_bytes,
  output logic [NB-1:0]      grp_mask,
  input  logic               pk_busy,
  input  logic               frame_room,   // FIFO can take a whole frame
  // status
  output logic               running,
  output logic [2:0]         fscale,
  output logic [NB-1:0]      present_sel1,
  output logic [NB-1:0]      present_sel0,
  output logic [31:0]        frames,
  output logic [31:0]        stat_retries,
  output logic [31:0]        fifo_stalls
);
  typedef enum logic [2:0] {A_IDLE, A_ISSUE, A_WAIT, A_FRAME, A_PUSH} astate_e;
  typedef enum logic [1:0] {OP_WHO, OP_CFG, OP_STAT, OP_DATA} op_e;

  astate_e    state;
  op_e        op;
  logic       grp;        // 1: SEL-high group, 0: SEL-low group
  logic [2:0] ridx;       // data register index 0..5
  logic       cidx;       // configuration step: 0 CTRL_REG5, 1 CTRL_REG4
  logic       stop_req, launched;

  wire [NB-1:0] wired    = grp ? {NB{1'b1}} : SEL0_WIRED;
  wire [NB-1:0] present  = grp ? present_sel1 : present_sel0;

  // which buses have a sensor that passed the identity check
  logic [NB-1:0] who_ok;
  always_comb begin
    for (int b = 0; b < NB; b++)
      who_ok[b] = wired[b] && !bus_nack[b] && bus_rdata[b] == WHO_AM_I_VAL;
  end

  // every present sensor reports new data
  logic all_ready;
  always_comb begin
    all_ready = 1'b1;
    for (int b = 0; b < NB; b++)
      if (present[b] && (bus_nack[b] || !bus_rdata[b][STATUS_ZYXDA_BIT])) all_ready = 1'b0;
  end

  // transaction for the current step
  always_comb begin
    bus_sel   = grp;
    bus_rd    = (op != OP_CFG);
    bus_wdata = cidx ? CTRL4_VAL : ctrl5_val(fscale);
    bus_en    = (op == OP_WHO) ? wired : present;
    unique case (op)
      OP_WHO:  bus_regad = REG_WHO_AM_I;
      OP_CFG:  bus_regad = cidx ? REG_CTRL4 : REG_CTRL5;
      OP_STAT: bus_regad = REG_STATUS;
      default: bus_regad = REG_OUT_X_L + {5'b0, ridx};
    endcase
  end

  assign hdr_frame = frames[7:0];
  assign running   = (state != A_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= A_IDLE;
      op           <= OP_WHO;
      grp          <= 1'b1;
      ridx         <= '0;
      cidx         <= 1'b0;
      fscale       <= '0;
      stop_req     <= 1'b0;
      launched     <= 1'b0;
      bus_start    <= 1'b0;
      hdr_valid    <= 1'b0;
      grp_valid    <= 1'b0;
      grp_bytes    <= '0;
      grp_mask     <= '0;
      present_sel1 <= '0;
      present_sel0 <= '0;
      frames       <= '0;
      stat_retries <= '0;
      fifo_stalls  <= '0;
    end else begin
      bus_start <= 1'b0;
      hdr_valid <= 1'b0;
      grp_valid <= 1'b0;
      if (cmd_valid && cmd_data == CMD_STOP && state != A_IDLE) stop_req <= 1'b1;

      unique case (state)
        A_IDLE: begin
          stop_req <= 1'b0;
          if (cmd_valid && cmd_data[7:3] == CMD_RANGE[7:3] && cmd_data[2:0] <= FSCALE_MAX)
            fscale <= cmd_data[2:0];
          if (cmd_valid && cmd_data == CMD_START) begin
            op           <= OP_WHO;
            grp          <= 1'b1;
            cidx         <= 1'b0;
            present_sel1 <= '0;
            present_sel0 <= '0;
            state        <= A_ISSUE;
          end
        end

        A_ISSUE: begin
          // a step with no sensor to talk to completes at once
          if (op != OP_WHO && present == '0) begin
            launched <= 1'b0;
            state    <= A_WAIT;
          end else begin
            bus_start <= 1'b1;
            launched  <= 1'b1;
            state     <= A_WAIT;
          end
        end

        A_WAIT: begin
          if (launched && (bus_start || bus_busy)) begin
            // transaction still running
          end else begin
            unique case (op)
              OP_WHO: begin
                if (grp) begin present_sel1 <= who_ok; grp <= 1'b0; end
                else     begin present_sel0 <= who_ok; grp <= 1'b1; op <= OP_CFG; end
                state <= A_ISSUE;
              end
              OP_CFG: begin
                grp <= ~grp;
                if (grp) state <= A_ISSUE;
                else if (!cidx) begin cidx <= 1'b1; state <= A_ISSUE; end
                else state <= A_FRAME;
              end
              OP_STAT: begin
                if (launched && !all_ready) stat_retries <= stat_retries + 1'b1;
                else if (grp) grp <= 1'b0;                     // now the SEL-low group
                else begin grp <= 1'b1; op <= OP_DATA; ridx <= '0; end
                state <= A_ISSUE;
              end
              default: begin  // OP_DATA: hand the bytes to the packer
                grp_mask <= wired;
                for (int b = 0; b < NB; b++)
                  grp_bytes[b] <= (present[b] && launched && !bus_nack[b]) ? bus_rdata[b] : 8'h00;
                state <= A_PUSH;
              end
            endcase
          end
        end

        A_PUSH: begin
          if (!pk_busy && !grp_valid) begin
            grp_valid <= 1'b1;
            if (ridx != 3'd5) begin
              ridx  <= ridx + 1'b1;
              state <= A_ISSUE;
            end else if (grp) begin
              grp   <= 1'b0;
              ridx  <= '0;
              state <= A_ISSUE;
            end else begin
              grp   <= 1'b1;
              state <= A_FRAME;
            end
          end
        end

        default: begin  // A_FRAME: frame boundary
          if (stop_req) begin
            state <= A_IDLE;
          end else if (!pk_busy && !grp_valid && frame_room) begin
            hdr_valid <= 1'b1;
            frames    <= frames + 1'b1;
            op        <= OP_STAT;
            grp       <= 1'b1;
            state     <= A_ISSUE;
          end else if (!frame_room) begin
            fifo_stalls <= fifo_stalls + 1'b1;
          end
        end
      endcase
    end
  end

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) bus_start |-> !bus_busy);
endmodule
