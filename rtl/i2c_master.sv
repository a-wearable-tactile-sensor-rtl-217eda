// Single-bus I2C master performing one register transaction at a time.
//
// A read is START, address+W, register, repeated START, address+R, one data
// byte answered with NACK, STOP (39 bit times). A write is START, address+W,
// register, data, STOP (29 bit times). Every byte goes in its own transaction,
// matching the byte-by-byte sampling sequence of the firmware (X_L, X_H, Y_L,
// ... each fetched separately). A missing ACK from the slave ends the
// transaction with STOP and raises `nack`; this is how an absent or removed
// sensor shows up.
//
// Timing: each bit takes four `tick` strobes (from scl_tick_gen). Phase 0
// sets SDA with SCL low, phase 1 raises SCL, phase 2 samples SDA while SCL is
// high, phase 3 lowers SCL. `start` is accepted only while `busy` is low; the
// phase counter restarts then, so masters started on the same cycle stay
// in lockstep. `rdata` and `nack` are valid from the cycle `busy` falls until
// the next start.
//
// Pins are open drain: `scl_low`/`sda_low` pull the line low, `sda_in` is the
// line level. The standard I2C framing is used because the published design
// does not spell it out; clock stretching is not supported.
module i2c_master
  import tactile_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     tick,
  input  logic     start,
  input  i2c_req_t req,
  output logic     busy,
  output logic [7:0] rdata,
  output logic     nack,
  output logic     scl_low,
  output logic     sda_low,
  input  logic     sda_in
);
  typedef enum logic [1:0] {M_IDLE, M_START, M_BIT, M_STOP} mstate_e;
  typedef enum logic [2:0] {S_ADDR_W, S_REG, S_WDATA, S_ADDR_R, S_RDATA} stage_e;

  mstate_e   state;
  stage_e    stage;
  logic [1:0] ph;
  logic [3:0] bitn;
  logic [7:0] shreg;
  i2c_req_t  rq;
  logic      scl_q, sda_q;

  wire tx_byte = (stage != S_RDATA);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= M_IDLE;
      stage <= S_ADDR_W;
      ph    <= '0;
      bitn  <= '0;
      shreg <= '0;
      rq    <= '0;
      scl_q <= 1'b1;
      sda_q <= 1'b1;
      rdata <= '0;
      nack  <= 1'b0;
    end else if (state == M_IDLE) begin
      scl_q <= 1'b1;
      sda_q <= 1'b1;
      if (start) begin
        rq    <= req;
        stage <= S_ADDR_W;
        state <= M_START;
        ph    <= '0;
        nack  <= 1'b0;
      end
    end else if (tick) begin
      ph <= ph + 1'b1;
      unique case (state)
        M_START: begin
          unique case (ph)
            2'd0: sda_q <= 1'b1;
            2'd1: scl_q <= 1'b1;
            2'd2: sda_q <= 1'b0;
            default: begin
              scl_q <= 1'b0;
              state <= M_BIT;
              bitn  <= '0;
              shreg <= {rq.addr, (stage == S_ADDR_R)};
            end
          endcase
        end
        M_BIT: begin
          unique case (ph)
            2'd0: sda_q <= (tx_byte && bitn < 4'd8) ? shreg[7] : 1'b1;
            2'd1: scl_q <= 1'b1;
            2'd2: begin
              if (tx_byte) begin
                if (bitn == 4'd8) nack <= nack | sda_in;
                else              shreg <= {shreg[6:0], 1'b0};
              end else if (bitn < 4'd8) begin
                shreg <= {shreg[6:0], sda_in};
              end
            end
            default: begin
              scl_q <= 1'b0;
              if (bitn != 4'd8) begin
                bitn <= bitn + 1'b1;
              end else begin
                bitn <= '0;
                if (nack) begin
                  state <= M_STOP;
                end else begin
                  unique case (stage)
                    S_ADDR_W: begin stage <= S_REG; shreg <= rq.regad; end
                    S_REG: begin
                      if (rq.rd) begin stage <= S_ADDR_R; state <= M_START; end
                      else       begin stage <= S_WDATA; shreg <= rq.wdata; end
                    end
                    S_WDATA:  state <= M_STOP;
                    S_ADDR_R: stage <= S_RDATA;
                    default: begin  // S_RDATA
                      rdata <= shreg;
                      state <= M_STOP;
                    end
                  endcase
                end
              end
            end
          endcase
        end
        M_STOP: begin
          unique case (ph)
            2'd0: sda_q <= 1'b0;
            2'd1: scl_q <= 1'b1;
            2'd2: sda_q <= 1'b1;
            default: state <= M_IDLE;
          endcase
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  assign busy    = (state != M_IDLE);
  assign scl_low = ~scl_q;
  assign sda_low = ~sda_q;

  // A new transaction may only be requested while the bus is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  // SDA may only change while SCL is low, except in START / STOP symbols.
  a_sda_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (state == M_BIT && scl_q && $past(scl_q)) |-> $stable(sda_q));
endmodule
