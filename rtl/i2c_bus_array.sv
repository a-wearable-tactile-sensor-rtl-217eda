// The 23 parallel I2C buses of the sensor array, run in lockstep.
//
// Each bus links the FPGA to one or two accelerometers. All buses receive the
// same register transaction at the same time; only the slave address differs
// between the SEL-high group (odd numbered sensors) and the SEL-low group
// (even numbered sensors), and `en` selects which buses take part (a bus
// without a SEL-low sensor, or with a sensor that failed its identity check,
// is left idle). One scl_tick_gen clocks every master, so all SCL lines switch
// on the same system-clock edge, as in the published design where the
// independent clock lines are kept synchronized at 1.6 MHz.
//
// Interface: pulse `start` for one cycle while `busy` is low, with `sel`,
// `rd`, `regad` and `wdata` valid. `busy` rises on the next cycle and falls
// when every enabled bus has finished; then `rdata[b]` and `nack[b]` hold the
// result of bus b (zero for buses not enabled). A read takes 39 SCL periods, a
// write 29.
module i2c_bus_array
  import tactile_pkg::*;
#(
  parameter int unsigned NB     = N_BUS,
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned SCL_HZ = 1_600_000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              sel,      // 1: SEL-high address, 0: SEL-low address
  input  logic              rd,
  input  logic [7:0]        regad,
  input  logic [7:0]        wdata,
  input  logic [NB-1:0]     en,
  output logic              busy,
  output logic [NB-1:0][7:0] rdata,
  output logic [NB-1:0]     nack,
  output logic [NB-1:0]     scl_low,
  output logic [NB-1:0]     sda_low,
  input  logic [NB-1:0]     sda_in
);
  logic          tick;
  logic [NB-1:0] m_busy, m_nack, en_q;
  logic [NB-1:0][7:0] m_rdata;
  i2c_req_t      req;

  assign req = '{rd: rd, addr: (sel ? ADDR_SEL1 : ADDR_SEL0), regad: regad, wdata: wdata};

  scl_tick_gen #(.CLK_HZ(CLK_HZ), .SCL_HZ(SCL_HZ)) u_tick (
    .clk, .rst_n, .en(1'b1), .tick
  );

  // remember which buses took part in the last transaction
  always_ff @(posedge clk) begin
    if (!rst_n)     en_q <= '0;
    else if (start) en_q <= en;
  end

  for (genvar b = 0; b < NB; b++) begin : g_bus
    i2c_master u_m (
      .clk, .rst_n, .tick,
      .start  (start & en[b]),
      .req,
      .busy   (m_busy[b]),
      .rdata  (m_rdata[b]),
      .nack   (m_nack[b]),
      .scl_low(scl_low[b]),
      .sda_low(sda_low[b]),
      .sda_in (sda_in[b])
    );
    assign rdata[b] = en_q[b] ? m_rdata[b] : 8'h00;
    assign nack[b]  = en_q[b] & m_nack[b];
  end

  assign busy = |m_busy;

  // Enabled masters run in lockstep: they are all busy or all idle, except
  // those cut short by a missing acknowledge.
  wire [NB-1:0] live = en_q & ~m_nack;
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      (m_busy & live) == '0 || (m_busy & live) == live);
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
