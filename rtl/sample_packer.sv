// Frame packer: turns the bytes that arrive in parallel from the I2C buses
// into one byte stream for the USB link.
//
// Each register read returns one byte on every bus at once. The packer takes
// such a group (`grp_valid`, `grp_bytes`, `grp_mask`) and writes the bytes of
// the buses whose mask bit is set into the FIFO, bus 0 first, one per cycle.
// At the start of every sample the sequencer asks for a header (`hdr_valid`):
// SYNC0, SYNC1 and an 8-bit frame counter. A frame is therefore
//   header, then for the SEL-high group X_L of buses 0..22, X_H of buses
//   0..22, ... Z_H, then the same for the SEL-low group over the 19 buses that
//   carry a second sensor,
// 3 + 6*(23+19) = 255 bytes. The header and the byte order are this design's
// choice; the published design only says that the data are streamed to the PC
// and stored in a binary file.
//
// Timing: a request is accepted only while `busy` is low; the bytes follow on
// consecutive cycles (one cycle per bus, masked buses included) unless the
// FIFO is full, which stalls the packer.
module sample_packer
  import tactile_pkg::*;
#(
  parameter int unsigned NB = N_BUS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               hdr_valid,
  input  logic [7:0]         hdr_frame,
  input  logic               grp_valid,
  input  logic [NB-1:0][7:0] grp_bytes,
  input  logic [NB-1:0]      grp_mask,
  output logic               busy,
  output logic               out_valid,
  output logic [7:0]         out_data,
  input  logic               out_full
);
  localparam int unsigned IW = $clog2(NB + 1);

  typedef enum logic [1:0] {P_IDLE, P_HDR, P_GRP} pstate_e;

  pstate_e            state;
  logic [IW-1:0]      idx;
  logic [NB-1:0][7:0] bytes_q;
  logic [NB-1:0]      mask_q;
  logic [7:0]         frame_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= P_IDLE;
      idx     <= '0;
      bytes_q <= '0;
      mask_q  <= '0;
      frame_q <= '0;
    end else begin
      unique case (state)
        P_IDLE: begin
          idx <= '0;
          if (hdr_valid) begin
            frame_q <= hdr_frame;
            state   <= P_HDR;
          end else if (grp_valid) begin
            bytes_q <= grp_bytes;
            mask_q  <= grp_mask;
            state   <= P_GRP;
          end
        end
        P_HDR: if (!out_full) begin
          if (idx == IW'(HEADER_BYTES - 1)) state <= P_IDLE;
          idx <= idx + 1'b1;
        end
        default: if (!out_full || !mask_q[idx]) begin
          if (idx == IW'(NB - 1)) state <= P_IDLE;
          idx <= idx + 1'b1;
        end
      endcase
    end
  end

  always_comb begin
    out_valid = 1'b0;
    out_data  = 8'h00;
    unique case (state)
      P_HDR: begin
        out_valid = !out_full;
        out_data  = (idx == '0) ? SYNC0 : (idx == IW'(1)) ? SYNC1 : frame_q;
      end
      P_GRP: begin
        out_valid = !out_full && mask_q[idx];
        out_data  = bytes_q[idx];
      end
      default: ;
    endcase
  end

  assign busy = (state != P_IDLE);

  a_req_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (hdr_valid || grp_valid) |-> !busy);
  a_one_req: assert property (@(posedge clk) disable iff (!rst_n) !(hdr_valid && grp_valid));
endmodule
