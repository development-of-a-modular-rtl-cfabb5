// lda_control: routes control packets from the Ethernet side to the DIF links.
//
// A control packet, as the ODR sends it to one LDA (chosen by MAC address),
// is: byte 0 the target DIF (0..N_DIF-1, or 0xFF for every DIF of this LDA),
// byte 1 the length n of the command, then n command bytes, then possibly
// Ethernet padding. The n command bytes are written, as one packet, into the
// downstream FIFO of every targeted link at once (out_mask selects them). The
// last command byte is held back until the end of the input packet, because
// only then is it known whether the frame passed its CRC: it is written with
// out_last and out_err = in_err, so a damaged command reaches no DIF as valid.
// Packets with an unknown target or n = 0 are dropped and counted.
// One byte per clock; in_ready is always high (the FIFOs behind truncate and
// flag a packet that does not fit). The packet layout is this design's own.
module lda_control
  import daq_pkg::*;
#(
  parameter int N_DIF = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [7:0]       in_data,
  input  logic             in_last,
  input  logic             in_err,
  output logic             in_ready,
  output logic             out_valid,
  output logic [7:0]       out_data,
  output logic             out_last,
  output logic             out_err,
  output logic [N_DIF-1:0] out_mask,
  output logic [15:0]      pkts_fwd,
  output logic [15:0]      pkts_drop
);
  typedef enum logic [2:0] {C_TGT, C_LEN, C_CMD, C_HOLD, C_SKIP} ctl_state_t;
  ctl_state_t       state;
  logic [7:0]       remain;
  logic [7:0]       held;
  logic [N_DIF-1:0] mask;

  assign in_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_TGT;
      remain    <= '0;
      held      <= '0;
      mask      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
      out_err   <= 1'b0;
      out_mask  <= '0;
      pkts_fwd  <= '0;
      pkts_drop <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_err   <= 1'b0;
      if (in_valid) begin
        case (state)
          C_TGT: begin
            if (in_data == TGT_ALL_DIF) begin
              mask  <= '1;
              state <= C_LEN;
            end else if (int'(in_data) < N_DIF) begin
              mask  <= N_DIF'(1) << in_data;
              state <= C_LEN;
            end else begin
              pkts_drop <= pkts_drop + 16'd1;
              state     <= C_SKIP;
            end
            if (in_last) state <= C_TGT;
          end
          C_LEN: begin
            remain <= in_data;
            if (in_data == 8'd0 || in_last) begin
              pkts_drop <= pkts_drop + 16'd1;
              state     <= in_last ? C_TGT : C_SKIP;
            end else begin
              state <= C_CMD;
            end
          end
          C_CMD: begin
            if (remain == 8'd1) begin
              held  <= in_data;
              state <= C_HOLD;
            end else begin
              out_valid <= 1'b1;
              out_data  <= in_data;
              out_mask  <= mask;
              remain    <= remain - 8'd1;
            end
            if (in_last) begin
              // end of packet: complete if this was the n-th byte, else short
              out_valid <= 1'b1;
              out_data  <= in_data;
              out_mask  <= mask;
              out_last  <= 1'b1;
              out_err   <= in_err || remain != 8'd1;
              if (in_err || remain != 8'd1) pkts_drop <= pkts_drop + 16'd1;
              else                          pkts_fwd  <= pkts_fwd + 16'd1;
              state     <= C_TGT;
            end
          end
          C_HOLD: if (in_last) begin
            out_valid <= 1'b1;
            out_data  <= held;
            out_mask  <= mask;
            out_last  <= 1'b1;
            out_err   <= in_err;
            if (in_err) pkts_drop <= pkts_drop + 16'd1;
            else        pkts_fwd  <= pkts_fwd + 16'd1;
            state <= C_TGT;
          end
          C_SKIP: if (in_last) state <= C_TGT;
          default: state <= C_TGT;
        endcase
      end
    end
  end
endmodule
