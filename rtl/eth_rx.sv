// eth_rx: raw Ethernet frame receiver on a GMII-style byte interface.
//
// Waits for the start-of-frame delimiter 0xD5, collects the 14-byte header,
// and accepts the frame if the destination is my_mac or the broadcast address
// and the EtherType matches. The payload leaves as a byte stream with
// out_last on its final byte; the four FCS bytes are held back in a delay line
// and not passed on. The CRC-32 is run over header, payload and FCS; a frame
// whose residue is wrong ends with out_err set, so the store-and-forward FIFO
// behind this module can hand the reader a packet already marked bad. Ethernet
// padding is not removed (the payload carries its own length where needed).
// out_* are registered; each payload byte leaves 5 bytes after it arrived,
// the last one in the cycle after rx_dv falls.
module eth_rx
  import daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [47:0] my_mac,
  input  logic [7:0]  rxd,
  input  logic        rx_dv,
  output logic        out_valid,
  output logic [7:0]  out_data,
  output logic        out_last,
  output logic        out_err,
  output logic [15:0] frames_ok,
  output logic [15:0] frames_bad
);
  typedef enum logic [1:0] {R_IDLE, R_HDR, R_PAY, R_DROP} rx_state_t;
  rx_state_t    state;
  logic [3:0]   hcnt;
  logic [111:0] hdr;
  logic [111:0] hdr_nx;
  logic [31:0]  crc, crc_nx;
  logic [7:0]   dl [5];
  logic [2:0]   fill;
  logic         accept;

  crc32_eth u_crc (.crc_in(crc), .d(rxd), .crc_out(crc_nx));

  assign hdr_nx = {hdr[103:0], rxd};
  assign accept = (hdr_nx[111:64] == my_mac || hdr_nx[111:64] == MAC_BCAST) && hdr_nx[15:0] == ETHERTYPE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= R_IDLE;
      hcnt       <= '0;
      hdr        <= '0;
      crc        <= '1;
      fill       <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_last   <= 1'b0;
      out_err    <= 1'b0;
      frames_ok  <= '0;
      frames_bad <= '0;
      for (int i = 0; i < 5; i++) dl[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_err   <= 1'b0;
      case (state)
        R_IDLE: if (rx_dv && rxd == 8'hD5) begin
          state <= R_HDR;
          hcnt  <= '0;
          crc   <= '1;
        end
        R_HDR: begin
          if (!rx_dv) state <= R_IDLE;
          else begin
            hdr  <= hdr_nx;
            crc  <= crc_nx;
            hcnt <= hcnt + 4'd1;
            if (hcnt == 4'd13) begin
              state <= accept ? R_PAY : R_DROP;
              fill  <= '0;
            end
          end
        end
        R_PAY: begin
          if (rx_dv) begin
            crc <= crc_nx;
            for (int i = 4; i > 0; i--) dl[i] <= dl[i-1];
            dl[0] <= rxd;
            if (fill == 3'd5) begin
              out_valid <= 1'b1;
              out_data  <= dl[4];
            end else begin
              fill <= fill + 3'd1;
            end
          end else begin
            state <= R_IDLE;
            if (fill == 3'd5) begin
              // dl[3:0] is the FCS, dl[4] the last payload byte
              out_valid <= 1'b1;
              out_data  <= dl[4];
              out_last  <= 1'b1;
              out_err   <= (crc != 32'hDEBB_20E3);
              if (crc == 32'hDEBB_20E3) frames_ok <= frames_ok + 16'd1;
              else frames_bad <= frames_bad + 16'd1;
            end else begin
              frames_bad <= frames_bad + 16'd1;
            end
          end
        end
        R_DROP: if (!rx_dv) state <= R_IDLE;
        default: state <= R_IDLE;
      endcase
    end
  end
endmodule
