// eth_tx: raw Ethernet frame transmitter on a GMII-style byte interface.
//
// The LDA sends its data to the ODR, and the ODR its control packets to the
// LDAs, as plain Ethernet frames with no IP layer, so a standard network card
// can stand in for the ODR. For each payload packet taken from the input
// stream this module sends 7 preamble bytes, the start delimiter, destination
// and source MAC (most significant byte first), the EtherType, the payload
// padded with zeros to 46 bytes, and the CRC-32 frame check sequence, then
// keeps tx_en low for a 12-byte inter-frame gap. One byte per clock (125 MHz
// for 1 Gbit/s). The payload must arrive without gaps (it comes from a
// store-and-forward FIFO) and must not exceed 1500 bytes; longer input is
// cut into a frame of 1500 bytes and the rest is sent as a further frame.
// dst_mac and src_mac are sampled when a frame starts.
module eth_tx
  import daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [47:0] dst_mac,
  input  logic [47:0] src_mac,
  input  logic        in_valid,
  input  logic [7:0]  in_data,
  input  logic        in_last,
  output logic        in_ready,
  output logic [7:0]  txd,
  output logic        tx_en
);
  typedef enum logic [2:0] {E_IDLE, E_PRE, E_HDR, E_PAY, E_PAD, E_FCS, E_IFG} eth_state_t;
  eth_state_t   state;
  logic [10:0]  cnt;
  logic [111:0] hdr;
  logic [31:0]  crc, crc_nx;
  logic [7:0]   byte_nx;
  logic         crc_en;

  crc32_eth u_crc (.crc_in(crc), .d(byte_nx), .crc_out(crc_nx));

  always_comb begin
    in_ready = 1'b0;
    byte_nx  = 8'h00;
    crc_en   = 1'b0;
    case (state)
      E_PRE: byte_nx = (cnt == 11'd7) ? 8'hD5 : 8'h55;
      E_HDR: begin byte_nx = hdr[111 -: 8]; crc_en = 1'b1; end
      E_PAY: begin
        in_ready = 1'b1;
        byte_nx  = in_valid ? in_data : 8'h00;
        crc_en   = 1'b1;
      end
      E_PAD: crc_en = 1'b1;
      E_FCS: byte_nx = ~crc[8*cnt[1:0] +: 8];
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE;
      cnt   <= '0;
      hdr   <= '0;
      crc   <= '1;
      txd   <= '0;
      tx_en <= 1'b0;
    end else begin
      txd   <= byte_nx;
      tx_en <= 1'b0;
      if (crc_en) crc <= crc_nx;
      case (state)
        E_IDLE: if (in_valid) begin
          state <= E_PRE;
          cnt   <= '0;
          hdr   <= {dst_mac, src_mac, ETHERTYPE};
          crc   <= '1;
        end
        E_PRE: begin
          tx_en <= 1'b1;
          cnt   <= cnt + 11'd1;
          if (cnt == 11'd7) begin state <= E_HDR; cnt <= '0; end
        end
        E_HDR: begin
          tx_en <= 1'b1;
          hdr   <= hdr << 8;
          cnt   <= cnt + 11'd1;
          if (cnt == 11'd13) begin state <= E_PAY; cnt <= '0; end
        end
        E_PAY: begin
          // a gap inside a packet sends a zero byte and closes the frame
          tx_en <= 1'b1;
          cnt   <= cnt + 11'd1;
          if (!in_valid || in_last || cnt == 11'(ETH_MAX_PAYLOAD - 1)) begin
            if (cnt + 11'd1 < 11'd46) state <= E_PAD;
            else begin state <= E_FCS; cnt <= '0; end
          end
        end
        E_PAD: begin
          tx_en <= 1'b1;
          cnt   <= cnt + 11'd1;
          if (cnt == 11'd45) begin state <= E_FCS; cnt <= '0; end
        end
        E_FCS: begin
          tx_en <= 1'b1;
          cnt   <= cnt + 11'd1;
          if (cnt == 11'd3) begin state <= E_IFG; cnt <= '0; end
        end
        E_IFG: begin
          cnt <= cnt + 11'd1;
          if (cnt == 11'd11) state <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
