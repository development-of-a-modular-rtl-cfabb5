// daq_pkg: constants and types shared by the calorimeter DAQ modules.
//
// Sizes that follow the system description: 10 DIFs per LDA, 4 LDAs per ODR,
// 8 LDA outputs on the CCC, packets of up to 1.5 kB (one non-Jumbo Ethernet
// payload), a 50 MHz link clock and 5 MHz front-end slow clock.
// Encodings that are this implementation's own choice: the K-characters that
// frame packets on the DIF-LDA link, the pulse widths of the fast commands on
// the trig line, the packet-type bits in the DIF header, the EtherType and the
// control-packet opcodes.
package daq_pkg;

  localparam int N_DIF_PER_LDA = 10;
  localparam int N_LDA_PER_ODR = 4;
  localparam int N_CCC_OUT     = 8;
  localparam int ETH_MAX_PAYLOAD = 1500;
  // one byte of LDA header precedes each DIF packet in the Ethernet payload
  localparam int DIF_MAX_PKT   = ETH_MAX_PAYLOAD - 1;
  // DIF packet header: one byte, the rest of the block is front-end data
  localparam int DIF_MAX_BLOCK = DIF_MAX_PKT - 1;

  // 8b/10b control characters used for link framing
  localparam logic [7:0] K_COMMA = 8'hBC; // K28.5: idle / alignment
  localparam logic [7:0] K_SOP   = 8'hFB; // K27.7: start of packet
  localparam logic [7:0] K_EOP   = 8'hFD; // K29.7: end of packet

  // Fast commands on the trig line, coded by pulse width in clock cycles
  typedef enum logic [2:0] {
    FC_NONE        = 3'd0,
    FC_TRIG        = 3'd1,
    FC_SYNC        = 3'd2,
    FC_TRAIN_START = 3'd3,
    FC_TRAIN_END   = 3'd4
  } fast_cmd_t;
  localparam int FC_GAP = 2;  // low cycles after each pulse

  // DIF packet header byte: {type, dif_id[5:0]}
  typedef enum logic [1:0] {
    PT_DATA = 2'b10,
    PT_ECHO = 2'b11
  } pkt_type_t;

  // DIF commands (first byte of a command packet on the link)
  localparam logic [7:0] OP_ECHO     = 8'h01;
  localparam logic [7:0] OP_SET_MODE = 8'h02; // byte1: bit0 power pulsing, bit1 redundancy

  // LDA control packet: byte0 target, byte1 length, then commands
  localparam logic [7:0] TGT_ALL_DIF = 8'hFF;

  localparam logic [15:0] ETHERTYPE = 16'h88B5;
  localparam logic [47:0] MAC_BCAST = 48'hFFFF_FFFF_FFFF;

endpackage
