// odr: firmware of the off-detector receiver, the PCI Express card in the
// DAQ PC that terminates the Ethernet links of N_LDA LDAs.
//
// Receive: each port has eth_rx (frames to ODR_MAC_BASE+port, or broadcast)
// and a store-and-forward FIFO that also crosses from the 125 MHz Ethernet
// clock to the host-side clock. A pkt_arbiter takes whole frames' payloads in
// round-robin order, puts the port number in front, and presents them on the
// host stream (host_out_*), which in the real card feeds the PCI Express DMA
// engine and buffer memory (not part of this logic). host_out_err marks a
// frame that failed its CRC.
// Send: the host writes a control packet on host_in_* with host_in_port
// selecting the LDA; it is buffered in that port's FIFO and sent by eth_tx to
// lda_mac[port].
module odr
  import daq_pkg::*;
#(
  parameter int          N_LDA        = N_LDA_PER_ODR,
  parameter int          DEPTH        = 2048,
  parameter logic [47:0] ODR_MAC_BASE = 48'h02CA_11CE_FF00
) (
  input  logic                    clk_eth,
  input  logic                    rst_eth_n,
  input  logic                    clk_host,
  input  logic                    rst_host_n,
  // Ethernet ports (GMII side of the SFP PHYs)
  input  logic [N_LDA-1:0][7:0]   gmii_rxd,
  input  logic [N_LDA-1:0]        gmii_rx_dv,
  output logic [N_LDA-1:0][7:0]   gmii_txd,
  output logic [N_LDA-1:0]        gmii_tx_en,
  input  logic [N_LDA-1:0][47:0]  lda_mac,
  // host stream towards PCI Express
  output logic                    host_out_valid,
  output logic [7:0]              host_out_data,
  output logic                    host_out_last,
  output logic                    host_out_err,
  input  logic                    host_out_ready,
  // host control packets towards the LDAs
  input  logic                    host_in_valid,
  input  logic [7:0]              host_in_data,
  input  logic                    host_in_last,
  input  logic [$clog2(N_LDA+1)-1:0] host_in_port,
  output logic                    host_in_ready,
  output logic [N_LDA-1:0][15:0]  frames_ok,
  output logic [N_LDA-1:0][15:0]  frames_bad
);
  logic [N_LDA-1:0]      q_valid, q_last, q_err, q_ready;
  logic [N_LDA-1:0][7:0] q_data, hdrs;
  logic [N_LDA-1:0]      t_wready;

  for (genvar i = 0; i < N_LDA; i++) begin : g_port
    logic       e_valid, e_last, e_err, w_ready;
    logic [7:0] e_data;
    logic [15:0] drop, t_drop;
    logic       t_valid, t_last, t_err, t_ready;
    logic [7:0] t_data;

    eth_rx u_rx (.clk(clk_eth), .rst_n(rst_eth_n), .my_mac(ODR_MAC_BASE + 48'(i)),
                 .rxd(gmii_rxd[i]), .rx_dv(gmii_rx_dv[i]),
                 .out_valid(e_valid), .out_data(e_data), .out_last(e_last), .out_err(e_err),
                 .frames_ok(frames_ok[i]), .frames_bad(frames_bad[i]));

    pkt_fifo #(.DEPTH(DEPTH)) u_q (
      .wclk(clk_eth), .wrst_n(rst_eth_n), .w_valid(e_valid), .w_data(e_data), .w_last(e_last), .w_err(e_err),
      .w_ready(w_ready), .drop_cnt(drop), .rclk(clk_host), .rrst_n(rst_host_n),
      .r_valid(q_valid[i]), .r_data(q_data[i]), .r_last(q_last[i]), .r_err(q_err[i]), .r_ready(q_ready[i]));

    assign hdrs[i] = 8'(i);

    // control: host -> port FIFO -> Ethernet
    pkt_fifo #(.DEPTH(DEPTH)) u_t (
      .wclk(clk_host), .wrst_n(rst_host_n), .w_valid(host_in_valid && int'(host_in_port) == i),
      .w_data(host_in_data), .w_last(host_in_last), .w_err(1'b0),
      .w_ready(t_wready[i]), .drop_cnt(t_drop), .rclk(clk_eth), .rrst_n(rst_eth_n),
      .r_valid(t_valid), .r_data(t_data), .r_last(t_last), .r_err(t_err), .r_ready(t_ready));

    eth_tx u_tx (.clk(clk_eth), .rst_n(rst_eth_n), .dst_mac(lda_mac[i]), .src_mac(ODR_MAC_BASE + 48'(i)),
                 .in_valid(t_valid), .in_data(t_data), .in_last(t_last), .in_ready(t_ready),
                 .txd(gmii_txd[i]), .tx_en(gmii_tx_en[i]));
  end

  always_comb begin
    host_in_ready = 1'b1;
    for (int i = 0; i < N_LDA; i++)
      if (int'(host_in_port) == i) host_in_ready = t_wready[i];
  end

  pkt_arbiter #(.N(N_LDA)) u_mux (
    .clk(clk_host), .rst_n(rst_host_n), .in_valid(q_valid), .in_data(q_data), .in_last(q_last), .in_err(q_err),
    .in_ready(q_ready), .hdr(hdrs), .hdr_en('1),
    .out_valid(host_out_valid), .out_data(host_out_data), .out_last(host_out_last), .out_err(host_out_err),
    .out_ready(host_out_ready));
endmodule
