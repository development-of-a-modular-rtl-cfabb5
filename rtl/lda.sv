// lda: link data aggregator, the concentrator between N_DIF DIFs and one
// Ethernet link to the ODR.
//
// Upstream: each DIF link (link_rxtx, 50 Mbit/s serial) writes the packets it
// receives into its own store-and-forward FIFO (pkt_fifo, UP_DEPTH bytes),
// which also moves them from the 50 MHz link clock to the 125 MHz Ethernet
// clock. A pkt_arbiter takes whole packets from the FIFOs in round-robin order,
// puts the link number in front of each, and eth_tx sends each as one raw
// Ethernet frame from my_mac to odr_mac. Ten links at their 40 Mbit/s payload
// limit give 400 Mbit/s, well inside the 1 Gbit/s Ethernet link.
// Downstream: eth_rx accepts frames addressed to my_mac or broadcast; their
// payload crosses back to the link clock in a control FIFO and lda_control
// writes the command into the downstream FIFO (DN_DEPTH bytes) of the target
// DIF, or of all DIFs, from which each link sends it.
// Fast signals and busy: lda_dif_signals fans the CCC's trig line out to the
// DIFs and returns the OR of the DIFs' busy lines to the CCC.
// A packet whose link reception failed, or that was cut in a full FIFO, still
// travels on in a frame like any other; its error flag is not carried in the
// frame (the DAQ PC detects damage from the packet contents). A damaged
// command towards a DIF is closed on the link with a comma, so the DIF
// receives it flagged and ignores it.
module lda
  import daq_pkg::*;
#(
  parameter int N_DIF    = N_DIF_PER_LDA,
  parameter int UP_DEPTH = 2048,
  parameter int DN_DEPTH = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clk_eth,
  input  logic             rst_eth_n,
  input  logic [47:0]      my_mac,
  input  logic [47:0]      odr_mac,
  // DIF links
  input  logic [N_DIF-1:0] ser_in,
  output logic [N_DIF-1:0] ser_out,
  output logic [N_DIF-1:0] fast_out,
  input  logic [N_DIF-1:0] dif_busy_line,
  output logic [N_DIF-1:0] link_up,
  // CCC link
  input  logic             fast_in,
  output logic             ccc_busy_line,
  output logic             ccc_busy_oe,
  // Ethernet (GMII side of the PHY)
  output logic [7:0]       gmii_txd,
  output logic             gmii_tx_en,
  input  logic [7:0]       gmii_rxd,
  input  logic             gmii_rx_dv,
  // status
  output logic [N_DIF-1:0] dif_busy,
  output logic [15:0]      ctrl_fwd,
  output logic [15:0]      ctrl_drop
);
  // ---------------- per-link endpoints and FIFOs
  logic [N_DIF-1:0]       up_valid, up_last, up_err, up_ready;
  logic [N_DIF-1:0][7:0]  up_data;
  logic [N_DIF-1:0][7:0]  hdrs;
  logic                   c_valid, c_last, c_err;
  logic [7:0]             c_data;
  logic [N_DIF-1:0]       c_mask;

  for (genvar i = 0; i < N_DIF; i++) begin : g_link
    logic       tx_valid, tx_ready, tx_last, tx_err;
    logic [7:0] tx_data;
    logic       rx_valid, rx_last, rx_err;
    logic [7:0] rx_data;
    logic [15:0] err_cnt, up_drop, dn_drop;
    logic       up_wready, dn_wready;

    link_rxtx u_link (.clk, .rst_n, .tx_valid, .tx_data, .tx_last, .tx_err, .tx_ready, .ser_out(ser_out[i]),
                      .ser_in(ser_in[i]), .rx_valid, .rx_data, .rx_last, .rx_err, .link_up(link_up[i]), .err_cnt);

    pkt_fifo #(.DEPTH(UP_DEPTH)) u_up (
      .wclk(clk), .wrst_n(rst_n), .w_valid(rx_valid), .w_data(rx_data), .w_last(rx_last), .w_err(rx_err),
      .w_ready(up_wready), .drop_cnt(up_drop), .rclk(clk_eth), .rrst_n(rst_eth_n),
      .r_valid(up_valid[i]), .r_data(up_data[i]), .r_last(up_last[i]), .r_err(up_err[i]), .r_ready(up_ready[i]));

    pkt_fifo #(.DEPTH(DN_DEPTH)) u_dn (
      .wclk(clk), .wrst_n(rst_n), .w_valid(c_valid && c_mask[i]), .w_data(c_data), .w_last(c_last), .w_err(c_err),
      .w_ready(dn_wready), .drop_cnt(dn_drop), .rclk(clk), .rrst_n(rst_n),
      .r_valid(tx_valid), .r_data(tx_data), .r_last(tx_last), .r_err(tx_err), .r_ready(tx_ready));

    assign hdrs[i] = 8'(i);
  end

  // ---------------- upstream: 10:1 multiplexer and Ethernet transmitter
  logic       m_valid, m_last, m_err, m_ready;
  logic [7:0] m_data;

  pkt_arbiter #(.N(N_DIF)) u_mux (
    .clk(clk_eth), .rst_n(rst_eth_n), .in_valid(up_valid), .in_data(up_data), .in_last(up_last), .in_err(up_err),
    .in_ready(up_ready), .hdr(hdrs), .hdr_en('1),
    .out_valid(m_valid), .out_data(m_data), .out_last(m_last), .out_err(m_err), .out_ready(m_ready));

  eth_tx u_etx (.clk(clk_eth), .rst_n(rst_eth_n), .dst_mac(odr_mac), .src_mac(my_mac),
                .in_valid(m_valid), .in_data(m_data), .in_last(m_last), .in_ready(m_ready),
                .txd(gmii_txd), .tx_en(gmii_tx_en));

  // ---------------- downstream: control packets
  logic       e_valid, e_last, e_err;
  logic [7:0] e_data;
  logic [15:0] ok_cnt, bad_cnt, cf_drop;
  logic       k_valid, k_last, k_err, k_ready, cf_wready;
  logic [7:0] k_data;

  eth_rx u_erx (.clk(clk_eth), .rst_n(rst_eth_n), .my_mac, .rxd(gmii_rxd), .rx_dv(gmii_rx_dv),
                .out_valid(e_valid), .out_data(e_data), .out_last(e_last), .out_err(e_err),
                .frames_ok(ok_cnt), .frames_bad(bad_cnt));

  pkt_fifo #(.DEPTH(UP_DEPTH)) u_cfifo (
    .wclk(clk_eth), .wrst_n(rst_eth_n), .w_valid(e_valid), .w_data(e_data), .w_last(e_last), .w_err(e_err),
    .w_ready(cf_wready), .drop_cnt(cf_drop), .rclk(clk), .rrst_n(rst_n),
    .r_valid(k_valid), .r_data(k_data), .r_last(k_last), .r_err(k_err), .r_ready(k_ready));

  lda_control #(.N_DIF(N_DIF)) u_ctl (
    .clk, .rst_n, .in_valid(k_valid), .in_data(k_data), .in_last(k_last), .in_err(k_err), .in_ready(k_ready),
    .out_valid(c_valid), .out_data(c_data), .out_last(c_last), .out_err(c_err), .out_mask(c_mask),
    .pkts_fwd(ctrl_fwd), .pkts_drop(ctrl_drop));

  // ---------------- fast signals and busy
  logic busy_any;

  lda_dif_signals #(.N_DIF(N_DIF)) u_sig (
    .clk, .rst_n, .fast_in, .fast_out, .busy_line_in(dif_busy_line), .dif_busy, .busy_any,
    .ccc_busy_line, .ccc_busy_oe);
endmodule
