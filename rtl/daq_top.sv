// daq_top: the whole readout system in one module, for simulation end to end.
//
// One CCC, N_LDA LDAs with N_DIF DIFs each, and one ODR receiving the N_LDA
// Ethernet links. Data flow: front-end bytes enter each DIF, are cut into
// blocks, cross the 50 Mbit/s DIF-LDA serial links, are multiplexed 10:1 in
// each LDA into raw Ethernet frames, and are multiplexed 4:1 in the ODR onto
// the host stream (towards PCI Express in the real system). Control packets
// go the opposite way, host -> ODR -> LDA (by MAC) -> DIF (by index or all).
// The CCC takes RS232 commands and external triggers and drives the fast line
// of every LDA, which fans it out to its DIFs; busy flows back DIF -> LDA ->
// CCC as clock-coded lines and vetoes triggers.
// What is modelled as wiring: the HDMI cables (the serial pairs, gated by
// cable_ok[l][d] to imitate an unplugged or broken cable), the optical
// Ethernet (GMII to GMII, PHYs omitted), the AC-coupled busy lines (an
// undriven line rests at 0 between DIF and LDA and at 1 between LDA and CCC:
// the decoders only look at edges), and the DIF-DIF ribbons, which join DIF
// 2k and 2k+1 of each LDA. The clocks are inputs: clk is the 50 MHz system
// clock the CCC distributes, clk_eth the 125 MHz Ethernet clock and clk_host
// the ODR host-side clock. The CCC's unused outputs are brought out on
// ccc_spare_fast. LDA l has MAC LDA_MAC_BASE+l.
module daq_top
  import daq_pkg::*;
#(
  parameter int          N_LDA        = N_LDA_PER_ODR,
  parameter int          N_DIF        = N_DIF_PER_LDA,
  parameter int          DIF_DEPTH    = 2048,
  parameter int          UP_DEPTH     = 2048,
  parameter int          MAX_BLOCK    = DIF_MAX_BLOCK,
  parameter int          CLKS_PER_BIT = 434,
  parameter logic [47:0] LDA_MAC_BASE = 48'h02CA_11CE_0000,
  parameter logic [47:0] ODR_MAC_BASE = 48'h02CA_11CE_FF00
) (
  input  logic                              clk,
  input  logic                              clk_eth,
  input  logic                              clk_host,
  input  logic                              rst_n,
  // control PC and beam line
  input  logic                              uart_rx,
  input  logic                              ext_trig,
  output logic                              clk_sel,
  output logic                              run,
  output logic                              ccc_busy,
  output logic [15:0]                       trig_sent,
  output logic [15:0]                       trig_veto,
  output logic [N_CCC_OUT-N_LDA-1:0]        ccc_spare_fast,
  // detector side of every DIF
  input  logic [N_LDA-1:0][N_DIF-1:0]       fe_valid,
  input  logic [N_LDA-1:0][N_DIF-1:0][7:0]  fe_data,
  input  logic [N_LDA-1:0][N_DIF-1:0]       fe_last,
  input  logic [N_LDA-1:0][N_DIF-1:0]       ram_full,
  input  logic [N_LDA-1:0][N_DIF-1:0]       cable_ok,
  output logic [N_LDA-1:0][N_DIF-1:0]       slowclk,
  output logic [N_LDA-1:0][N_DIF-1:0]       train_start,
  output logic [N_LDA-1:0][N_DIF-1:0]       trig_out,
  output logic [N_LDA-1:0][N_DIF-1:0]       asic_pwr_on,
  output logic [N_LDA-1:0][N_DIF-1:0]       dif_link_up,
  output logic [N_LDA-1:0][N_DIF-1:0]       dif_via_neighbour,
  output logic [N_LDA-1:0][N_DIF-1:0]       lda_link_up,
  // DAQ PC side of the ODR
  output logic                              host_out_valid,
  output logic [7:0]                        host_out_data,
  output logic                              host_out_last,
  output logic                              host_out_err,
  input  logic                              host_out_ready,
  input  logic                              host_in_valid,
  input  logic [7:0]                        host_in_data,
  input  logic                              host_in_last,
  input  logic [$clog2(N_LDA+1)-1:0]        host_in_port,
  output logic                              host_in_ready
);
  // ---------------- CCC
  logic [N_CCC_OUT-1:0] ccc_fast, ccc_busy_in;
  logic [N_LDA-1:0]     lda_busy_line, lda_busy_oe;

  for (genvar l = 0; l < N_CCC_OUT; l++) begin : g_cccin
    if (l < N_LDA) begin : g_used
      assign ccc_busy_in[l] = lda_busy_oe[l] ? lda_busy_line[l] : 1'b1;
    end else begin : g_spare
      assign ccc_busy_in[l] = 1'b1;
      assign ccc_spare_fast[l - N_LDA] = ccc_fast[l];
    end
  end

  ccc_control #(.N_OUT(N_CCC_OUT), .CLKS_PER_BIT(CLKS_PER_BIT)) u_ccc (
    .clk, .rst_n, .uart_rx, .ext_trig, .busy_line(ccc_busy_in), .fast_out(ccc_fast),
    .clk_sel, .run, .busy_any(ccc_busy), .trig_sent, .trig_veto);

  // ---------------- ODR
  logic [N_LDA-1:0][7:0]  o_rxd, o_txd;
  logic [N_LDA-1:0]       o_rx_dv, o_tx_en;
  logic [N_LDA-1:0][47:0] lda_macs;
  logic [N_LDA-1:0][15:0] f_ok, f_bad;

  odr #(.N_LDA(N_LDA), .DEPTH(UP_DEPTH), .ODR_MAC_BASE(ODR_MAC_BASE)) u_odr (
    .clk_eth, .rst_eth_n(rst_n), .clk_host, .rst_host_n(rst_n),
    .gmii_rxd(o_rxd), .gmii_rx_dv(o_rx_dv), .gmii_txd(o_txd), .gmii_tx_en(o_tx_en), .lda_mac(lda_macs),
    .host_out_valid, .host_out_data, .host_out_last, .host_out_err, .host_out_ready,
    .host_in_valid, .host_in_data, .host_in_last, .host_in_port, .host_in_ready,
    .frames_ok(f_ok), .frames_bad(f_bad));

  // ---------------- LDAs and their DIFs
  for (genvar l = 0; l < N_LDA; l++) begin : g_lda
    logic [N_DIF-1:0] l_ser_in, l_ser_out, l_fast, l_busy_line, l_link_up, l_dif_busy;
    logic [N_DIF-1:0] d_ser_out, d_busy_line, d_busy_oe;
    logic [N_DIF-1:0]       nb_valid, nb_last;
    logic [N_DIF-1:0][7:0]  nb_data;
    logic [15:0] c_fwd, c_drop;

    assign lda_macs[l] = LDA_MAC_BASE + 48'(l);

    lda #(.N_DIF(N_DIF), .UP_DEPTH(UP_DEPTH)) u_lda (
      .clk, .rst_n, .clk_eth, .rst_eth_n(rst_n), .my_mac(LDA_MAC_BASE + 48'(l)), .odr_mac(ODR_MAC_BASE + 48'(l)),
      .ser_in(l_ser_in), .ser_out(l_ser_out), .fast_out(l_fast), .dif_busy_line(l_busy_line), .link_up(l_link_up),
      .fast_in(ccc_fast[l]), .ccc_busy_line(lda_busy_line[l]), .ccc_busy_oe(lda_busy_oe[l]),
      .gmii_txd(o_rxd[l]), .gmii_tx_en(o_rx_dv[l]), .gmii_rxd(o_txd[l]), .gmii_rx_dv(o_tx_en[l]),
      .dif_busy(l_dif_busy), .ctrl_fwd(c_fwd), .ctrl_drop(c_drop));

    assign lda_link_up[l] = l_link_up;

    for (genvar d = 0; d < N_DIF; d++) begin : g_dif
      // neighbour on the ribbon: 2k <-> 2k+1; an odd last DIF has none
      localparam int NB = d ^ 1;
      logic [15:0] drops;

      assign l_ser_in[d]    = d_ser_out[d] & cable_ok[l][d];
      assign l_busy_line[d] = d_busy_oe[d] ? d_busy_line[d] : 1'b0;

      dif #(.DIF_ID(6'(d)), .DATA_DEPTH(DIF_DEPTH), .MAX_BLOCK(MAX_BLOCK)) u_dif (
        .clk, .rst_n, .ser_in(l_ser_out[d] & cable_ok[l][d]), .ser_out(d_ser_out[d]),
        .fast_line(l_fast[d]), .busy_line(d_busy_line[d]), .busy_oe(d_busy_oe[d]),
        .fe_valid(fe_valid[l][d]), .fe_data(fe_data[l][d]), .fe_last(fe_last[l][d]), .ram_full(ram_full[l][d]),
        .slowclk(slowclk[l][d]), .train_start(train_start[l][d]), .trig_out(trig_out[l][d]),
        .asic_pwr_on(asic_pwr_on[l][d]),
        .nb_out_valid(nb_valid[d]), .nb_out_data(nb_data[d]), .nb_out_last(nb_last[d]),
        .nb_in_valid(NB < N_DIF ? nb_valid[NB % N_DIF] : 1'b0),
        .nb_in_data(NB < N_DIF ? nb_data[NB % N_DIF] : 8'h00),
        .nb_in_last(NB < N_DIF ? nb_last[NB % N_DIF] : 1'b0),
        .link_up(dif_link_up[l][d]), .via_neighbour(dif_via_neighbour[l][d]), .drops);
    end
  end
endmodule
