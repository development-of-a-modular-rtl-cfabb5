// dif: digital part of a detector interface (DIF) card.
//
// Data path up: front-end bytes -> dif_control (cut into blocks) -> data FIFO;
// echo replies -> echo FIFO; packets from the neighbouring DIF (ribbon) ->
// neighbour FIFO. A 3-input pkt_arbiter merges them, putting the header byte
// {type, DIF_ID} in front of data and echo packets (neighbour packets already
// carry theirs), and feeds the serial link to the LDA (link_rxtx).
// Redundancy: if redundancy is enabled and the link receiver has lost the
// LDA (no comma alignment, i.e. cable or LDA link down), packets are sent to
// the neighbouring DIF over the ribbon instead, and that DIF forwards them on
// its own link. Without redundancy a DIF whose link is down keeps its packets
// (sending starts again when the link returns), so its buffer fills and busy
// stops data taking. The route is chosen at packet boundaries, and a DIF that is
// itself routing to its neighbour does not accept packets from it, so no
// packet can circle. When the link is recovered the DIF returns to it.
// Control path down: link -> dif_control (echo, mode). fe_signals decodes the
// fast line (triggers, train start/end, slow-clock sync) and drives the ASIC
// signals; busy (ASIC RAM full or data FIFO full) goes to the LDA as a
// clock-coded busy (busy_enc) with the driver off when not busy.
// The ribbon is modelled as a byte stream with valid and last; the neighbour
// FIFO always accepts (it truncates and flags a packet that does not fit).
module dif
  import daq_pkg::*;
#(
  parameter logic [5:0] DIF_ID     = 6'd0,
  parameter int         DATA_DEPTH = 2048,
  parameter int         ECHO_DEPTH = 256,
  parameter int         MAX_BLOCK  = DIF_MAX_BLOCK
) (
  input  logic       clk,
  input  logic       rst_n,
  // HDMI link to the LDA
  input  logic       ser_in,
  output logic       ser_out,
  input  logic       fast_line,
  output logic       busy_line,
  output logic       busy_oe,
  // detector side
  input  logic       fe_valid,
  input  logic [7:0] fe_data,
  input  logic       fe_last,
  input  logic       ram_full,
  output logic       slowclk,
  output logic       train_start,
  output logic       trig_out,
  output logic       asic_pwr_on,
  // DIF-DIF ribbon
  output logic       nb_out_valid,
  output logic [7:0] nb_out_data,
  output logic       nb_out_last,
  input  logic       nb_in_valid,
  input  logic [7:0] nb_in_data,
  input  logic       nb_in_last,
  // status
  output logic       link_up,
  output logic       via_neighbour,
  output logic [15:0] drops
);
  // arbiter output and route (declared first: the link uses them)
  logic       route_nb, mid_pkt;
  logic       a_valid, a_last, a_err, a_out_ready;
  logic [7:0] a_data;

  // link
  logic       tx_valid, tx_ready, tx_last;
  logic [7:0] tx_data;
  logic       rx_valid, rx_last, rx_err;
  logic [7:0] rx_data;
  logic [15:0] err_cnt;

  link_rxtx u_link (.clk, .rst_n, .tx_valid, .tx_data, .tx_last, .tx_err(a_err && !route_nb), .tx_ready, .ser_out,
                    .ser_in, .rx_valid, .rx_data, .rx_last, .rx_err, .link_up, .err_cnt);

  // control
  logic       blk_valid, blk_last, echo_valid, echo_last, echo_err, pp_en, redund_en;
  logic [7:0] blk_data, echo_data;
  logic [15:0] blocks;

  dif_control #(.MAX_BLOCK(MAX_BLOCK)) u_ctl (
    .clk, .rst_n, .cmd_valid(rx_valid), .cmd_data(rx_data), .cmd_last(rx_last), .cmd_err(rx_err),
    .fe_valid, .fe_data, .fe_last, .blk_valid, .blk_data, .blk_last,
    .echo_valid, .echo_data, .echo_last, .echo_err, .pp_en, .redund_en, .blocks);

  // FIFOs: 0 data, 1 echo, 2 neighbour
  logic [2:0]       f_valid, f_last, f_err, f_ready, a_ready;
  logic [2:0][7:0]  f_data;
  logic [2:0]       f_wready;
  logic [15:0]      d_drop, e_drop, n_drop;

  pkt_fifo #(.DEPTH(DATA_DEPTH)) u_dfifo (
    .wclk(clk), .wrst_n(rst_n), .w_valid(blk_valid), .w_data(blk_data), .w_last(blk_last), .w_err(1'b0),
    .w_ready(f_wready[0]), .drop_cnt(d_drop), .rclk(clk), .rrst_n(rst_n),
    .r_valid(f_valid[0]), .r_data(f_data[0]), .r_last(f_last[0]), .r_err(f_err[0]), .r_ready(f_ready[0]));
  pkt_fifo #(.DEPTH(ECHO_DEPTH)) u_efifo (
    .wclk(clk), .wrst_n(rst_n), .w_valid(echo_valid), .w_data(echo_data), .w_last(echo_last), .w_err(echo_err),
    .w_ready(f_wready[1]), .drop_cnt(e_drop), .rclk(clk), .rrst_n(rst_n),
    .r_valid(f_valid[1]), .r_data(f_data[1]), .r_last(f_last[1]), .r_err(f_err[1]), .r_ready(f_ready[1]));
  pkt_fifo #(.DEPTH(DATA_DEPTH)) u_nfifo (
    .wclk(clk), .wrst_n(rst_n), .w_valid(nb_in_valid), .w_data(nb_in_data), .w_last(nb_in_last), .w_err(1'b0),
    .w_ready(f_wready[2]), .drop_cnt(n_drop), .rclk(clk), .rrst_n(rst_n),
    .r_valid(f_valid[2]), .r_data(f_data[2]), .r_last(f_last[2]), .r_err(f_err[2]), .r_ready(f_ready[2]));

  assign drops = d_drop + e_drop + n_drop;

  // route selection, fixed for the length of a packet
  logic [2:0] a_in_valid;

  assign a_in_valid = {f_valid[2] && !route_nb, f_valid[1:0]};
  assign f_ready    = a_ready;

  pkt_arbiter #(.N(3)) u_arb (
    .clk, .rst_n, .in_valid(a_in_valid), .in_data(f_data), .in_last(f_last), .in_err(f_err),
    .in_ready(a_ready), .hdr({8'h00, {PT_ECHO, DIF_ID}, {PT_DATA, DIF_ID}}), .hdr_en(3'b011),
    .out_valid(a_valid), .out_data(a_data), .out_last(a_last), .out_err(a_err), .out_ready(a_out_ready));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      route_nb <= 1'b0;
      mid_pkt  <= 1'b0;
    end else begin
      if (a_valid && a_out_ready) mid_pkt <= !a_last;
      if (!mid_pkt && !(a_valid && a_out_ready)) route_nb <= redund_en && !link_up;
    end
  end

  // with no route at all (link down, redundancy off or neighbour route not
  // yet chosen) the next packet waits in its FIFO, which fills and raises busy
  logic hold;
  assign hold         = !route_nb && !link_up && !mid_pkt;
  assign a_out_ready  = route_nb ? 1'b1 : (tx_ready && !hold);
  assign tx_valid     = a_valid && !route_nb && !hold;
  assign tx_data      = a_data;
  assign tx_last      = a_last;
  assign nb_out_valid = a_valid && route_nb;
  assign nb_out_data  = a_data;
  assign nb_out_last  = a_last;
  assign via_neighbour = route_nb;

  // front-end signals and busy
  logic fe_busy, in_train, fast_err;

  fe_signals u_fe (.clk, .rst_n, .fast_line, .ram_full, .buf_full(!f_wready[0]), .pp_en,
                   .slowclk, .train_start, .in_train, .trig_out, .asic_pwr_on, .busy(fe_busy), .fast_err);

  busy_enc u_busy (.clk, .rst_n, .busy(fe_busy), .line(busy_line), .oe(busy_oe));
endmodule
