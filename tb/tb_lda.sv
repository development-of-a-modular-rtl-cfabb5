// tb_lda: an LDA with 3 DIF links (reduced from 10), the DIF ends played by
// link_rxtx instances. Checks: packets from DIF links 0 and 2 leave as valid
// Ethernet frames from the LDA's MAC to the ODR's MAC, EtherType 0x88B5,
// payload = link number + packet; a control frame for DIF 1 reaches DIF 1's
// link only, a broadcast control frame reaches all three; a frame for another
// MAC is ignored; the fast line is passed to every DIF; a toggling DIF busy
// line gives a toggling busy towards the CCC.
module tb_lda;
  import daq_pkg::*;
  import tb_eth_pkg::*;
  localparam int N = 3;
  localparam logic [47:0] MY = 48'h02CA_11DA_0001, ODR = 48'h02CA_11CE_FF00;
  logic clk = 0, clk_eth = 0, rst_n = 0;
  always #10 clk = ~clk;       // 50 MHz
  always #4 clk_eth = ~clk_eth; // 125 MHz
  int checks = 0, failures = 0;

  logic [N-1:0] ser_in, ser_out, fast_out, dif_busy_line = '0, link_up, dif_busy;
  logic fast_in = 0, ccc_busy_line, ccc_busy_oe;
  logic [7:0] gmii_txd, gmii_rxd = '0;
  logic gmii_tx_en, gmii_rx_dv = 0;
  logic [15:0] ctrl_fwd, ctrl_drop;

  lda #(.N_DIF(N), .UP_DEPTH(256), .DN_DEPTH(64)) dut (
    .clk, .rst_n, .clk_eth, .rst_eth_n(rst_n), .my_mac(MY), .odr_mac(ODR), .ser_in, .ser_out, .fast_out,
    .dif_busy_line, .link_up, .fast_in, .ccc_busy_line, .ccc_busy_oe, .gmii_txd, .gmii_tx_en, .gmii_rxd,
    .gmii_rx_dv, .dif_busy, .ctrl_fwd, .ctrl_drop);

  logic [N-1:0] tx_valid = '0, tx_last = '0, tx_ready, rx_valid, rx_last, rx_err, d_up;
  logic [N-1:0][7:0] tx_data = '0, rx_data;
  logic [N-1:0][15:0] ec;
  for (genvar i = 0; i < N; i++) begin : g
    link_rxtx u_dif_end (.clk, .rst_n, .tx_valid(tx_valid[i]), .tx_data(tx_data[i]), .tx_last(tx_last[i]),
      .tx_err(1'b0), .tx_ready(tx_ready[i]), .ser_out(ser_in[i]), .ser_in(ser_out[i]),
      .rx_valid(rx_valid[i]), .rx_data(rx_data[i]), .rx_last(rx_last[i]), .rx_err(rx_err[i]),
      .link_up(d_up[i]), .err_cnt(ec[i]));
  end

  // commands received at the DIF ends
  logic [7:0] cur[N][$];
  logic [7:0] got[N][$][$];
  always @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) if (rx_valid[i]) begin
    cur[i].push_back(rx_data[i]);
    if (rx_last[i]) begin if (!rx_err[i]) got[i].push_back(cur[i]); cur[i] = {}; end
  end

  // frames leaving on GMII
  logic [7:0] fcur[$];
  logic [7:0] frames[$][$];
  always @(posedge clk_eth) if (rst_n) begin
    if (gmii_tx_en) fcur.push_back(gmii_txd);
    else if (fcur.size() != 0) begin frames.push_back(fcur); fcur = {}; end
  end

  task automatic dif_send(input int i, input logic [7:0] b[$]);
    foreach (b[k]) begin
      @(negedge clk);
      tx_valid[i] = 1; tx_data[i] = b[k]; tx_last[i] = (k == b.size() - 1);
      while (!tx_ready[i]) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk); tx_valid[i] = 0; tx_last[i] = 0;
  endtask

  task automatic eth_send(input logic [47:0] dst, input logic [7:0] pay[$]);
    logic [7:0] fr[$];
    build_frame(dst, ODR, ETHERTYPE, pay, fr);
    foreach (fr[k]) begin @(negedge clk_eth); gmii_rx_dv = 1; gmii_rxd = fr[k]; end
    @(negedge clk_eth); gmii_rx_dv = 0; gmii_rxd = '0;
    repeat (12) @(negedge clk_eth);
  endtask

  // checks one captured frame against the expected link number and packet
  task automatic check_frame(input logic [7:0] fr[$], input int link, input logic [7:0] pk[$]);
    logic [47:0] d, s;
    logic [15:0] et;
    logic [7:0] pay[$];
    bit ok;
    ok = parse_frame(fr, d, s, et, pay);
    checks++;
    if (!ok || d != ODR || s != MY || et != ETHERTYPE || pay.size() < pk.size() + 1 || pay[0] != 8'(link)) begin
      failures++; $display("FAIL frame from link %0d: ok=%0d dst=%h src=%h", link, ok, d, s);
    end else begin
      for (int k = 0; k < pk.size(); k++) if (pay[k+1] != pk[k]) begin
        failures++; $display("FAIL frame from link %0d byte %0d", link, k); break;
      end
    end
  endtask

  initial begin
    logic [7:0] a[$], b[$], c[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    checks++; if (link_up != '1 || d_up != '1) begin failures++; $display("FAIL links not up"); end
    // upstream
    a = {}; b = {};
    for (int k = 0; k < 70; k++) a.push_back(8'($urandom));
    for (int k = 0; k < 9; k++) b.push_back(8'($urandom));
    fork dif_send(0, a); dif_send(2, b); join
    repeat (300) @(negedge clk);
    checks++; if (frames.size() != 2) begin failures++; $display("FAIL %0d frames", frames.size()); end
    else begin
      // shorter packet is complete first
      check_frame(frames[0], 2, b);
      check_frame(frames[1], 0, a);
    end
    // downstream: command for DIF 1
    c = {8'd1, 8'd3, OP_ECHO, 8'h12, 8'h34};
    eth_send(MY, c);
    repeat (200) @(negedge clk);
    checks++; if (got[1].size() != 1 || got[0].size() != 0 || got[2].size() != 0 ||
                  got[1][0] != c[2:4]) begin failures++; $display("FAIL targeted command"); end
    // frame for another MAC
    eth_send(MY + 1, c);
    repeat (200) @(negedge clk);
    checks++; if (got[1].size() != 1) begin failures++; $display("FAIL foreign frame accepted"); end
    // broadcast to all DIFs, sent to the broadcast MAC
    c = {TGT_ALL_DIF, 8'd2, OP_SET_MODE, 8'h01};
    eth_send(MAC_BCAST, c);
    repeat (200) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++; if (got[i].size() == 0 || got[i][got[i].size()-1] != c[2:3]) begin failures++; $display("FAIL broadcast at %0d", i); end
    end
    checks++; if (ctrl_fwd != 2) begin failures++; $display("FAIL ctrl_fwd=%0d", ctrl_fwd); end
    // fast line fan-out
    @(negedge clk); fast_in = 1;
    repeat (2) @(negedge clk);
    checks++; if (fast_out != '1) begin failures++; $display("FAIL fast fan-out"); end
    fast_in = 0;
    repeat (2) @(negedge clk);
    checks++; if (fast_out != '0) begin failures++; $display("FAIL fast fan-out low"); end
    // busy: DIF 1 toggles its line
    begin
      int edges = 0;
      logic p;
      p = ccc_busy_line;
      repeat (40) begin
        @(negedge clk); dif_busy_line[1] = ~dif_busy_line[1];
        if (ccc_busy_line != p) edges++;
        p = ccc_busy_line;
      end
      checks++; if (dif_busy != 3'b010 || edges < 20 || !ccc_busy_oe) begin
        failures++; $display("FAIL busy: dif_busy=%b edges=%0d", dif_busy, edges);
      end
      repeat (40) @(negedge clk);
      checks++; if (dif_busy != '0 || ccc_busy_oe) begin failures++; $display("FAIL busy not released"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
