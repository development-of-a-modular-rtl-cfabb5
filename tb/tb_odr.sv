// tb_odr: an ODR with its default 4 ports. Checks: frames arriving on ports 1
// and 3 come out on the host stream as port number + payload; a frame with a
// corrupted FCS comes out flagged with host_out_err and is counted bad; a
// frame for another MAC is dropped; a control packet written by the host for
// port 2 leaves port 2 only, as a valid frame from ODR_MAC_BASE+2 to the LDA
// MAC of port 2; host_out_ready low holds the host stream without loss.
module tb_odr;
  import daq_pkg::*;
  import tb_eth_pkg::*;
  localparam int N = 4;
  localparam logic [47:0] BASE = 48'h02CA_11CE_FF00;
  logic clk_eth = 0, clk_host = 0, rst_n = 0;
  always #4 clk_eth = ~clk_eth;    // 125 MHz
  always #2.5 clk_host = ~clk_host; // 200 MHz host-side clock
  int checks = 0, failures = 0;

  logic [N-1:0][7:0] gmii_rxd = '0, gmii_txd;
  logic [N-1:0] gmii_rx_dv = '0, gmii_tx_en;
  logic [N-1:0][47:0] lda_mac;
  logic ho_valid, ho_last, ho_err, ho_ready = 1;
  logic [7:0] ho_data;
  logic hi_valid = 0, hi_last = 0, hi_ready;
  logic [7:0] hi_data = '0;
  logic [2:0] hi_port = '0;
  logic [N-1:0][15:0] f_ok, f_bad;

  for (genvar i = 0; i < N; i++) begin : g_mac
    assign lda_mac[i] = 48'h02CA_11DA_0000 + 48'(i);
  end

  odr dut (.clk_eth, .rst_eth_n(rst_n), .clk_host, .rst_host_n(rst_n), .gmii_rxd, .gmii_rx_dv, .gmii_txd,
           .gmii_tx_en, .lda_mac, .host_out_valid(ho_valid), .host_out_data(ho_data), .host_out_last(ho_last),
           .host_out_err(ho_err), .host_out_ready(ho_ready), .host_in_valid(hi_valid), .host_in_data(hi_data),
           .host_in_last(hi_last), .host_in_port(hi_port), .host_in_ready(hi_ready), .frames_ok(f_ok),
           .frames_bad(f_bad));

  // host stream capture
  logic [7:0] hcur[$];
  logic [7:0] hpk[$][$];
  bit herr[$];
  always @(posedge clk_host) if (rst_n && ho_valid && ho_ready) begin
    hcur.push_back(ho_data);
    if (ho_last) begin hpk.push_back(hcur); herr.push_back(ho_err); hcur = {}; end
  end
  // random back-pressure from the host
  always @(negedge clk_host) ho_ready = ($urandom_range(0, 3) != 0);

  // frames leaving each port
  logic [7:0] fcur[N][$];
  logic [7:0] fr_out[N][$][$];
  always @(posedge clk_eth) if (rst_n) for (int i = 0; i < N; i++) begin
    if (gmii_tx_en[i]) fcur[i].push_back(gmii_txd[i]);
    else if (fcur[i].size() != 0) begin fr_out[i].push_back(fcur[i]); fcur[i] = {}; end
  end

  task automatic eth_send(input int p, input logic [47:0] dst, input logic [7:0] pay[$], input bit corrupt);
    logic [7:0] fr[$];
    build_frame(dst, lda_mac[p], ETHERTYPE, pay, fr);
    if (corrupt) fr[30] = fr[30] ^ 8'h10;
    foreach (fr[k]) begin @(negedge clk_eth); gmii_rx_dv[p] = 1; gmii_rxd[p] = fr[k]; end
    @(negedge clk_eth); gmii_rx_dv[p] = 0; gmii_rxd[p] = '0;
    repeat (12) @(negedge clk_eth);
  endtask

  function automatic bit prefix_ok(input logic [7:0] got[$], input int port, input logic [7:0] pay[$]);
    if (got.size() < pay.size() + 1 || got[0] != 8'(port)) return 0;
    foreach (pay[k]) if (got[k+1] != pay[k]) return 0;
    return 1;
  endfunction

  initial begin
    logic [7:0] a[$], b[$], c[$];
    logic [47:0] d, s;
    logic [15:0] et;
    logic [7:0] pay[$];
    repeat (3) @(posedge clk_eth);
    rst_n = 1;
    repeat (10) @(negedge clk_eth);
    a = {}; b = {};
    for (int k = 0; k < 100; k++) a.push_back(8'($urandom));
    for (int k = 0; k < 10; k++) b.push_back(8'($urandom));
    fork eth_send(1, BASE + 1, a, 0); eth_send(3, BASE + 3, b, 0); join
    repeat (300) @(negedge clk_eth);
    checks++; if (hpk.size() != 2) begin failures++; $display("FAIL %0d host packets", hpk.size()); end
    else begin
      checks++; if (!prefix_ok(hpk[0], 3, b) || herr[0]) begin failures++; $display("FAIL port 3 packet"); end
      checks++; if (!prefix_ok(hpk[1], 1, a) || hpk[1].size() != 101 || herr[1]) begin failures++; $display("FAIL port 1 packet"); end
    end
    hpk = {}; herr = {};
    // corrupted frame and foreign frame
    eth_send(0, BASE, a, 1);
    eth_send(2, BASE + 3, a, 0);
    repeat (300) @(negedge clk_eth);
    checks++; if (hpk.size() != 1 || !herr[0] || hpk[0][0] != 8'd0) begin failures++; $display("FAIL corrupted frame handling %0d %p", hpk.size(), herr); end
    checks++; if (f_bad[0] != 1 || f_ok[1] != 1 || f_ok[3] != 1 || f_ok[2] != 0) begin failures++; $display("FAIL frame counters %p %p", f_ok, f_bad); end
    // host to LDA 2
    c = {8'd5, 8'd2, OP_ECHO, 8'h77};
    @(negedge clk_host);
    hi_port = 3'd2;
    foreach (c[k]) begin
      hi_valid = 1; hi_data = c[k]; hi_last = (k == c.size() - 1);
      @(negedge clk_host);
      while (!hi_ready) @(negedge clk_host);
    end
    hi_valid = 0; hi_last = 0;
    repeat (300) @(negedge clk_eth);
    checks++; if (fr_out[2].size() != 1 || fr_out[0].size() + fr_out[1].size() + fr_out[3].size() != 0) begin
      failures++; $display("FAIL control frame count");
    end else begin
      checks++;
      if (!parse_frame(fr_out[2][0], d, s, et, pay) || d != lda_mac[2] || s != BASE + 2 || et != ETHERTYPE ||
          pay[0:3] != c) begin failures++; $display("FAIL control frame contents"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
