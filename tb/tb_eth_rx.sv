// tb_eth_rx: frames built by the testbench (tb_eth_pkg) are played into the
// receiver. Checks: a frame to my_mac and a broadcast frame deliver their
// payload (with padding) and end with out_last and no error; a frame for
// another MAC and one with a wrong EtherType deliver nothing; a frame with
// one payload bit flipped ends with out_err; the frame counters agree.
module tb_eth_rx;
  import tb_eth_pkg::*;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  localparam logic [47:0] ME = 48'h02CA_11CE_0001;
  logic [7:0] rxd = 0, out_data;
  logic       rx_dv = 0, out_valid, out_last, out_err;
  logic [15:0] fok, fbad;

  eth_rx dut (.clk, .rst_n, .my_mac(ME), .rxd, .rx_dv, .out_valid, .out_data, .out_last, .out_err,
              .frames_ok(fok), .frames_bad(fbad));

  logic [7:0] got[$];
  int lasts = 0, errs = 0;
  always @(posedge clk) if (out_valid) begin
    got.push_back(out_data);
    if (out_last) lasts++;
    if (out_err) errs++;
  end

  task automatic play(input logic [7:0] fr[$], input int flip_at = -1);
    foreach (fr[i]) begin
      @(negedge clk);
      rx_dv = 1; rxd = fr[i] ^ ((i == flip_at) ? 8'h04 : 8'h00);
    end
    @(negedge clk); rx_dv = 0;
    repeat (15) @(negedge clk);
  endtask

  task automatic expect_payload(input logic [7:0] pay[$], input int n_last, input int n_err);
    logic [7:0] padded[$];
    padded = pay;
    while (padded.size() < 46) padded.push_back(8'h00);
    checks++;
    if (got != padded) begin failures++; $display("FAIL payload: got %0d bytes exp %0d", got.size(), padded.size()); end
    checks++;
    if (lasts != n_last || errs != n_err) begin failures++; $display("FAIL last=%0d err=%0d", lasts, errs); end
    got = {}; lasts = 0; errs = 0;
  endtask

  initial begin
    logic [7:0] pay[$], fr[$], none[$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) pay.push_back(8'($urandom));
    build_frame(ME, 48'h02CA_11CE_FF00, ETHERTYPE, pay, fr);
    play(fr);
    expect_payload(pay, 1, 0);
    pay = {8'h01, 8'h02, 8'h03};
    build_frame(MAC_BCAST, 48'h02CA_11CE_FF00, ETHERTYPE, pay, fr);
    play(fr);
    expect_payload(pay, 1, 0);
    build_frame(48'h02CA_11CE_0009, 48'h02CA_11CE_FF00, ETHERTYPE, pay, fr);
    play(fr);
    none = {};
    checks++; if (got.size() != 0) begin failures++; $display("FAIL foreign MAC accepted"); end
    build_frame(ME, 48'h02CA_11CE_FF00, 16'h0800, pay, fr);
    play(fr);
    checks++; if (got.size() != 0) begin failures++; $display("FAIL wrong EtherType accepted"); end
    pay = {};
    for (int i = 0; i < 60; i++) pay.push_back(8'($urandom));
    build_frame(ME, 48'h02CA_11CE_FF00, ETHERTYPE, pay, fr);
    play(fr, 30);
    checks++; if (errs != 1 || lasts != 1) begin failures++; $display("FAIL corrupted frame not flagged"); end
    got = {}; lasts = 0; errs = 0;
    checks++; if (fok != 2 || fbad != 1) begin failures++; $display("FAIL counters ok=%0d bad=%0d", fok, fbad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
