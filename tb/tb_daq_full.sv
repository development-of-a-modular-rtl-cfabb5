// tb_daq_full: the whole system at its default size (one CCC, 4 LDAs of 10
// DIFs, one ODR, 2048-byte buffers, 115200-baud RS232 at 50 MHz), taken
// through one complete operation: all 40 links come up; a software trigger
// sent over RS232 reaches every DIF; front-end data from the first and the
// last DIF reach the host as {port, link, {DATA, dif}, data}; an echo command
// from the host to DIF 5 of LDA 2 comes back.
module tb_daq_full;
  import daq_pkg::*;
  localparam int NL = N_LDA_PER_ODR, ND = N_DIF_PER_LDA, CPB = 434;
  logic clk = 0, clk_eth = 0, clk_host = 0, rst_n = 0;
  always #10 clk = ~clk;
  always #4 clk_eth = ~clk_eth;
  always #2.5 clk_host = ~clk_host;
  int checks = 0, failures = 0;

  logic uart = 1;
  logic clk_sel, run, ccc_busy;
  logic [15:0] trig_sent, trig_veto;
  logic [N_CCC_OUT-NL-1:0] spare;
  logic [NL-1:0][ND-1:0] fe_valid = '0, fe_last = '0, ram_full = '0, cable_ok = '1;
  logic [NL-1:0][ND-1:0][7:0] fe_data = '0;
  logic [NL-1:0][ND-1:0] slowclk, train_start, trig_out, pwr, dif_up, via_nb, lda_up;
  logic ho_valid, ho_last, ho_err;
  logic [7:0] ho_data;
  logic hi_valid = 0, hi_last = 0, hi_ready;
  logic [7:0] hi_data = '0;
  logic [2:0] hi_port = '0;

  daq_top dut (
    .clk, .clk_eth, .clk_host, .rst_n, .uart_rx(uart), .ext_trig(1'b0), .clk_sel, .run, .ccc_busy, .trig_sent,
    .trig_veto, .ccc_spare_fast(spare), .fe_valid, .fe_data, .fe_last, .ram_full, .cable_ok, .slowclk,
    .train_start, .trig_out, .asic_pwr_on(pwr), .dif_link_up(dif_up), .dif_via_neighbour(via_nb),
    .lda_link_up(lda_up), .host_out_valid(ho_valid), .host_out_data(ho_data), .host_out_last(ho_last),
    .host_out_err(ho_err), .host_out_ready(1'b1), .host_in_valid(hi_valid), .host_in_data(hi_data),
    .host_in_last(hi_last), .host_in_port(hi_port), .host_in_ready(hi_ready));

  logic [7:0] hcur[$];
  logic [7:0] hpk[$][$];
  always @(posedge clk_host) if (rst_n && ho_valid) begin
    hcur.push_back(ho_data);
    if (ho_last) begin hpk.push_back(hcur); hcur = {}; end
  end

  int trig_cnt[NL][ND];
  always @(posedge clk) if (rst_n) for (int l = 0; l < NL; l++) for (int d = 0; d < ND; d++)
    if (trig_out[l][d]) trig_cnt[l][d]++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // host packet must start with e; shorter payloads are zero-padded to 47 bytes
  function automatic bit starts(input logic [7:0] got[$], input logic [7:0] e[$]);
    if (got.size() < e.size()) return 0;
    foreach (e[k]) if (got[k] != e[k]) return 0;
    return 1;
  endfunction

  initial begin
    logic [7:0] e0[$], e1[$], ee[$], b;
    bit all, f0, f1, fe;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (400) @(negedge clk);
    check(dif_up == '1 && lda_up == '1, "all 40 links up");

    // software trigger over RS232, LSB first, 8N1
    @(negedge clk);
    uart = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin b = "T"; uart = b[i]; repeat (CPB) @(negedge clk); end
    uart = 1; repeat (CPB + 50) @(negedge clk);
    all = 1;
    for (int l = 0; l < NL; l++) for (int d = 0; d < ND; d++) if (trig_cnt[l][d] != 1) all = 0;
    check(all && trig_sent == 1, "trigger at every DIF");

    // data from the first and the last DIF
    e0 = {8'd0, 8'd0}; e0.push_back({PT_DATA, 6'd0});
    e1 = {8'(NL - 1), 8'(ND - 1)}; e1.push_back({PT_DATA, 6'(ND - 1)});
    for (int k = 0; k < 60; k++) begin
      @(negedge clk);
      fe_valid[0][0] = 1; fe_valid[NL-1][ND-1] = 1;
      fe_data[0][0] = 8'($urandom); fe_data[NL-1][ND-1] = 8'($urandom);
      fe_last[0][0] = (k == 59); fe_last[NL-1][ND-1] = (k == 59);
      e0.push_back(fe_data[0][0]); e1.push_back(fe_data[NL-1][ND-1]);
      @(negedge clk);
      fe_valid = '0; fe_last = '0;
      repeat (10) @(negedge clk);
    end
    // echo to DIF 5 of LDA 2
    ee = {8'd2, 8'd5}; ee.push_back({PT_ECHO, 6'd5}); ee.push_back(OP_ECHO); ee.push_back(8'h42);
    @(negedge clk_host);
    hi_port = 3'd2;
    hi_valid = 1;
    hi_data = 8'd5; @(negedge clk_host);
    hi_data = 8'd2; @(negedge clk_host);
    hi_data = OP_ECHO; @(negedge clk_host);
    hi_data = 8'h42; hi_last = 1; @(negedge clk_host);
    hi_valid = 0; hi_last = 0;
    repeat (3000) @(negedge clk);
    f0 = 0; f1 = 0; fe = 0;
    foreach (hpk[i]) begin
      if (starts(hpk[i], e0)) f0 = 1;
      if (starts(hpk[i], e1)) f1 = 1;
      if (starts(hpk[i], ee)) fe = 1;
    end
    check(f0, "data of LDA 0 DIF 0 at the host");
    check(f1, "data of LDA 3 DIF 9 at the host");
    check(fe, "echo of LDA 2 DIF 5 at the host");
    check(hpk.size() == 3, "exactly three host packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
