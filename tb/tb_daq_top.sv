// tb_daq_top: end-to-end test of the readout chain at reduced size (2 LDAs of
// 4 DIFs, small buffers, fast UART). Every mechanism of the design is made to
// happen at least once and counted; a mechanism that never happens is a
// failure. Mechanisms:
//   data       front-end data reach the host as {port, link, {DATA,dif}, data}
//   echo       a host command to one DIF comes back as its echo
//   bcast      a command for all DIFs of an LDA reaches every one of them
//   run        'R' over RS232 starts a run
//   ext_trig   an external trigger reaches trig_out of every DIF
//   sw_trig    'T' over RS232 reaches trig_out of every DIF
//   sync       'S' restarts every DIF's slow clock in phase
//   train      'B' gives train_start at every DIF
//   pwr_pulse  with power pulsing on, ASIC power is on only in the train
//   veto       ASIC memory full at one DIF makes busy reach the CCC and a
//              trigger is vetoed
//   buf_busy   a DIF whose link is cut fills its buffer and raises busy
//   link_loss  a cut cable takes the link down at both ends
//   redundancy data of a DIF with a cut cable arrive through its neighbour
//   clk_sel    'M'/'I' switch the CCC clock selection
//   backpress  the host holds the stream and nothing is lost
// Every host packet must match an expected one (except those of the DIF
// whose buffer was overrun on purpose), and every expected one must arrive.
module tb_daq_top;
  import daq_pkg::*;
  localparam int NL = 2, ND = 4, CPB = 8, MB = 40;
  logic clk = 0, clk_eth = 0, clk_host = 0, rst_n = 0;
  always #10 clk = ~clk;
  always #4 clk_eth = ~clk_eth;
  always #2.5 clk_host = ~clk_host;
  int checks = 0, failures = 0;

  logic uart = 1, ext_trig = 0;
  logic clk_sel, run, ccc_busy;
  logic [15:0] trig_sent, trig_veto;
  logic [N_CCC_OUT-NL-1:0] spare;
  logic [NL-1:0][ND-1:0] fe_valid = '0, fe_last = '0, ram_full = '0, cable_ok = '1;
  logic [NL-1:0][ND-1:0][7:0] fe_data = '0;
  logic [NL-1:0][ND-1:0] slowclk, train_start, trig_out, pwr, dif_up, via_nb, lda_up;
  logic ho_valid, ho_last, ho_err, ho_ready = 1;
  logic [7:0] ho_data;
  logic hi_valid = 0, hi_last = 0, hi_ready;
  logic [7:0] hi_data = '0;
  logic [1:0] hi_port = '0;

  daq_top #(.N_LDA(NL), .N_DIF(ND), .DIF_DEPTH(256), .UP_DEPTH(512), .MAX_BLOCK(MB), .CLKS_PER_BIT(CPB)) dut (
    .clk, .clk_eth, .clk_host, .rst_n, .uart_rx(uart), .ext_trig, .clk_sel, .run, .ccc_busy, .trig_sent,
    .trig_veto, .ccc_spare_fast(spare), .fe_valid, .fe_data, .fe_last, .ram_full, .cable_ok, .slowclk,
    .train_start, .trig_out, .asic_pwr_on(pwr), .dif_link_up(dif_up), .dif_via_neighbour(via_nb),
    .lda_link_up(lda_up), .host_out_valid(ho_valid), .host_out_data(ho_data), .host_out_last(ho_last),
    .host_out_err(ho_err), .host_out_ready(ho_ready), .host_in_valid(hi_valid), .host_in_data(hi_data),
    .host_in_last(hi_last), .host_in_port(hi_port), .host_in_ready(hi_ready));

  // ---------------- mechanism counters
  typedef enum int {M_DATA, M_ECHO, M_BCAST, M_RUN, M_EXT_TRIG, M_SW_TRIG, M_SYNC, M_TRAIN, M_PWR_PULSE,
                    M_VETO, M_BUF_BUSY, M_LINK_LOSS, M_REDUND, M_CLK_SEL, M_BACKPRESS, M_NUM} mech_t;
  int mech[M_NUM];

  // ---------------- host stream scoreboard
  logic [7:0] exp_pk[$][$];
  int overrun_pkts = 0;
  bit overrun_phase = 0;
  logic [7:0] hcur[$];
  always @(negedge clk_host) ho_ready = ($urandom_range(0, 4) != 0);
  always @(posedge clk_host) if (rst_n) begin
    if (ho_valid && !ho_ready) mech[M_BACKPRESS]++;
    if (ho_valid && ho_ready) begin
      hcur.push_back(ho_data);
      if (ho_last) begin
        take_packet(hcur, ho_err);
        hcur = {};
      end
    end
  end

  // a host packet is {port, link, payload...}, padded with zeros to 47 bytes
  function automatic bit pk_match(input logic [7:0] got[$], input logic [7:0] e[$]);
    if (got.size() < e.size()) return 0;
    if (got.size() > e.size() && got.size() != 47) return 0;
    foreach (got[k]) if (got[k] != (k < e.size() ? e[k] : 8'h00)) return 0;
    return 1;
  endfunction

  function automatic void take_packet(input logic [7:0] got[$], input logic err);
    int hit = -1;
    if (overrun_phase && got.size() >= 2 && got[0] == 8'd1 && got[1] == 8'd3) begin
      overrun_pkts++;
      return;
    end
    foreach (exp_pk[i]) if (hit < 0 && pk_match(got, exp_pk[i])) hit = i;
    checks++;
    if (hit < 0 || err) begin
      failures++;
      $display("FAIL unexpected host packet (%0d bytes, port %0d link %0d hdr %h err %0d)", got.size(),
               got[0], got[1], got[2], err);
      return;
    end
    if (exp_pk[hit][2][7:6] == PT_DATA) mech[M_DATA]++;
    if (exp_pk[hit][2][7:6] == PT_DATA && exp_pk[hit][1] != {2'b00, exp_pk[hit][2][5:0]}) mech[M_REDUND]++;
    exp_pk.delete(hit);
  endfunction

  // ---------------- trigger, train and slow clock monitors
  int trig_cnt[NL][ND], start_cnt[NL][ND];
  always @(posedge clk) if (rst_n) for (int l = 0; l < NL; l++) for (int d = 0; d < ND; d++) begin
    if (trig_out[l][d]) trig_cnt[l][d]++;
    if (train_start[l][d]) start_cnt[l][d]++;
  end
  // free-running copy of the slow-clock divider, never synchronised
  int ref_div = 0;
  always @(posedge clk) if (rst_n) ref_div <= (ref_div == 9) ? 0 : ref_div + 1;

  // ---------------- stimulus helpers
  task automatic uart_send(input logic [7:0] b);
    @(negedge clk);
    uart = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin uart = b[i]; repeat (CPB) @(negedge clk); end
    uart = 1; repeat (2 * CPB) @(negedge clk);
  endtask

  // sends control packet [target, length, command bytes] to the LDA on a port
  task automatic host_cmd(input int port, input logic [7:0] tgt, input logic [7:0] c[$]);
    logic [7:0] b[$];
    b = {};
    b.push_back(tgt);
    b.push_back(8'(c.size()));
    foreach (c[k]) b.push_back(c[k]);
    @(negedge clk_host);
    hi_port = 2'(port);
    foreach (b[k]) begin
      hi_valid = 1; hi_data = b[k]; hi_last = (k == b.size() - 1);
      @(negedge clk_host);
      while (!hi_ready) @(negedge clk_host);
    end
    hi_valid = 0; hi_last = 0;
  endtask

  task automatic fe_block(input int l, input int d, input int n, input bit expect_it, input int via);
    logic [7:0] e[$];
    logic [7:0] b;
    e = {8'(l), 8'(via)};
    e.push_back({PT_DATA, 6'(d)});
    for (int k = 0; k < n; k++) begin
      b = 8'($urandom);
      e.push_back(b);
      @(negedge clk);
      fe_valid[l][d] = 1; fe_data[l][d] = b; fe_last[l][d] = (k == n - 1);
      @(negedge clk);
      fe_valid[l][d] = 0; fe_last[l][d] = 0;
      repeat (10) @(negedge clk);
    end
    if (expect_it) exp_pk.push_back(e);
  endtask

  function automatic logic [7:0] q_echo(input int l, input int d, input logic [7:0] c[$], output logic [7:0] e[$]);
    e = {8'(l), 8'(d)};
    e.push_back({PT_ECHO, 6'(d)});
    foreach (c[k]) e.push_back(c[k]);
    return 8'(c.size());
  endfunction

  task automatic wait_clk(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- the scenario
  initial begin
    logic [7:0] c[$], e[$];
    int t0[NL][ND];
    int v0, ts0;
    bit all;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait_clk(300);
    check(dif_up == '1 && lda_up == '1, "links up after reset");

    // data from every DIF
    for (int l = 0; l < NL; l++)
      for (int d = 0; d < ND; d++)
        fork
          automatic int ll = l, dd = d;
          fe_block(ll, dd, 5 + 7 * dd + ll, 1, dd);
        join_none
    wait fork;
    wait_clk(2000);

    // echo to one DIF, then a broadcast echo to all DIFs of LDA 1
    c = {};
    c.push_back(OP_ECHO); c.push_back(8'hA5); c.push_back(8'h5A); c.push_back(8'h3C);
    void'(q_echo(0, 2, c, e)); exp_pk.push_back(e);
    host_cmd(0, 8'd2, c);
    wait_clk(1500);
    if (exp_pk.size() == 0) mech[M_ECHO]++;
    c = {};
    c.push_back(OP_ECHO); c.push_back(8'h99);
    for (int d = 0; d < ND; d++) begin void'(q_echo(1, d, c, e)); exp_pk.push_back(e); end
    host_cmd(1, TGT_ALL_DIF, c);
    wait_clk(2000);
    if (exp_pk.size() == 0) mech[M_BCAST]++;
    check(exp_pk.size() == 0, "all data and echo packets arrived");

    // power pulsing on at every DIF (broadcast to both LDAs)
    c = {};
    c.push_back(OP_SET_MODE); c.push_back(8'h01);
    host_cmd(0, TGT_ALL_DIF, c);
    host_cmd(1, TGT_ALL_DIF, c);
    wait_clk(1000);
    check(pwr == '0, "ASIC power off between trains");

    // run control and triggers
    uart_send("R");
    wait_clk(5);
    if (run) mech[M_RUN]++;
    check(run, "run started");
    for (int l = 0; l < NL; l++) for (int d = 0; d < ND; d++) t0[l][d] = trig_cnt[l][d];
    @(negedge clk); ext_trig = 1; wait_clk(3); ext_trig = 0;
    wait_clk(30);
    all = 1;
    for (int l = 0; l < NL; l++) for (int d = 0; d < ND; d++) if (trig_cnt[l][d] != t0[l][d] + 1) all = 0;
    if (all) mech[M_EXT_TRIG]++;
    check(all, "external trigger at every DIF");
    uart_send("T");
    wait_clk(30);
    all = 1;
    for (int l = 0; l < NL; l++) for (int d = 0; d < ND; d++) if (trig_cnt[l][d] != t0[l][d] + 2) all = 0;
    if (all) mech[M_SW_TRIG]++;
    check(all && trig_sent == 2, "software trigger at every DIF");

    // sync: slow clocks restart together, away from the free-running phase
    wait_clk(3);
    uart_send("S");
    wait_clk(40);
    all = 1;
    for (int l = 0; l < NL; l++) for (int d = 0; d < ND; d++) if (slowclk[l][d] != slowclk[0][0]) all = 0;
    begin
      bit moved = 0;
      for (int k = 0; k < 10; k++) begin
        @(negedge clk);
        if (slowclk[0][0] != (ref_div < 5)) moved = 1;
      end
      if (all && moved) mech[M_SYNC]++;
      check(all && moved, "sync restarts the slow clocks in phase");
    end

    // bunch train with power pulsing
    uart_send("B");
    wait_clk(30);
    all = 1;
    for (int l = 0; l < NL; l++) for (int d = 0; d < ND; d++) if (start_cnt[l][d] != 1) all = 0;
    if (all) mech[M_TRAIN]++;
    check(all && pwr == '1, "train start at every DIF, ASICs powered");
    uart_send("E");
    wait_clk(30);
    if (all && pwr == '0) mech[M_PWR_PULSE]++;
    check(pwr == '0, "ASICs powered down after the train");

    // busy veto from a full ASIC memory
    ram_full[1][2] = 1;
    wait_clk(40);
    check(ccc_busy, "busy reaches the CCC");
    v0 = trig_veto; ts0 = trig_sent;
    @(negedge clk); ext_trig = 1; wait_clk(3); ext_trig = 0;
    wait_clk(30);
    if (trig_veto == v0 + 1 && trig_sent == ts0) mech[M_VETO]++;
    check(trig_veto == v0 + 1 && trig_sent == ts0 && trig_cnt[0][0] == t0[0][0] + 2, "trigger vetoed while busy");
    ram_full[1][2] = 0;
    wait_clk(60);
    check(!ccc_busy, "busy released");

    // clock selection
    uart_send("M");
    wait_clk(3);
    if (clk_sel) begin uart_send("I"); wait_clk(3); if (!clk_sel) mech[M_CLK_SEL]++; end
    check(mech[M_CLK_SEL] == 1, "clock selection");

    // redundancy: DIF 0 of LDA 0 in redundant mode, its cable cut
    c = {};
    c.push_back(OP_SET_MODE); c.push_back(8'h03);
    host_cmd(0, 8'd0, c);
    wait_clk(1000);
    cable_ok[0][0] = 0;
    wait_clk(300);
    if (!lda_up[0][0] && !dif_up[0][0]) mech[M_LINK_LOSS]++;
    check(!lda_up[0][0] && !dif_up[0][0], "link loss seen at both ends");
    fe_block(0, 0, 17, 1, 1);
    wait_clk(1500);
    check(via_nb[0][0], "DIF routes through its neighbour");
    cable_ok[0][0] = 1;
    wait_clk(300);
    fe_block(0, 0, 9, 1, 0);
    wait_clk(1500);
    check(exp_pk.size() == 0, "redundant and restored packets arrived");

    // buffer overrun: DIF 3 of LDA 1 without redundancy, cable cut
    overrun_phase = 1;
    cable_ok[1][3] = 0;
    wait_clk(300);
    fork
      begin
        for (int k = 0; k < 8; k++) fe_block(1, 3, MB, 0, 3);
      end
      begin
        @(posedge ccc_busy);
        mech[M_BUF_BUSY]++;
      end
    join_any
    wait_clk(100);
    check(mech[M_BUF_BUSY] == 1, "full DIF buffer raises busy");
    disable fork;
    cable_ok[1][3] = 1;
    wait_clk(8000);
    check(!ccc_busy, "busy clears once the buffer drains");
    check(overrun_pkts >= 5, "overrun DIF's buffered packets delivered");

    wait_clk(500);
    check(exp_pk.size() == 0, "no expected packet missing");
    for (int m = 0; m < M_NUM; m++) begin
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism %s never happened", mech_t'(m)); end
      else $display("mechanism %-12s %0d", mech_t'(m), mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000000; failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
