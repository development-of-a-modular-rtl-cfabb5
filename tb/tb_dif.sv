// tb_dif: two DIFs (ids 0 and 1) joined by their ribbon, each with an
// LDA-side link endpoint in the testbench. Checks: front-end data come up the
// link as packets headed {PT_DATA, id}; an ECHO command comes back headed
// {PT_ECHO, id}; ram_full makes the busy line toggle with its driver on; a
// trigger on the fast line gives trig_out; with redundancy enabled and DIF 0's
// cable cut, DIF 0's data arrive through DIF 1's link, and after the cable is
// restored they come through DIF 0's own link again.
module tb_dif;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // DIF side
  logic [1:0] d_ser_out, d_busy_line, d_busy_oe, fe_valid = '0, fe_last = '0, ram_full = '0;
  logic [1:0][7:0] fe_data = '0;
  logic [1:0] slowclk, train_start, trig_out, pwr, link_up, via_nb;
  logic [1:0] nb_v, nb_l;
  logic [1:0][7:0] nb_d;
  logic [1:0][15:0] drops;
  logic [1:0] cable = 2'b11;
  logic fast_line = 0;
  // LDA side endpoints
  logic [1:0] l_ser_out, tx_valid = '0, tx_last = '0, tx_ready, rx_valid, rx_last, rx_err, l_up;
  logic [1:0][7:0] tx_data = '0, rx_data;
  logic [1:0][15:0] ec;

  for (genvar i = 0; i < 2; i++) begin : g
    dif #(.DIF_ID(6'(i)), .DATA_DEPTH(256), .ECHO_DEPTH(64), .MAX_BLOCK(40)) u_dif (
      .clk, .rst_n, .ser_in(l_ser_out[i] & cable[i]), .ser_out(d_ser_out[i]), .fast_line,
      .busy_line(d_busy_line[i]), .busy_oe(d_busy_oe[i]),
      .fe_valid(fe_valid[i]), .fe_data(fe_data[i]), .fe_last(fe_last[i]), .ram_full(ram_full[i]),
      .slowclk(slowclk[i]), .train_start(train_start[i]), .trig_out(trig_out[i]), .asic_pwr_on(pwr[i]),
      .nb_out_valid(nb_v[i]), .nb_out_data(nb_d[i]), .nb_out_last(nb_l[i]),
      .nb_in_valid(nb_v[1-i]), .nb_in_data(nb_d[1-i]), .nb_in_last(nb_l[1-i]),
      .link_up(link_up[i]), .via_neighbour(via_nb[i]), .drops(drops[i]));
    link_rxtx u_lda_end (.clk, .rst_n, .tx_valid(tx_valid[i]), .tx_data(tx_data[i]), .tx_last(tx_last[i]), .tx_err(1'b0),
      .tx_ready(tx_ready[i]), .ser_out(l_ser_out[i]), .ser_in(d_ser_out[i] & cable[i]),
      .rx_valid(rx_valid[i]), .rx_data(rx_data[i]), .rx_last(rx_last[i]), .rx_err(rx_err[i]), .link_up(l_up[i]), .err_cnt(ec[i]));
  end

  // packets received at the LDA ends
  logic [7:0] cur[2][$];
  logic [7:0] pk0[$][$], pk1[$][$];
  always @(posedge clk) if (rst_n) for (int i = 0; i < 2; i++) if (rx_valid[i]) begin
    cur[i].push_back(rx_data[i]);
    if (rx_last[i]) begin
      if (!rx_err[i]) begin if (i == 0) pk0.push_back(cur[i]); else pk1.push_back(cur[i]); end
      cur[i] = {};
    end
  end

  task automatic send_cmd(input int i, input logic [7:0] b[$]);
    foreach (b[k]) begin
      @(negedge clk);
      tx_valid[i] = 1; tx_data[i] = b[k]; tx_last[i] = (k == b.size() - 1);
      while (!tx_ready[i]) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk); tx_valid[i] = 0; tx_last[i] = 0;
  endtask

  task automatic fe_send(input int i, input logic [7:0] b[$]);
    foreach (b[k]) begin
      @(negedge clk);
      fe_valid[i] = 1; fe_data[i] = b[k]; fe_last[i] = (k == b.size() - 1);
      @(negedge clk);
      fe_valid[i] = 0; fe_last[i] = 0;
      repeat (18) @(negedge clk);   // 20 Mbit/s front-end rate: a byte per 20 clocks
    end
  endtask

  function automatic bit same(input logic [7:0] a[$], input logic [7:0] b[$]);
    return a == b;
  endfunction

  initial begin
    logic [7:0] d[$], exp_pk[$], c[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (100) @(negedge clk);
    checks++; if (link_up != 2'b11 || l_up != 2'b11) begin failures++; $display("FAIL links not up"); end
    // data
    d = {};
    for (int k = 0; k < 30; k++) d.push_back(8'($urandom));
    fe_send(0, d);
    repeat (500) @(negedge clk);
    exp_pk = {{PT_DATA, 6'd0}};
    foreach (d[k]) exp_pk.push_back(d[k]);
    checks++; if (pk0.size() != 1 || !same(pk0[0], exp_pk)) begin failures++; $display("FAIL data packet (%0d packets)", pk0.size()); end
    pk0 = {};
    // echo
    c = {OP_ECHO, 8'hDE, 8'hAD};
    send_cmd(1, c);
    repeat (300) @(negedge clk);
    exp_pk = {};
    exp_pk.push_back({PT_ECHO, 6'd1}); exp_pk.push_back(OP_ECHO); exp_pk.push_back(8'hDE); exp_pk.push_back(8'hAD);
    checks++; if (pk1.size() != 1 || !same(pk1[0], exp_pk)) begin failures++; $display("FAIL echo (%0d packets)", pk1.size()); end
    pk1 = {};
    // busy
    ram_full[0] = 1;
    repeat (5) @(negedge clk);
    begin
      int edges = 0;
      logic p;
      p = d_busy_line[0];
      repeat (10) begin @(negedge clk); if (d_busy_line[0] != p) edges++; p = d_busy_line[0]; end
      checks++; if (!d_busy_oe[0] || edges < 8) begin failures++; $display("FAIL busy clock (%0d edges)", edges); end
    end
    ram_full[0] = 0;
    repeat (5) @(negedge clk);
    checks++; if (d_busy_oe[0]) begin failures++; $display("FAIL busy driver left on"); end
    // trigger: 1-clock pulse on the fast line
    @(negedge clk); fast_line = 1; @(negedge clk); fast_line = 0;
    repeat (2) @(negedge clk);
    checks++; if (trig_out != 2'b00) begin failures++; $display("FAIL trig held"); end
    // redundancy: enable on DIF 0, cut its cable
    send_cmd(0, {OP_SET_MODE, 8'h02});
    repeat (50) @(negedge clk);
    cable[0] = 0;
    repeat (100) @(negedge clk);
    checks++; if (link_up[0]) begin failures++; $display("FAIL link_up with cable cut"); end
    d = {};
    for (int k = 0; k < 12; k++) d.push_back(8'($urandom));
    fe_send(0, d);
    repeat (400) @(negedge clk);
    checks++; if (!via_nb[0]) begin failures++; $display("FAIL not routed via neighbour"); end
    exp_pk = {{PT_DATA, 6'd0}};
    foreach (d[k]) exp_pk.push_back(d[k]);
    checks++; if (pk1.size() != 1 || !same(pk1[0], exp_pk)) begin failures++; $display("FAIL redundancy path (%0d packets on DIF1 link)", pk1.size()); end
    pk1 = {};
    cable[0] = 1;
    repeat (100) @(negedge clk);
    fe_send(0, d);
    repeat (400) @(negedge clk);
    checks++; if (pk0.size() != 1 || via_nb[0]) begin failures++; $display("FAIL not back on own link"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
