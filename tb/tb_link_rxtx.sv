// tb_link_rxtx: two link endpoints back to back over a serial wire that the
// test can corrupt. Checks: alignment (link_up), every byte and packet end of
// 20 random packets arrive in order, the payload rate of one byte per 10
// clocks, a bit error inside a packet gives rx_err, a packet sent with
// tx_err arrives with rx_err, and loss of the line drops link_up.
module tb_link_rxtx;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       tx_valid = 0, tx_last = 0, tx_err = 0, tx_ready;
  logic [7:0] tx_data = 0;
  logic       a_ser, b_ser_in, flip = 0, cut = 0;
  logic       b_rx_valid, b_rx_last, b_rx_err, b_up, a_up;
  logic [7:0] b_rx_data;
  logic       a_rx_valid, a_rx_last, a_rx_err, b_ser;
  logic [7:0] a_rx_data;
  logic [15:0] a_ec, b_ec;

  link_rxtx a (.clk, .rst_n, .tx_valid, .tx_data, .tx_last, .tx_err, .tx_ready, .ser_out(a_ser),
               .ser_in(b_ser), .rx_valid(a_rx_valid), .rx_data(a_rx_data), .rx_last(a_rx_last), .rx_err(a_rx_err),
               .link_up(a_up), .err_cnt(a_ec));
  link_rxtx b (.clk, .rst_n, .tx_valid(1'b0), .tx_data(8'h00), .tx_last(1'b0), .tx_err(1'b0), .tx_ready(),
               .ser_out(b_ser), .ser_in(b_ser_in), .rx_valid(b_rx_valid), .rx_data(b_rx_data), .rx_last(b_rx_last),
               .rx_err(b_rx_err), .link_up(b_up), .err_cnt(b_ec));

  assign b_ser_in = cut ? 1'b0 : (a_ser ^ flip);

  logic [7:0] exp_q[$];
  int         last_pos[$];
  bit         checking = 1;
  int         rx_count = 0, pkts_rx = 0, errs_rx = 0;
  longint     t_first, t_last;

  always @(posedge clk) if (b_rx_valid) begin
    if (rx_count == 0) t_first = $time;
    t_last = $time;
    rx_count++;
    if (b_rx_err) errs_rx++;
    else if (checking) begin
      checks++;
      if (exp_q.size() == 0 || b_rx_data !== exp_q[0]) begin
        failures++; $display("FAIL data %h exp %h", b_rx_data, exp_q.size() ? exp_q[0] : 8'h00);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
      if (last_pos.size()) begin
        checks++;
        if (b_rx_last !== (last_pos[0] == 1)) begin failures++; $display("FAIL last flag"); end
        if (last_pos[0] == 1) void'(last_pos.pop_front()); else last_pos[0]--;
      end
    end
    if (b_rx_last) pkts_rx++;
  end

  // drive on the falling edge; a byte is taken at the rising edge where tx_ready is high
  task automatic send(input int n, input logic err = 0, input bit record = 1);
    if (record) last_pos.push_back(n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      tx_valid = 1; tx_data = 8'($urandom); tx_last = (i == n - 1); tx_err = err && (i == n - 1);
      while (!tx_ready) @(negedge clk);
      if (record) exp_q.push_back(tx_data);
      @(posedge clk);
    end
    @(negedge clk);
    tx_valid = 0; tx_last = 0; tx_err = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (60) @(posedge clk);
    checks++; if (!b_up || !a_up) begin failures++; $display("FAIL link not up"); end
    // random packets
    for (int p = 0; p < 20; p++) send(1 + $urandom % 40);
    repeat (100) @(posedge clk);
    checks++; if (pkts_rx != 20) begin failures++; $display("FAIL packets %0d", pkts_rx); end
    // rate: a 200-byte packet's bytes arrive 10 clocks apart
    rx_count = 0;
    send(200);
    repeat (100) @(posedge clk);
    checks++;
    if ((t_last - t_first) / 10 != 199 * 10) begin failures++; $display("FAIL rate: %0d clocks for 199 byte gaps", (t_last - t_first) / 10); end
    // bit error inside a packet
    errs_rx = 0;
    checking = 0;
    fork
      send(30, 0, 0);
      begin repeat (150) @(posedge clk); flip = 1; @(posedge clk); flip = 0; end
    join
    repeat (100) @(posedge clk);
    checks++; if (errs_rx == 0) begin failures++; $display("FAIL bit error not flagged"); end
    // sender-marked error
    repeat (40) @(posedge clk);
    errs_rx = 0;
    send(5, 1, 0);
    repeat (60) @(posedge clk);
    checks++; if (errs_rx != 1) begin failures++; $display("FAIL tx_err not flagged (%0d)", errs_rx); end
    // a clean packet after the errors still arrives
    exp_q = {}; last_pos = {};
    checking = 1;
    send(7);
    repeat (100) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL packet after errors"); end
    // cable cut
    cut = 1;
    repeat (80) @(posedge clk);
    checks++; if (b_up) begin failures++; $display("FAIL link_up with line cut"); end
    cut = 0;
    repeat (80) @(posedge clk);
    checks++; if (!b_up) begin failures++; $display("FAIL link not recovered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
