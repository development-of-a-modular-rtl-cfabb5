// tb_pkt_fifo: store-and-forward FIFO with unrelated write (10 ns) and read
// (7 ns) clocks. Checks: nothing is readable while a packet is only partly
// written; 30 random packets come out whole, in order, with their err flags;
// a packet larger than the memory is cut, flagged and counted in drop_cnt,
// and the packet after it is intact. DEPTH is reduced to 64 for the test.
module tb_pkt_fifo;
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #5 wclk = ~wclk;
  always #3.5 rclk = ~rclk;
  int checks = 0, failures = 0;

  logic       w_valid = 0, w_last = 0, w_err = 0, w_ready;
  logic [7:0] w_data = 0;
  logic       r_valid, r_last, r_err, r_ready = 0;
  logic [7:0] r_data;
  logic [15:0] drop_cnt;

  pkt_fifo #(.DW(8), .DEPTH(64)) dut (.wclk, .wrst_n(rst_n), .w_valid, .w_data, .w_last, .w_err, .w_ready, .drop_cnt,
                                      .rclk, .rrst_n(rst_n), .r_valid, .r_data, .r_last, .r_err, .r_ready);

  logic [9:0] exp_q[$];   // {err, last, data}
  int got = 0, pkts = 0, bad_pkts = 0;

  always @(posedge rclk) if (r_valid && r_ready) begin
    logic [9:0] e;
    checks++;
    e = exp_q.size() ? exp_q.pop_front() : 10'h3FF;
    if ({r_err, r_last, r_data} !== e) begin failures++; $display("FAIL read %b exp %b", {r_err, r_last, r_data}, e); end
    if (r_last) pkts++;
    if (r_last && r_err) bad_pkts++;
  end

  task automatic wr(input logic [7:0] d, input logic l, input logic e);
    @(negedge wclk);
    w_valid = 1; w_data = d; w_last = l; w_err = e;
    @(negedge wclk);
    w_valid = 0; w_last = 0; w_err = 0;
  endtask

  initial begin
    repeat (3) @(posedge wclk);
    rst_n = 1;
    repeat (3) @(posedge wclk);
    // partial packet: must not be visible
    for (int i = 0; i < 5; i++) wr(8'(i), 0, 0);
    repeat (20) @(posedge rclk);
    checks++; if (r_valid) begin failures++; $display("FAIL partial packet visible"); end
    for (int i = 0; i < 5; i++) exp_q.push_back({2'b00, 8'(i)});
    exp_q.push_back({2'b01, 8'hA5});
    wr(8'hA5, 1, 0);
    repeat (6) @(posedge rclk);
    checks++; if (!r_valid) begin failures++; $display("FAIL complete packet not visible"); end
    r_ready = 1;
    // random packets, reader always ready
    for (int p = 0; p < 30; p++) begin
      int n;
      logic e;
      n = 1 + $urandom % 20;
      e = ($urandom % 4 == 0);
      for (int i = 0; i < n; i++) begin
        logic [7:0] d;
        d = 8'($urandom);
        exp_q.push_back({e && (i == n - 1), i == n - 1, d});
        wr(d, i == n - 1, e && (i == n - 1));
      end
    end
    repeat (40) @(posedge rclk);
    checks++; if (pkts != 31 || exp_q.size() != 0) begin failures++; $display("FAIL %0d packets, %0d left", pkts, exp_q.size()); end
    // overflow: reader stopped, 100-byte packet into 64 entries
    r_ready = 0;
    for (int i = 0; i < 100; i++) begin
      if (i < 64) exp_q.push_back({i == 63, i == 63, 8'(i)});
      wr(8'(i), i == 99, 0);
    end
    checks++; if (drop_cnt != 1) begin failures++; $display("FAIL drop_cnt %0d", drop_cnt); end
    r_ready = 1;
    repeat (100) @(posedge rclk);
    for (int i = 0; i < 4; i++) begin
      exp_q.push_back({1'b0, i == 3, 8'(8'h40 + i)});
      wr(8'(8'h40 + i), i == 3, 0);
    end
    repeat (20) @(posedge rclk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL after overflow %0d left", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
