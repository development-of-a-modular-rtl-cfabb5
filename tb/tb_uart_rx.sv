// tb_uart_rx: sends 20 random bytes as 8N1 frames at CLKS_PER_BIT = 16 with
// idle time between them and one frame with a bad stop bit; every good byte
// must appear once on valid/data and the bad one must raise frame_err only.
module tb_uart_rx;
  logic clk = 0, rst_n = 0, rx = 1, valid, frame_err;
  logic [7:0] data;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int CPB = 16;
  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rx, .valid, .data, .frame_err);
  logic [7:0] exp_q[$];
  int ferr = 0;
  always @(posedge clk) if (rst_n) begin
    if (valid) begin
      checks++;
      if (exp_q.size() == 0 || data !== exp_q[0]) begin failures++; $display("FAIL byte %h exp %h left %0d", data, exp_q.size() ? exp_q[0] : 8'h00, exp_q.size()); end
      if (exp_q.size()) void'(exp_q.pop_front());
    end
    if (frame_err) ferr++;
  end
  task automatic send(input logic [7:0] b, input logic stop = 1);
    logic [9:0] f;
    f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin rx = f[i]; repeat (CPB) @(negedge clk); end
    rx = 1; repeat (CPB * 2) @(negedge clk);
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    for (int i = 0; i < 20; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      exp_q.push_back(b);
      send(b);
    end
    send(8'h55, 0);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d bytes missing", exp_q.size()); end
    checks++; if (ferr != 1) begin failures++; $display("FAIL frame errors %0d", ferr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
