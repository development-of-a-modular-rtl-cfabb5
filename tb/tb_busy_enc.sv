// tb_busy_enc: while busy is high the line must toggle every clock with the
// driver on; after busy falls the driver must be off and the line still.
module tb_busy_enc;
  logic clk = 0, rst_n = 0, busy = 0, line, oe;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  busy_enc #(.HALF(1)) dut (.clk, .rst_n, .busy, .line, .oe);
  initial begin
    logic prev;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    checks++; if (oe) begin failures++; $display("FAIL driven while not busy"); end
    busy = 1;
    @(negedge clk); @(negedge clk);
    prev = line;
    repeat (20) begin
      @(negedge clk);
      checks++;
      if (!oe || line == prev) begin failures++; $display("FAIL no toggle oe=%b", oe); end
      prev = line;
    end
    busy = 0;
    @(negedge clk); @(negedge clk);
    prev = line;
    repeat (10) begin
      @(negedge clk);
      checks++;
      if (oe || line != prev) begin failures++; $display("FAIL line active after busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
