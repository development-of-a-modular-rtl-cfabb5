// tb_fast_dec: pulses of width 1..6 are put on the line; widths 1-4 must give
// exactly one pulse on trig, sync, train_start, train_end respectively, at the
// clock edge that samples the line low again; 5 and 6 must give err.
module tb_fast_dec;
  logic clk = 0, rst_n = 0, line = 0;
  logic trig, sync, train_start, train_end, err;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  fast_dec dut (.clk, .rst_n, .line, .trig, .sync, .train_start, .train_end, .err);
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 1; w <= 6; w++) begin
      logic [4:0] seen;
      int at;
      seen = '0; at = -1;
      @(negedge clk); line = 1;
      repeat (w) @(negedge clk);
      line = 0;
      for (int c = 0; c < 6; c++) begin
        @(negedge clk);
        if ({err, train_end, train_start, sync, trig} != 0 && at < 0) at = c;
        seen |= {err, train_end, train_start, sync, trig};
      end
      checks++;
      if (w <= 4 && seen != 5'(1 << (w - 1))) begin failures++; $display("FAIL width %0d gave %b", w, seen); end
      if (w > 4 && seen != 5'b10000) begin failures++; $display("FAIL width %0d gave %b (want err)", w, seen); end
      checks++;
      if (at != 0) begin failures++; $display("FAIL width %0d decoded %0d clocks after fall", w, at); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
