// tb_busy_dec: the line toggles (busy) or rests at 0 or at 1 (undriven, the
// resting level differing between receivers). busy must be high within 4
// clocks of toggling starting, stay high while it continues, and fall within
// TIMEOUT+4 clocks of the last edge, for either resting level.
module tb_busy_dec;
  logic clk = 0, rst_n = 0, line = 0, busy;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  busy_dec #(.TIMEOUT(8)) dut (.clk, .rst_n, .line, .busy);
  task automatic phase(input logic rest);
    line = rest;
    repeat (20) @(negedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy while resting at %b", rest); end
    repeat (4) begin @(negedge clk); line = ~line; end
    checks++; if (!busy) begin failures++; $display("FAIL busy late"); end
    repeat (40) begin
      @(negedge clk); line = ~line;
      checks++; if (!busy) begin failures++; $display("FAIL busy dropped while toggling"); end
    end
    line = rest;
    repeat (12) @(negedge clk);
    checks++; if (busy) begin failures++; $display("FAIL busy stuck after toggling"); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    phase(1'b0);
    phase(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
