// tb_lda_dif_signals: the fast line must reach all 10 outputs one clock later;
// the combined busy must follow any one DIF's clock-coded busy (and only then
// toggle the line to the CCC with the driver on), and return to not-busy, with
// the driver off, when that DIF stops.
module tb_lda_dif_signals;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 10;
  logic fast_in = 0;
  logic [N-1:0] fast_out, busy_in = '0, dif_busy;
  logic busy_any, cl, coe;
  lda_dif_signals #(.N_DIF(N)) dut (.clk, .rst_n, .fast_in, .fast_out, .busy_line_in(busy_in), .dif_busy,
                                    .busy_any, .ccc_busy_line(cl), .ccc_busy_oe(coe));
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    fast_in = 1;
    @(negedge clk);
    checks++; if (fast_out != '1) begin failures++; $display("FAIL fan-out %b", fast_out); end
    fast_in = 0;
    @(negedge clk);
    checks++; if (fast_out != '0) begin failures++; $display("FAIL fan-out low %b", fast_out); end
    checks++; if (busy_any || coe) begin failures++; $display("FAIL busy while idle"); end
    repeat (12) begin @(negedge clk); busy_in[7] = ~busy_in[7]; end
    checks++; if (!busy_any || dif_busy != 10'(1 << 7)) begin failures++; $display("FAIL busy not combined %b", dif_busy); end
    repeat (3) @(negedge clk);
    checks++; if (!coe) begin failures++; $display("FAIL busy not sent to CCC"); end
    busy_in[7] = 0;
    repeat (20) @(negedge clk);
    checks++; if (busy_any || coe) begin failures++; $display("FAIL busy stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
