// tb_ccc_control: the control PC is modelled by a UART transmitter task
// (CLKS_PER_BIT = 8), the LDAs by clock-coded busy lines. Checks: 'M'/'I'
// set clk_sel; an external trigger is ignored before 'R' and, after it,
// reaches all 8 outputs as a 1-clock pulse within 6 clocks of the pin;
// 'S', 'B', 'E' give pulses of 2, 3 and 4 clocks; 'T' gives a trigger; while
// one LDA signals busy, triggers are vetoed and counted; 'X' stops the run.
module tb_ccc_control;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 8, CPB = 8;
  logic urx = 1, ext = 0;
  logic [N-1:0] busy_line = '1, fast_out;
  logic clk_sel, run, busy_any;
  logic [15:0] sent, veto;

  ccc_control #(.N_OUT(N), .CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .uart_rx(urx), .ext_trig(ext), .busy_line,
    .fast_out, .clk_sel, .run, .busy_any, .trig_sent(sent), .trig_veto(veto));

  int widths[$], hi = 0, out_mismatch = 0;
  always @(posedge clk) if (rst_n) begin
    if (fast_out != '0 && fast_out != '1) out_mismatch++;
    if (fast_out[0]) hi++;
    else if (hi) begin widths.push_back(hi); hi = 0; end
  end

  task automatic uart(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin urx = f[i]; repeat (CPB) @(negedge clk); end
    urx = 1; repeat (CPB * 2) @(negedge clk);
  endtask

  initial begin
    int t0, dt;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    uart("M");
    checks++; if (!clk_sel) begin failures++; $display("FAIL clk_sel M"); end
    uart("I");
    checks++; if (clk_sel) begin failures++; $display("FAIL clk_sel I"); end
    ext = 1; repeat (5) @(negedge clk); ext = 0; repeat (10) @(negedge clk);
    checks++; if (widths.size() != 0) begin failures++; $display("FAIL trigger outside run"); end
    uart("R");
    checks++; if (!run) begin failures++; $display("FAIL run"); end
    ext = 1; t0 = 0; dt = -1;
    for (int c = 1; c < 20; c++) begin @(negedge clk); if (fast_out[0] && dt < 0) dt = c; end
    ext = 0;
    checks++; if (dt < 0 || dt > 6) begin failures++; $display("FAIL trigger latency %0d", dt); end
    repeat (10) @(negedge clk);
    uart("S"); uart("B"); uart("E"); uart("T");
    repeat (10) @(negedge clk);
    checks++;
    if (widths != '{1, 2, 3, 4, 1}) begin failures++; $display("FAIL widths"); foreach (widths[i]) $display("  %0d", widths[i]); end
    // busy from LDA 5 vetoes triggers
    fork
      repeat (60) begin @(negedge clk); busy_line[5] = ~busy_line[5]; end
      begin
        repeat (10) @(negedge clk);
        checks++; if (!busy_any) begin failures++; $display("FAIL busy not seen"); end
        ext = 1; repeat (4) @(negedge clk); ext = 0;
      end
    join
    busy_line[5] = 1;
    repeat (20) @(negedge clk);
    checks++; if (veto != 1 || sent != 2 || widths.size() != 5) begin failures++; $display("FAIL veto=%0d sent=%0d", veto, sent); end
    checks++; if (busy_any) begin failures++; $display("FAIL busy stuck"); end
    uart("X");
    ext = 1; repeat (4) @(negedge clk); ext = 0; repeat (10) @(negedge clk);
    checks++; if (run || sent != 2) begin failures++; $display("FAIL stop run"); end
    checks++; if (out_mismatch) begin failures++; $display("FAIL outputs differ"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
