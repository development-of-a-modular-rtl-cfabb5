// tb_fast_enc: each fast command must appear as one high pulse of its coded
// width (1 trigger, 2 sync, 3 train start, 4 train end), starting the clock
// after it is accepted, with at least two low clocks before the next.
module tb_fast_enc;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, line;
  fast_cmd_t cmd = FC_NONE;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  fast_enc dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .line);

  int widths[$], gaps[$];
  int hi = 0, lo = 0;
  always @(posedge clk) if (rst_n) begin
    if (line) begin
      if (lo > 0 && widths.size() > 0) gaps.push_back(lo);
      lo = 0; hi++;
    end else begin
      if (hi > 0) widths.push_back(hi);
      hi = 0; lo++;
    end
  end

  fast_cmd_t seq[6] = '{FC_TRIG, FC_SYNC, FC_TRAIN_START, FC_TRAIN_END, FC_TRIG, FC_TRIG};
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (seq[i]) begin
      @(negedge clk);
      cmd_valid = 1; cmd = seq[i];
      while (!cmd_ready) @(negedge clk);
      @(posedge clk);
      #1 checks++;
      if (!line) begin failures++; $display("FAIL line not high the clock after acceptance"); end
    end
    @(negedge clk); cmd_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (widths.size() != 6) begin failures++; $display("FAIL %0d pulses", widths.size()); end
    else foreach (seq[i]) begin
      checks++;
      if (widths[i] != int'(seq[i])) begin failures++; $display("FAIL pulse %0d width %0d", i, widths[i]); end
    end
    foreach (gaps[i]) begin
      checks++;
      if (gaps[i] < FC_GAP) begin failures++; $display("FAIL gap %0d", gaps[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
