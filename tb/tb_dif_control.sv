// tb_dif_control: an ECHO command packet must be copied whole to the echo
// output; SET_MODE must set pp_en and redund_en, but not when the packet
// ends with an error; front-end data of 25 bytes with MAX_BLOCK = 10 must be
// cut into blocks of 10, 10 and 5 bytes (the last closed by fe_last), with the
// data unchanged.
module tb_dif_control;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cmd_valid = 0, cmd_last = 0, cmd_err = 0, fe_valid = 0, fe_last = 0;
  logic [7:0] cmd_data = 0, fe_data = 0;
  logic blk_valid, blk_last, echo_valid, echo_last, echo_err, pp_en, redund_en;
  logic [7:0] blk_data, echo_data;
  logic [15:0] blocks;

  dif_control #(.MAX_BLOCK(10)) dut (.clk, .rst_n, .cmd_valid, .cmd_data, .cmd_last, .cmd_err, .fe_valid, .fe_data, .fe_last,
    .blk_valid, .blk_data, .blk_last, .echo_valid, .echo_data, .echo_last, .echo_err, .pp_en, .redund_en, .blocks);

  logic [7:0] echo_got[$], blk_got[$];
  int blk_lens[$], cur = 0, echo_lasts = 0;
  always @(posedge clk) if (rst_n) begin
    if (echo_valid) begin echo_got.push_back(echo_data); if (echo_last) echo_lasts++; end
    if (blk_valid) begin
      blk_got.push_back(blk_data); cur++;
      if (blk_last) begin blk_lens.push_back(cur); cur = 0; end
    end
  end

  task automatic cmd(input logic [7:0] b[$], input logic e);
    foreach (b[i]) begin
      @(negedge clk);
      cmd_valid = 1; cmd_data = b[i]; cmd_last = (i == b.size() - 1); cmd_err = e && cmd_last;
      @(negedge clk);
      cmd_valid = 0; cmd_last = 0; cmd_err = 0;
      repeat (8) @(negedge clk);   // link rate: one byte per 10 clocks
    end
  endtask

  initial begin
    logic [7:0] p[$], fe[$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    p = {OP_ECHO, 8'h11, 8'h22, 8'h33};
    cmd(p, 0);
    checks++; if (echo_got != p || echo_lasts != 1) begin failures++; $display("FAIL echo (%0d bytes)", echo_got.size()); end
    cmd({OP_SET_MODE, 8'h03}, 1);
    checks++; if (pp_en || redund_en) begin failures++; $display("FAIL mode set by bad packet"); end
    cmd({OP_SET_MODE, 8'h03}, 0);
    checks++; if (!pp_en || !redund_en) begin failures++; $display("FAIL mode not set"); end
    cmd({OP_SET_MODE, 8'h02}, 0);
    checks++; if (pp_en || !redund_en) begin failures++; $display("FAIL mode 2"); end
    checks++; if (echo_got.size() != 4) begin failures++; $display("FAIL mode packets echoed"); end
    for (int i = 0; i < 25; i++) fe.push_back(8'($urandom));
    foreach (fe[i]) begin
      @(negedge clk);
      fe_valid = 1; fe_data = fe[i]; fe_last = (i == 24);
      @(negedge clk);
      fe_valid = 0; fe_last = 0;
    end
    @(negedge clk);
    checks++; if (blk_got != fe) begin failures++; $display("FAIL block data"); end
    checks++; if (blk_lens != '{10, 10, 5}) begin failures++; $display("FAIL block lengths"); foreach (blk_lens[i]) $display("  %0d", blk_lens[i]); end
    checks++; if (blocks != 3) begin failures++; $display("FAIL block count %0d", blocks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
