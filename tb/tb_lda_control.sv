// tb_lda_control: control packets are fed in as from the control FIFO
// (bytes back to back). Checks: a command for DIF 3 comes out once, with mask
// 1<<3, its bytes in order and out_last on the n-th byte, padding dropped,
// the last byte only after the packet ended; a broadcast command has every
// mask bit set; a command in a packet ending with in_err ends with out_err;
// an unknown target produces no output; the counters agree.
module tb_lda_control;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 10;
  logic       in_valid = 0, in_last = 0, in_err = 0, in_ready;
  logic [7:0] in_data = 0;
  logic       out_valid, out_last, out_err;
  logic [7:0] out_data;
  logic [N-1:0] out_mask;
  logic [15:0] fwd, drop;

  lda_control #(.N_DIF(N)) dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .in_err, .in_ready,
                                .out_valid, .out_data, .out_last, .out_err, .out_mask, .pkts_fwd(fwd), .pkts_drop(drop));

  logic [7:0] got[$];
  logic [N-1:0] masks[$];
  int lasts = 0, errs = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    got.push_back(out_data); masks.push_back(out_mask);
    if (out_last) lasts++;
    if (out_err) errs++;
  end

  task automatic feed(input logic [7:0] b[$], input logic e);
    foreach (b[i]) begin
      @(negedge clk);
      in_valid = 1; in_data = b[i]; in_last = (i == b.size() - 1); in_err = e && in_last;
    end
    @(negedge clk); in_valid = 0; in_last = 0; in_err = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    logic [7:0] pkt[$], cmd[$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    cmd = {8'h01, 8'hAA, 8'hBB, 8'hCC};
    pkt = {8'd3, 8'd4};
    foreach (cmd[i]) pkt.push_back(cmd[i]);
    repeat (20) pkt.push_back(8'h00);   // Ethernet padding
    feed(pkt, 0);
    checks++; if (got != cmd) begin failures++; $display("FAIL unicast bytes (%0d)", got.size()); end
    checks++; if (lasts != 1 || errs != 0) begin failures++; $display("FAIL unicast last/err"); end
    foreach (masks[i]) begin checks++; if (masks[i] != 10'(1 << 3)) begin failures++; $display("FAIL mask %b", masks[i]); end end
    got = {}; masks = {}; lasts = 0; errs = 0;
    pkt = {8'hFF, 8'd2, 8'h02, 8'h01};
    feed(pkt, 0);
    checks++; if (got.size() != 2 || masks[0] != '1 || lasts != 1) begin failures++; $display("FAIL broadcast"); end
    got = {}; masks = {}; lasts = 0; errs = 0;
    pkt = {8'd0, 8'd2, 8'h02, 8'h01, 8'h00, 8'h00};
    feed(pkt, 1);
    checks++; if (errs != 1) begin failures++; $display("FAIL error not passed on"); end
    got = {}; masks = {}; lasts = 0; errs = 0;
    pkt = {8'd12, 8'd2, 8'h02, 8'h01};
    feed(pkt, 0);
    checks++; if (got.size() != 0) begin failures++; $display("FAIL unknown target forwarded"); end
    checks++; if (fwd != 2 || drop != 2) begin failures++; $display("FAIL counters fwd=%0d drop=%0d", fwd, drop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
