// tb_enc_8b10b: checks the 8b/10b encoder against code groups of the standard
// tables typed in by hand, and checks DC balance and run length on a long
// random stream (no more than five equal bits in a row, running disparity
// bounded, every group of disparity 0 or +-2 of the right sign).
module tb_enc_8b10b;
  logic [7:0] din;
  logic       k, rd_in, rd_out;
  logic [9:0] dout;
  int checks = 0, failures = 0;

  enc_8b10b dut (.din, .k, .rd_in, .dout, .rd_out);

  task automatic expect_code(input logic [7:0] d, input logic kk, input logic rd, input logic [9:0] code, input logic rdo);
    din = d; k = kk; rd_in = rd;
    #1;
    checks++;
    if (dout !== code || rd_out !== rdo) begin
      failures++;
      $display("FAIL %s%0d.%0d rd=%0b: got %b/%0b want %b/%0b", kk ? "K" : "D", d[4:0], d[7:5], rd, dout, rd_out, code, rdo);
    end
  endtask

  initial begin
    // reference code groups (abcdei fghj) from the standard tables
    expect_code(8'hBC, 1, 0, 10'b0011111010, 1); // K28.5 RD-
    expect_code(8'hBC, 1, 1, 10'b1100000101, 0); // K28.5 RD+
    expect_code(8'h3C, 1, 0, 10'b0011111001, 1); // K28.1 RD-
    expect_code(8'hFB, 1, 0, 10'b1101101000, 0); // K27.7 RD-
    expect_code(8'hFD, 1, 1, 10'b0100010111, 1); // K29.7 RD+
    expect_code(8'h1C, 1, 0, 10'b0011110100, 0); // K28.0 RD-
    expect_code(8'h00, 0, 0, 10'b1001110100, 0); // D0.0 RD-
    expect_code(8'h00, 0, 1, 10'b0110001011, 1); // D0.0 RD+
    expect_code(8'h03, 0, 0, 10'b1100011011, 1); // D3.0 RD-
    expect_code(8'hF1, 0, 0, 10'b1000110111, 1); // D17.7 RD- (A7)
    expect_code(8'hEB, 0, 1, 10'b1101001000, 0); // D11.7 RD+ (A7)
    expect_code(8'hE7, 0, 0, 10'b1110001110, 1); // D7.7 RD-
    expect_code(8'h4A, 0, 0, 10'b0101010101, 0); // D10.2 RD-
    expect_code(8'hB5, 0, 1, 10'b1010101010, 1); // D21.5
    expect_code(8'hFF, 0, 0, 10'b1010110001, 0); // D31.7 RD-
    // random stream: balance and run length
    begin
      logic rd = 0; int run = 0; logic last = 0; int disp = 0, maxd = 0;
      for (int i = 0; i < 4000; i++) begin
        din = 8'($urandom); k = 0; rd_in = rd; #1;
        for (int b = 9; b >= 0; b--) begin
          if (dout[b] == last) run++; else run = 1;
          last = dout[b];
          disp += dout[b] ? 1 : -1;
          if (disp > maxd) maxd = disp;
          if (-disp > maxd) maxd = -disp;
        end
        checks++;
        if (run > 5) begin failures++; $display("FAIL run length %0d at byte %h", run, din); end
        rd = rd_out;
      end
      checks++;
      if (maxd > 5) begin failures++; $display("FAIL running digital sum %0d", maxd); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
