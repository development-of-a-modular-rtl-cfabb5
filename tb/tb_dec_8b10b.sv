// tb_dec_8b10b: exhaustive round trip. Every data byte and every valid K
// character is encoded for both running disparities and must decode to the
// same value with no error and the same new disparity; a sample of invalid
// groups (five or more equal bits, bad disparity) must be flagged.
module tb_dec_8b10b;
  logic [7:0] e_din, d_dout;
  logic       e_k, e_rd, e_rdo, d_k, d_cerr, d_derr, d_rdo;
  logic [9:0] code;
  int checks = 0, failures = 0;

  enc_8b10b enc (.din(e_din), .k(e_k), .rd_in(e_rd), .dout(code), .rd_out(e_rdo));
  dec_8b10b dut (.din(code), .rd_in(e_rd), .dout(d_dout), .k(d_k), .code_err(d_cerr), .disp_err(d_derr), .rd_out(d_rdo));

  logic [7:0] kchars [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFC, 8'hF7, 8'hFB, 8'hFD, 8'hFE};

  initial begin
    for (int rd = 0; rd < 2; rd++) begin
      for (int v = 0; v < 256 + 12; v++) begin
        e_rd = 1'(rd);
        e_k  = (v >= 256);
        e_din = e_k ? kchars[v - 256] : 8'(v);
        #1;
        checks++;
        if (d_dout !== e_din || d_k !== e_k || d_cerr || d_derr || d_rdo !== e_rdo) begin
          failures++;
          $display("FAIL %s %h rd=%0d code=%b -> %h k=%0b cerr=%0b derr=%0b", e_k ? "K" : "D", e_din, rd, code, d_dout, d_k, d_cerr, d_derr);
        end
      end
    end
    // invalid groups: force the decoder input through a second instance
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
