// enc_8b10b: combinational 8b/10b encoder (standard Widmer-Franaszek code).
//
// The DIF-LDA link runs over AC-coupled LVDS pairs, so its data are 8b/10b
// coded to stay DC balanced. This module maps one byte (or a K character when
// k=1) to its 10-bit code group for the running disparity rd_in (1 = RD+) and
// returns the new running disparity. The 5b/6b and 3b/4b tables are those of
// the standard code; only K28.y and Kx.7 (x = 23, 27, 29, 30) are valid K
// characters. Code group bit 9 is 'a', the first bit on the line.
// Purely combinational; the caller registers rd_out.
module enc_8b10b (
  input  logic [7:0] din,
  input  logic       k,
  input  logic       rd_in,
  output logic [9:0] dout,
  output logic       rd_out
);
  // 5b/6b code for RD- (abcdei), indexed by EDCBA
  function automatic logic [5:0] code6(input logic [4:0] x);
    case (x)
      5'd0: code6 = 6'b100111;  5'd1: code6 = 6'b011101;  5'd2: code6 = 6'b101101;  5'd3: code6 = 6'b110001;
      5'd4: code6 = 6'b110101;  5'd5: code6 = 6'b101001;  5'd6: code6 = 6'b011001;  5'd7: code6 = 6'b111000;
      5'd8: code6 = 6'b111001;  5'd9: code6 = 6'b100101;  5'd10: code6 = 6'b010101; 5'd11: code6 = 6'b110100;
      5'd12: code6 = 6'b001101; 5'd13: code6 = 6'b101100; 5'd14: code6 = 6'b011100; 5'd15: code6 = 6'b010111;
      5'd16: code6 = 6'b011011; 5'd17: code6 = 6'b100011; 5'd18: code6 = 6'b010011; 5'd19: code6 = 6'b110010;
      5'd20: code6 = 6'b001011; 5'd21: code6 = 6'b101010; 5'd22: code6 = 6'b011010; 5'd23: code6 = 6'b111010;
      5'd24: code6 = 6'b110011; 5'd25: code6 = 6'b100110; 5'd26: code6 = 6'b010110; 5'd27: code6 = 6'b110110;
      5'd28: code6 = 6'b001110; 5'd29: code6 = 6'b101110; 5'd30: code6 = 6'b011110; default: code6 = 6'b101011;
    endcase
  endfunction

  // 3b/4b code for RD- (fghj), indexed by HGF; 7 is the primary P7
  function automatic logic [3:0] code4(input logic [2:0] y);
    case (y)
      3'd0: code4 = 4'b1011; 3'd1: code4 = 4'b1001; 3'd2: code4 = 4'b0101; 3'd3: code4 = 4'b1100;
      3'd4: code4 = 4'b1101; 3'd5: code4 = 4'b1010; 3'd6: code4 = 4'b0110; default: code4 = 4'b1110;
    endcase
  endfunction

  function automatic int ones6(input logic [5:0] c);
    return int'(c[0]) + int'(c[1]) + int'(c[2]) + int'(c[3]) + int'(c[4]) + int'(c[5]);
  endfunction

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd_mid;
  logic [9:0] kcode;

  assign x = din[4:0];
  assign y = din[7:5];

  always_comb begin
    // --- 5b/6b
    c6 = code6(x);
    if (rd_in && (ones6(c6) != 3 || x == 5'd7)) c6 = ~c6;
    rd_mid = (ones6(c6) == 3) ? rd_in : (ones6(c6) > 3);
    // --- 3b/4b with the alternate A7 where P7 would make a run of five
    c4 = code4(y);
    if (y == 3'd7 && ((!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                      ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14))))
      c4 = 4'b0111;
    if (rd_mid && (c4 != 4'b1001 && c4 != 4'b0101 && c4 != 4'b1010 && c4 != 4'b0110))
      c4 = ~c4;   // unbalanced codes and the alternating 1100/0011 flip for RD+
    // --- K characters: RD- form is 6b(K28 or x) + 4b, RD+ form its complement
    if (x == 5'd28) kcode = {6'b001111, (y == 3'd7) ? 4'b1000 : ~code4(y) ^ {4{y == 3'd1 || y == 3'd2 || y == 3'd5 || y == 3'd6}}};
    else            kcode = {code6(x), 4'b1000};
    if (rd_in) kcode = ~kcode;
    dout   = k ? kcode : {c6, c4};
    // a balanced code group keeps the running disparity, a +-2 group flips it
    rd_out = (ones6(dout[9:4]) + int'(dout[3]) + int'(dout[2]) + int'(dout[1]) + int'(dout[0]) == 5) ? rd_in : ~rd_in;
  end
endmodule
