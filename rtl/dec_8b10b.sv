// dec_8b10b: combinational 8b/10b decoder.
//
// Splits the code group into its 6-bit and 4-bit sub-blocks and looks each up
// against the encoder tables for both disparities (enc_8b10b's tables written
// again here as case statements). K28.y and Kx.7 are recognised as control
// characters. code_err flags a group that is not in the code; disp_err flags a
// group whose disparity does not fit the running disparity rd_in (a +2 group
// while RD+, a -2 group while RD-, or a 6b/4b block of the wrong polarity).
// The disparity check is coarser than a full standard decoder: it looks at
// sub-block and total disparity only. Combinational; the caller registers rd_out.
module dec_8b10b (
  input  logic [9:0] din,
  input  logic       rd_in,
  output logic [7:0] dout,
  output logic       k,
  output logic       code_err,
  output logic       disp_err,
  output logic       rd_out
);
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

  function automatic int ones(input logic [9:0] c);
    int n = 0;
    for (int i = 0; i < 10; i++) n += int'(c[i]);
    return n;
  endfunction

  logic [5:0] c6;
  logic [3:0] c4;
  logic       hit6, hit4, k28;
  logic [4:0] x;
  logic [2:0] y;
  int         d6, d10;

  assign c6 = din[9:4];
  assign c4 = din[3:0];

  always_comb begin
    hit6 = 1'b0;
    x    = 5'd0;
    for (int i = 0; i < 32; i++) begin
      logic [5:0] c;
      c = code6(5'(i));
      if (c6 == c || (c6 == ~c && (ones(10'(c)) != 3 || i == 7))) begin
        hit6 = 1'b1;
        x    = 5'(i);
      end
    end
    k28 = (c6 == 6'b001111 || c6 == 6'b110000);
    if (k28) begin
      hit6 = 1'b1;
      x    = 5'd28;
    end
    // 3b/4b: both polarities of every sub-block, A7 as 7
    hit4 = 1'b1;
    case (c4)
      4'b1011, 4'b0100: y = 3'd0;
      4'b1001, 4'b0110: y = 3'd1;
      4'b0101, 4'b1010: y = 3'd2;
      4'b1100, 4'b0011: y = 3'd3;
      4'b1101, 4'b0010: y = 3'd4;
      4'b1110, 4'b0001, 4'b0111, 4'b1000: y = 3'd7;
      default: begin y = 3'd0; hit4 = 1'b0; end
    endcase
    // neutral 4b codes mean y=5/6 only where the D tables put them
    if (c4 == 4'b1010) y = 3'd5;
    if (c4 == 4'b0110) y = 3'd6;
    if (c4 == 4'b1001) y = 3'd1;
    if (c4 == 4'b0101) y = 3'd2;
    // K28.y with RD+ start has the 4b block inverted for the neutral y
    if (k28 && c6 == 6'b110000) begin
      case (c4)
        4'b0110: y = 3'd1;
        4'b1010: y = 3'd2;
        4'b0101: y = 3'd5;
        4'b1001: y = 3'd6;
        default: ;
      endcase
    end
    k = k28 || (y == 3'd7 && (din == 10'b1110101000 || din == 10'b0001010111 ||
                              din == 10'b1101101000 || din == 10'b0010010111 ||
                              din == 10'b1011101000 || din == 10'b0100010111 ||
                              din == 10'b0111101000 || din == 10'b1000010111));
    dout = {y, x};
    d6   = ones(10'(c6)) * 2 - 6;
    d10  = ones(din) * 2 - 10;
    code_err = !hit6 || !hit4 || (d10 != 0 && d10 != 2 && d10 != -2) ||
               din == 10'b0011111111 || din == 10'b1100000000;
    disp_err = (rd_in && d10 == 2) || (!rd_in && d10 == -2) ||
               (rd_in && d6 == 2) || (!rd_in && d6 == -2);
    rd_out   = (d10 == 0) ? rd_in : (d10 > 0);
  end
endmodule
