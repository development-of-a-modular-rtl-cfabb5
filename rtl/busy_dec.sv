// busy_dec: recovers BUSY from a clock-encoded line.
//
// The line is either toggling (busy) or resting at whatever level the LVDS
// receiver gives an undriven input, which differs between boards. Only edges
// are therefore used: after a two-flop synchroniser, every edge restarts a
// counter, and busy stays high until TIMEOUT clocks pass without an edge.
// Busy thus rises 3 clocks after the first edge on the line and falls TIMEOUT
// (+2) clocks after the last one, whatever the resting level.
// The edge/timeout scheme and TIMEOUT are this design's choices.
module busy_dec #(
  parameter int TIMEOUT = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic line,
  output logic busy
);
  logic s1, s2, s3;
  logic [$clog2(TIMEOUT+1)-1:0] since;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1    <= 1'b0;
      s2    <= 1'b0;
      s3    <= 1'b0;
      since <= '0;
      busy  <= 1'b0;
    end else begin
      s1 <= line;
      s2 <= s1;
      s3 <= s2;
      if (s2 != s3) begin
        since <= '0;
        busy  <= 1'b1;
      end else if (since == ($clog2(TIMEOUT+1))'(TIMEOUT - 1)) begin
        busy <= 1'b0;
      end else begin
        since <= since + 1'b1;
      end
    end
  end
endmodule
