// busy_enc: sends BUSY over an AC-coupled line as a clock.
//
// A DC level cannot cross an AC-coupled LVDS pair, so BUSY is signalled by a
// square wave and NOT-BUSY by leaving the driver off (undriven line). While
// busy is high the output toggles every HALF clocks and oe is high; when busy
// falls the driver is switched off at once. The receiving side is busy_dec.
// The encoding is the one described for the DIF-LDA and LDA-CCC busy lines;
// the toggle rate (clk/2 for HALF=1) is this design's choice.
module busy_enc #(
  parameter int HALF = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic busy,
  output logic line,
  output logic oe
);
  logic [$clog2(HALF+1):0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line <= 1'b0;
      oe   <= 1'b0;
      cnt  <= '0;
    end else begin
      oe <= busy;
      if (!busy) begin
        line <= 1'b0;
        cnt  <= '0;
      end else if (cnt == ($clog2(HALF+1)+1)'(HALF - 1)) begin
        line <= ~line;
        cnt  <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
