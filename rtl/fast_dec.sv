// fast_dec: decodes the pulse-width coded fast commands of fast_enc.
//
// Counts the clocks the trig line is high; on the falling edge a width of 1
// gives trig, 2 sync, 3 train_start and 4 train_end, each as a one-clock pulse
// in the cycle after the falling edge (a trigger is thus seen 2 clocks after
// the line rose). Any other width raises err for one clock. The line is sampled
// directly, without a synchroniser, because it is sent together with the
// distributed clock and must keep a fixed latency.
module fast_dec
  import daq_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic line,
  output logic trig,
  output logic sync,
  output logic train_start,
  output logic train_end,
  output logic err
);
  logic       prev;
  logic [3:0] width;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev        <= 1'b0;
      width       <= '0;
      trig        <= 1'b0;
      sync        <= 1'b0;
      train_start <= 1'b0;
      train_end   <= 1'b0;
      err         <= 1'b0;
    end else begin
      prev        <= line;
      trig        <= 1'b0;
      sync        <= 1'b0;
      train_start <= 1'b0;
      train_end   <= 1'b0;
      err         <= 1'b0;
      if (line) begin
        if (width != 4'hF) width <= width + 4'd1;
      end else begin
        width <= '0;
        if (prev) begin
          case (width)
            4'd1: trig        <= 1'b1;
            4'd2: sync        <= 1'b1;
            4'd3: train_start <= 1'b1;
            4'd4: train_end   <= 1'b1;
            default: err      <= 1'b1;
          endcase
        end
      end
    end
  end
endmodule
