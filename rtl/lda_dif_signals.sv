// lda_dif_signals: the LDA's "DIF Signals" block between the CCC and the DIFs.
//
// Fans the CCC's fast (trig) line out 1:N_DIF, re-registered once so every DIF
// sees it with the same one-clock latency; the clock itself is fanned out by
// board buffers and is not part of this logic. Collects the N_DIF clock-coded
// busy lines, decodes each (busy_dec), ORs them, and sends the result to the
// CCC again as a clock-coded busy (busy_enc). A DIF that is unplugged leaves
// its line still and so counts as not busy.
// The OR is this design's reading of "combine the busy signals".
module lda_dif_signals #(
  parameter int N_DIF = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             fast_in,
  output logic [N_DIF-1:0] fast_out,
  input  logic [N_DIF-1:0] busy_line_in,
  output logic [N_DIF-1:0] dif_busy,
  output logic             busy_any,
  output logic             ccc_busy_line,
  output logic             ccc_busy_oe
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fast_out <= '0;
    else        fast_out <= {N_DIF{fast_in}};
  end

  for (genvar i = 0; i < N_DIF; i++) begin : g_busy
    busy_dec u_dec (.clk, .rst_n, .line(busy_line_in[i]), .busy(dif_busy[i]));
  end

  assign busy_any = |dif_busy;

  busy_enc u_enc (.clk, .rst_n, .busy(busy_any), .line(ccc_busy_line), .oe(ccc_busy_oe));
endmodule
