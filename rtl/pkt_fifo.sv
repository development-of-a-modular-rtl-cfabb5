// pkt_fifo: store-and-forward packet FIFO with independent write and read clocks.
//
// Each stage of the readout gathers a whole packet before passing it on. The
// writer pushes bytes with w_last on the final one; the reader sees r_valid
// only when at least one complete packet is stored, and then gets the packet's
// bytes on consecutive cycles while r_ready is high. Each entry holds
// {err, last, data}: w_err given with the last byte is passed to the reader.
// Two Gray-coded counters cross the clock domains: the word read pointer
// (write side, for the full test) and a count of completed packets (read side).
// Both change by one at a time, so the usual two-flop synchronisers are safe.
// If the memory fills in the middle of a packet, the last free entry is
// written as the packet's end with err set and the rest of that packet is
// discarded: the reader still sees a well-formed, flagged packet and drop_cnt
// counts the event. w_ready is low while fewer than two entries are free.
// Latency: a packet becomes readable 3 read clocks after its last byte.
// The overflow policy and the sizes are this design's choices.
module pkt_fifo #(
  parameter int DW    = 8,
  parameter int DEPTH = 2048
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          w_valid,
  input  logic [DW-1:0] w_data,
  input  logic          w_last,
  input  logic          w_err,
  output logic          w_ready,
  output logic [15:0]   drop_cnt,
  input  logic          rclk,
  input  logic          rrst_n,
  output logic          r_valid,
  output logic [DW-1:0] r_data,
  output logic          r_last,
  output logic          r_err,
  input  logic          r_ready
);
  localparam int AW = $clog2(DEPTH);

  logic [DW+1:0] mem [DEPTH];

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // read pointer, Gray coded, is synchronised into the write domain
  logic [AW:0] rptr, rgray;

  // ---------------- write side
  logic [AW:0] wptr, rptr_w, rgray_s1, rgray_s2;
  logic [AW:0] wpkts, wpkts_gray;
  logic [AW:0] used;
  logic        skipping;
  logic        do_write, force_end;

  assign used      = wptr - rptr_w;
  assign w_ready   = (used < (AW+1)'(DEPTH - 1));
  assign force_end = (used == (AW+1)'(DEPTH - 1)) && !w_last;
  assign do_write  = w_valid && !skipping && (used < (AW+1)'(DEPTH));

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wptr       <= '0;
      wpkts      <= '0;
      wpkts_gray <= '0;
      rgray_s1   <= '0;
      rgray_s2   <= '0;
      rptr_w     <= '0;
      skipping   <= 1'b0;
      drop_cnt   <= '0;
    end else begin
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      rptr_w   <= gray2bin(rgray_s2);
      if (w_valid && skipping && w_last) skipping <= 1'b0;
      if (do_write) begin
        mem[wptr[AW-1:0]] <= {w_err | force_end, w_last | force_end, w_data};
        wptr <= wptr + 1'b1;
        if (w_last || force_end) begin
          wpkts      <= wpkts + 1'b1;
          wpkts_gray <= bin2gray(wpkts + 1'b1);
        end
        if (force_end) begin
          skipping <= 1'b1;
          drop_cnt <= drop_cnt + 16'd1;
        end
      end
    end
  end

  // ---------------- read side
  logic [AW:0] rpkts, wp_s1, wp_s2, wpkts_r;
  logic [DW+1:0] rword;

  assign rword   = mem[rptr[AW-1:0]];
  assign r_valid = (wpkts_r != rpkts);
  assign r_data  = rword[DW-1:0];
  assign r_last  = rword[DW];
  assign r_err   = rword[DW+1];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rptr    <= '0;
      rgray   <= '0;
      rpkts   <= '0;
      wp_s1   <= '0;
      wp_s2   <= '0;
      wpkts_r <= '0;
    end else begin
      wp_s1   <= wpkts_gray;
      wp_s2   <= wp_s1;
      wpkts_r <= gray2bin(wp_s2);
      if (r_valid && r_ready) begin
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
        if (r_last) rpkts <= rpkts + 1'b1;
      end
    end
  end
endmodule
