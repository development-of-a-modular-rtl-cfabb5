// fast_enc: puts fast commands on the trig line as pulses of coded width.
//
// The clock-and-control link has one line for fast signals besides the clock
// and busy. Trigger, synchronisation of the slow clocks, train start and train
// end all have to travel on it, and a pulse is the only thing an AC-coupled
// pair carries well. A command of type c (fast_cmd_t value 1..4) becomes a high
// pulse of c clocks followed by FC_GAP low clocks, so a trigger, the most
// time-critical command, is the shortest pulse and the line is high in the
// cycle after cmd_valid. cmd_ready is high when a new command can be taken.
// The width coding is this design's choice; the set of signals is the one the
// system needs (trigger, start/end of data taking, synchronisation).
module fast_enc
  import daq_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  input  fast_cmd_t cmd,
  output logic      cmd_ready,
  output logic      line
);
  logic [2:0] hi_left;
  logic [1:0] lo_left;

  assign cmd_ready = (hi_left == 0) && (lo_left == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_left <= '0;
      lo_left <= '0;
      line    <= 1'b0;
    end else if (cmd_ready) begin
      if (cmd_valid && cmd != FC_NONE) begin
        line    <= 1'b1;
        hi_left <= 3'(cmd) - 3'd1;
        lo_left <= 2'(FC_GAP);
      end else begin
        line <= 1'b0;
      end
    end else if (hi_left != 0) begin
      hi_left <= hi_left - 3'd1;
    end else begin
      line    <= 1'b0;
      lo_left <= lo_left - 2'd1;
    end
  end
endmodule
