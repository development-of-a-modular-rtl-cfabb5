// fe_signals: the DIF's front-end signal block.
//
// Decodes the fast commands arriving on the trig line (fast_dec) and turns them
// into the signals the detector ASICs need:
//  - slowclk, the ASIC readout clock, clk/SLOW_DIV (5 MHz from 50 MHz, the
//    daisy-chain rate). The sync command restarts the divider, so all DIFs
//    that receive the same sync have slow clocks in phase.
//  - train_start, one clock when a bunch train begins; in_train between train
//    start and train end.
//  - asic_pwr_on: with power pulsing enabled (pp_en) the ASICs are powered
//    only during a train and kept in low-power mode between trains, when the
//    DIF reads them out; with pp_en low they stay powered.
//  - trig_out, one clock per trigger command.
//  - busy, to be sent to the LDA: the ASIC memory is full (ram_full) or the
//    DIF's own buffer is (buf_full).
// The mapping of busy and the command set are this design's choices.
module fe_signals #(
  parameter int SLOW_DIV = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic fast_line,
  input  logic ram_full,
  input  logic buf_full,
  input  logic pp_en,
  output logic slowclk,
  output logic train_start,
  output logic in_train,
  output logic trig_out,
  output logic asic_pwr_on,
  output logic busy,
  output logic fast_err
);
  logic f_trig, f_sync, f_start, f_end;
  logic [$clog2(SLOW_DIV)-1:0] div;

  fast_dec u_fast (.clk, .rst_n, .line(fast_line), .trig(f_trig), .sync(f_sync),
                   .train_start(f_start), .train_end(f_end), .err(fast_err));

  assign trig_out    = f_trig;
  assign train_start = f_start;
  assign asic_pwr_on = in_train || !pp_en;
  assign busy        = ram_full || buf_full;
  assign slowclk     = (div < ($clog2(SLOW_DIV))'(SLOW_DIV / 2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div      <= '0;
      in_train <= 1'b0;
    end else begin
      if (f_sync || div == ($clog2(SLOW_DIV))'(SLOW_DIV - 1)) div <= '0;
      else div <= div + 1'b1;
      if (f_start)    in_train <= 1'b1;
      else if (f_end) in_train <= 1'b0;
    end
  end
endmodule
