// ccc_control: logic of the clock and control card (CCC).
//
// The CCC is the one place that decides when the detector takes data. It
// receives one-byte commands from the control PC over RS232 (uart_rx):
//   'R' start run (external triggers enabled)   'X' stop run
//   'T' software trigger                        'S' synchronise slow clocks
//   'B' bunch-train start                       'E' bunch-train end
//   'I' use the standalone 50 MHz clock         'M' use the machine clock
// External triggers (ext_trig, asynchronous, two-flop synchronised, rising
// edge) are accepted while a run is on. Busy arrives from each LDA as a
// clock-coded line (busy_dec per output); while any LDA is busy, triggers
// are vetoed and counted in trig_veto: busy stops data taking. Trigger requests
// take priority over the other fast commands, which wait in a one-deep slot per
// type. Commands leave through fast_enc as width-coded pulses and are fanned
// out, re-registered, to all N_OUT HDMI outputs (8 LDAs, or DIFs directly).
// A trigger reaches the outputs 2 clocks after the ext_trig edge is
// synchronised (4 after the pin). clk_sel drives the board's clock
// multiplexer, which is not logic and is not modelled here.
// The command letters and the veto rule are this design's choices.
module ccc_control
  import daq_pkg::*;
#(
  parameter int N_OUT        = N_CCC_OUT,
  parameter int CLKS_PER_BIT = 434
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             uart_rx,
  input  logic             ext_trig,
  input  logic [N_OUT-1:0] busy_line,
  output logic [N_OUT-1:0] fast_out,
  output logic             clk_sel,
  output logic             run,
  output logic             busy_any,
  output logic [15:0]      trig_sent,
  output logic [15:0]      trig_veto
);
  logic       u_valid, u_ferr;
  logic [7:0] u_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (.clk, .rst_n, .rx(uart_rx), .valid(u_valid), .data(u_data), .frame_err(u_ferr));

  logic [N_OUT-1:0] lda_busy;
  for (genvar i = 0; i < N_OUT; i++) begin : g_busy
    busy_dec u_bd (.clk, .rst_n, .line(busy_line[i]), .busy(lda_busy[i]));
  end
  assign busy_any = |lda_busy;

  logic t1, t2, t3;
  logic trig_req, sync_p, start_p, end_p;
  logic e_valid, e_ready, e_line;
  fast_cmd_t e_cmd;

  always_comb begin
    e_valid = 1'b1;
    if (trig_req)     e_cmd = FC_TRIG;
    else if (sync_p)  e_cmd = FC_SYNC;
    else if (start_p) e_cmd = FC_TRAIN_START;
    else if (end_p)   e_cmd = FC_TRAIN_END;
    else begin
      e_cmd   = FC_NONE;
      e_valid = 1'b0;
    end
  end

  fast_enc u_enc (.clk, .rst_n, .cmd_valid(e_valid), .cmd(e_cmd), .cmd_ready(e_ready), .line(e_line));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1 <= 1'b0; t2 <= 1'b0; t3 <= 1'b0;
      trig_req  <= 1'b0;
      sync_p    <= 1'b0;
      start_p   <= 1'b0;
      end_p     <= 1'b0;
      run       <= 1'b0;
      clk_sel   <= 1'b0;
      trig_sent <= '0;
      trig_veto <= '0;
      fast_out  <= '0;
    end else begin
      t1 <= ext_trig;
      t2 <= t1;
      t3 <= t2;
      fast_out <= {N_OUT{e_line}};
      // the slot taken by fast_enc this cycle is freed
      if (e_valid && e_ready) begin
        case (e_cmd)
          FC_TRIG:        begin trig_req <= 1'b0; trig_sent <= trig_sent + 16'd1; end
          FC_SYNC:        sync_p  <= 1'b0;
          FC_TRAIN_START: start_p <= 1'b0;
          FC_TRAIN_END:   end_p   <= 1'b0;
          default: ;
        endcase
      end
      if ((t2 && !t3 && run) || (u_valid && u_data == "T")) begin
        if (busy_any) trig_veto <= trig_veto + 16'd1;
        else          trig_req  <= 1'b1;
      end
      if (u_valid) begin
        case (u_data)
          "R": run     <= 1'b1;
          "X": run     <= 1'b0;
          "S": sync_p  <= 1'b1;
          "B": start_p <= 1'b1;
          "E": end_p   <= 1'b1;
          "I": clk_sel <= 1'b0;
          "M": clk_sel <= 1'b1;
          default: ;
        endcase
      end
    end
  end
endmodule
