// uart_rx: RS232 receiver (8 data bits, no parity, 1 stop bit, LSB first)
// for the CCC's link to the control PC.
//
// The input is synchronised by two flops. A falling edge starts a frame; the
// start bit is checked at its middle and each following bit is sampled
// CLKS_PER_BIT clocks later. valid pulses for one clock with the byte when a
// good stop bit is seen; a missing stop bit raises frame_err instead, and
// the receiver then waits for the line to go high before the next frame.
// Default CLKS_PER_BIT = 434 is 115200 baud at 50 MHz; the baud rate and frame
// format are this design's choices.
module uart_rx #(
  parameter int CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);
  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [2:0] {U_IDLE, U_START, U_DATA, U_STOP, U_BREAK} uart_state_t;
  uart_state_t state;
  logic        s1, s2;
  logic [CW-1:0] cnt;
  logic [2:0]  bitn;
  logic [7:0]  sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1        <= 1'b1;
      s2        <= 1'b1;
      state     <= U_IDLE;
      cnt       <= '0;
      bitn      <= '0;
      sr        <= '0;
      valid     <= 1'b0;
      data      <= '0;
      frame_err <= 1'b0;
    end else begin
      s1        <= rx;
      s2        <= s1;
      valid     <= 1'b0;
      frame_err <= 1'b0;
      case (state)
        U_IDLE: if (!s2) begin
          state <= U_START;
          cnt   <= CW'(CLKS_PER_BIT / 2 - 1);
        end
        U_START: if (cnt == 0) begin
          if (!s2) begin
            state <= U_DATA;
            cnt   <= CW'(CLKS_PER_BIT - 1);
            bitn  <= '0;
          end else state <= U_IDLE;
        end else cnt <= cnt - 1'b1;
        U_DATA: if (cnt == 0) begin
          sr   <= {s2, sr[7:1]};
          cnt  <= CW'(CLKS_PER_BIT - 1);
          bitn <= bitn + 3'd1;
          if (bitn == 3'd7) state <= U_STOP;
        end else cnt <= cnt - 1'b1;
        U_STOP: if (cnt == 0) begin
          if (s2) begin
            valid <= 1'b1;
            data  <= sr;
            state <= U_IDLE;
          end else begin
            frame_err <= 1'b1;
            state     <= U_BREAK;
          end
        end else cnt <= cnt - 1'b1;
        U_BREAK: if (s2) state <= U_IDLE;   // wait for the line to return high
        default: state <= U_IDLE;
      endcase
    end
  end
endmodule
