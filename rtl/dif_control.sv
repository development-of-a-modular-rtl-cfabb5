// dif_control: the DIF's command decoder and event-data packer.
//
// Commands arrive from the LDA link as packets (first byte the opcode):
//  - OP_ECHO: the whole packet is copied to the echo output and goes back up
//    the link; this is how a test packet sent from the DAQ PC shows that it
//    reached the DIF.
//  - OP_SET_MODE: byte 1 bit 0 sets power pulsing (pp_en), bit 1 enables
//    the DIF-DIF redundancy path (redund_en). Applied when the packet ends
//    without error.
// A packet that ends with cmd_err changes no mode bit. An echo of a damaged
// packet is still returned (its error flag is kept in the echo FIFO), so the
// DAQ PC sees the damage when it compares the echo with what it sent.
// Front-end data (fe_*) arrive as a byte stream, fe_last marking the end of a
// readout cycle. They are packed into blocks of at most MAX_BLOCK bytes: a
// block ends at fe_last or when it reaches MAX_BLOCK, so with the one-byte DIF
// header and one-byte LDA header every block fits a 1500-byte Ethernet payload.
// All outputs are combinational copies of the inputs, qualified by the state;
// no back-pressure exists on either input.
// Opcodes and the block-closing rule are this design's choices.
module dif_control
  import daq_pkg::*;
#(
  parameter int MAX_BLOCK = DIF_MAX_BLOCK
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  input  logic [7:0] cmd_data,
  input  logic       cmd_last,
  input  logic       cmd_err,
  input  logic       fe_valid,
  input  logic [7:0] fe_data,
  input  logic       fe_last,
  output logic       blk_valid,
  output logic [7:0] blk_data,
  output logic       blk_last,
  output logic       echo_valid,
  output logic [7:0] echo_data,
  output logic       echo_last,
  output logic       echo_err,
  output logic       pp_en,
  output logic       redund_en,
  output logic [15:0] blocks
);
  typedef enum logic [1:0] {K_OP, K_ECHO, K_MODE, K_SKIP} cmd_state_t;
  cmd_state_t  state;
  logic [7:0]  mode_byte;
  logic        mode_seen;
  logic [$clog2(MAX_BLOCK+1)-1:0] fill;
  logic        blk_end;

  // ---------------- commands
  assign echo_valid = cmd_valid && ((state == K_OP && cmd_data == OP_ECHO) || state == K_ECHO);
  assign echo_data  = cmd_data;
  assign echo_last  = cmd_last;
  assign echo_err   = cmd_err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= K_OP;
      mode_byte <= '0;
      mode_seen <= 1'b0;
      pp_en     <= 1'b0;
      redund_en <= 1'b0;
    end else if (cmd_valid) begin
      case (state)
        K_OP: begin
          mode_seen <= 1'b0;
          if (!cmd_last) begin
            if (cmd_data == OP_ECHO)          state <= K_ECHO;
            else if (cmd_data == OP_SET_MODE) state <= K_MODE;
            else                              state <= K_SKIP;
          end
        end
        K_MODE: begin
          if (!mode_seen) begin
            mode_byte <= cmd_data;
            mode_seen <= 1'b1;
          end
          if (cmd_last) begin
            state <= K_OP;
            if (!cmd_err) begin
              pp_en     <= mode_seen ? mode_byte[0] : cmd_data[0];
              redund_en <= mode_seen ? mode_byte[1] : cmd_data[1];
            end
          end
        end
        default: if (cmd_last) state <= K_OP;
      endcase
    end
  end

  // ---------------- front-end data into blocks
  assign blk_end   = fe_last || (fill == ($clog2(MAX_BLOCK+1))'(MAX_BLOCK - 1));
  assign blk_valid = fe_valid;
  assign blk_data  = fe_data;
  assign blk_last  = blk_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill   <= '0;
      blocks <= '0;
    end else if (fe_valid) begin
      if (blk_end) begin
        fill   <= '0;
        blocks <= blocks + 16'd1;
      end else begin
        fill <= fill + 1'b1;
      end
    end
  end
endmodule
