// link_rxtx: one end of the serial DIF-LDA data link (the "RxTx" block).
//
// Transmit: packets arrive as a byte stream (valid/data/last, ready). Each
// byte becomes one 8b/10b code group sent most-significant bit first, one bit
// per clock, so at the 50 MHz link clock the line runs at 50 Mbit/s and
// carries at most 40 Mbit/s of payload: one byte every 10 cycles. A packet
// is framed as K27.7 (start), data, K29.7 (end), followed by at least one
// K28.5 comma; the line idles with commas. The source must supply the bytes of
// a packet without gaps (a store-and-forward FIFO does); a gap ends the packet
// early and the receiver sees it as an error. A packet whose last byte carries
// tx_err is closed with a comma instead of K29.7, so it also arrives flagged.
// Receive: a 10-bit shift register is searched for K28.5 of either disparity,
// which sets the symbol boundary. After ERR_LIMIT code groups in a row that
// are invalid or of wrong disparity the receiver drops alignment and link_up.
// Data bytes leave one symbol late so that the last byte of a packet can carry
// rx_last; a packet cut by a comma, an error or loss of alignment ends with
// rx_err. There is no flow control: the receiver must take every byte.
// The K-character framing and ERR_LIMIT are this design's choices; the use of
// 8b/10b on a 50 Mbit/s AC-coupled link is taken from the system description.
module link_rxtx
  import daq_pkg::*;
#(
  parameter int ERR_LIMIT = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // transmit byte stream
  input  logic       tx_valid,
  input  logic [7:0] tx_data,
  input  logic       tx_last,
  input  logic       tx_err,
  output logic       tx_ready,
  output logic       ser_out,
  // receive
  input  logic       ser_in,
  output logic       rx_valid,
  output logic [7:0] rx_data,
  output logic       rx_last,
  output logic       rx_err,
  output logic       link_up,
  output logic [15:0] err_cnt
);
  // ---------------- transmitter
  typedef enum logic [1:0] {T_IDLE, T_DATA, T_EOP, T_GAP} tx_state_t;
  tx_state_t  tstate;
  logic [3:0] tbit;
  logic [9:0] tsr;
  logic       trd;
  logic       load;
  logic [7:0] sym;
  logic       sym_k;
  logic [9:0] code;
  logic       code_rd;

  assign load    = (tbit == 4'd9);
  assign ser_out = tsr[9];

  always_comb begin
    sym      = K_COMMA;
    sym_k    = 1'b1;
    tx_ready = 1'b0;
    case (tstate)
      T_IDLE: if (tx_valid) sym = K_SOP;
      T_DATA: if (tx_valid) begin
                sym      = tx_data;
                sym_k    = 1'b0;
                tx_ready = load;
              end
      T_EOP:  sym = K_EOP;
      default: ;
    endcase
  end

  enc_8b10b u_enc (.din(sym), .k(sym_k), .rd_in(trd), .dout(code), .rd_out(code_rd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate <= T_IDLE;
      tbit   <= 4'd9;
      tsr    <= '0;
      trd    <= 1'b0;
    end else begin
      tbit <= load ? 4'd0 : tbit + 4'd1;
      if (load) begin
        tsr <= code;
        trd <= code_rd;
        case (tstate)
          T_IDLE: if (tx_valid) tstate <= T_DATA;
          T_DATA: if (!tx_valid) tstate <= T_GAP;
                  else if (tx_last) tstate <= tx_err ? T_GAP : T_EOP;
          T_EOP:  tstate <= T_GAP;
          default: tstate <= T_IDLE;
        endcase
      end else begin
        tsr <= {tsr[8:0], 1'b0};
      end
    end
  end

  // ---------------- receiver
  logic [9:0] rsr, rsr_n;
  logic [3:0] rbit;
  logic       aligned;
  logic       rrd;
  logic [3:0] err_run;
  logic       comma;
  logic       boundary;
  logic [7:0] d_byte;
  logic       d_k, d_cerr, d_derr, d_rd;
  logic       in_pkt, have_held;
  logic [7:0] held;

  assign rsr_n    = {rsr[8:0], ser_in};
  assign comma    = (rsr_n == 10'b0011111010) || (rsr_n == 10'b1100000101);
  assign boundary = comma || (aligned && rbit == 4'd9);
  assign link_up  = aligned;

  dec_8b10b u_dec (.din(rsr_n), .rd_in(rrd), .dout(d_byte), .k(d_k),
                   .code_err(d_cerr), .disp_err(d_derr), .rd_out(d_rd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsr       <= '0;
      rbit      <= '0;
      aligned   <= 1'b0;
      rrd       <= 1'b0;
      err_run   <= '0;
      err_cnt   <= '0;
      in_pkt    <= 1'b0;
      have_held <= 1'b0;
      held      <= '0;
      rx_valid  <= 1'b0;
      rx_data   <= '0;
      rx_last   <= 1'b0;
      rx_err    <= 1'b0;
    end else begin
      rsr      <= rsr_n;
      rx_valid <= 1'b0;
      rx_last  <= 1'b0;
      rx_err   <= 1'b0;
      rbit     <= boundary ? 4'd0 : rbit + 4'd1;
      if (comma) begin
        // alignment character; the running disparity follows from its polarity
        aligned <= 1'b1;
        err_run <= '0;
        rrd     <= (rsr_n == 10'b0011111010);
        if (in_pkt) begin
          in_pkt    <= 1'b0;
          have_held <= 1'b0;
          if (have_held) begin
            rx_valid <= 1'b1; rx_data <= held; rx_last <= 1'b1; rx_err <= 1'b1;
          end
        end
      end else if (boundary) begin
        if (d_cerr || d_derr) begin
          err_cnt <= err_cnt + 16'd1;
          err_run <= err_run + 4'd1;
          rrd     <= d_rd;
          if (err_run + 4'd1 >= 4'(ERR_LIMIT)) aligned <= 1'b0;
          if (in_pkt) begin
            in_pkt    <= 1'b0;
            have_held <= 1'b0;
            if (have_held) begin
              rx_valid <= 1'b1; rx_data <= held; rx_last <= 1'b1; rx_err <= 1'b1;
            end
          end
        end else begin
          err_run <= '0;
          rrd     <= d_rd;
          if (d_k && d_byte == K_SOP) begin
            in_pkt    <= 1'b1;
            have_held <= 1'b0;
            if (in_pkt && have_held) begin
              rx_valid <= 1'b1; rx_data <= held; rx_last <= 1'b1; rx_err <= 1'b1;
            end
          end else if (d_k && d_byte == K_EOP) begin
            in_pkt    <= 1'b0;
            have_held <= 1'b0;
            if (in_pkt && have_held) begin
              rx_valid <= 1'b1; rx_data <= held; rx_last <= 1'b1;
            end
          end else if (!d_k && in_pkt) begin
            held      <= d_byte;
            have_held <= 1'b1;
            if (have_held) begin
              rx_valid <= 1'b1; rx_data <= held;
            end
          end
        end
      end
    end
  end
endmodule
