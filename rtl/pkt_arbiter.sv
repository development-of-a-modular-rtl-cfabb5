// pkt_arbiter: N-to-1 packet multiplexer with an optional source header byte.
//
// Used for the 10:1 DIF-to-Ethernet multiplexer of the LDA, the 4:1
// multiplexer in the ODR and the own/neighbour merge in a DIF. Inputs are
// packet streams from store-and-forward FIFOs, so once a packet is granted its
// bytes arrive without gaps. Grants are round robin and last a whole packet;
// the grant moves on only after in_last has been accepted. If hdr_en[i] is set,
// the byte hdr[i] is sent ahead of every packet from source i (the LDA puts
// the link number there). in_err travels with the last byte.
// One cycle from grant to the first output byte; no bubble between back-to-back
// packets of different sources other than that cycle.
// The round-robin policy and the header content are this design's choices.
module pkt_arbiter #(
  parameter int N = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      in_valid,
  input  logic [N-1:0][7:0] in_data,
  input  logic [N-1:0]      in_last,
  input  logic [N-1:0]      in_err,
  output logic [N-1:0]      in_ready,
  input  logic [N-1:0][7:0] hdr,
  input  logic [N-1:0]      hdr_en,
  output logic              out_valid,
  output logic [7:0]        out_data,
  output logic              out_last,
  output logic              out_err,
  input  logic              out_ready
);
  localparam int SW = (N > 1) ? $clog2(N) : 1;

  typedef enum logic [1:0] {A_IDLE, A_HDR, A_BODY} arb_state_t;
  arb_state_t      state;
  logic [SW-1:0]   sel, last_sel;
  logic [SW-1:0]   pick;
  logic            found;
  logic [SW:0]     idx;

  // next requester after last_sel in round-robin order
  always_comb begin
    found = 1'b0;
    pick  = last_sel;
    idx   = '0;
    for (int k = 1; k <= N; k++) begin
      idx = (SW+1)'(last_sel) + (SW+1)'(k);
      if (idx >= (SW+1)'(N)) idx = idx - (SW+1)'(N);
      if (!found && in_valid[idx[SW-1:0]]) begin
        found = 1'b1;
        pick  = idx[SW-1:0];
      end
    end
  end

  always_comb begin
    in_ready  = '0;
    out_valid = 1'b0;
    out_data  = '0;
    out_last  = 1'b0;
    out_err   = 1'b0;
    case (state)
      A_HDR: begin
        out_valid = 1'b1;
        out_data  = hdr[sel];
      end
      A_BODY: begin
        out_valid     = in_valid[sel];
        out_data      = in_data[sel];
        out_last      = in_last[sel];
        out_err       = in_err[sel];
        in_ready[sel] = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= A_IDLE;
      sel      <= '0;
      last_sel <= SW'(N - 1);
    end else begin
      case (state)
        A_IDLE: if (found) begin
          sel      <= pick;
          last_sel <= pick;
          state    <= hdr_en[pick] ? A_HDR : A_BODY;
        end
        A_HDR:  if (out_ready) state <= A_BODY;
        A_BODY: if (in_valid[sel] && out_ready && in_last[sel]) state <= A_IDLE;
        default: state <= A_IDLE;
      endcase
    end
  end
endmodule
