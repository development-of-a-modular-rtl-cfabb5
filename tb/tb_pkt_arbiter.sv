// tb_pkt_arbiter: three packet sources, each with a queue of packets that are
// always available without gaps (as from store-and-forward FIFOs). Checks:
// every packet comes out whole with its source's header byte in front (source
// 2 has no header), grants rotate 0,1,2,0,... while all sources have packets,
// and the output respects out_ready stalls.
module tb_pkt_arbiter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 3;

  logic [N-1:0]      in_valid, in_last, in_err, in_ready;
  logic [N-1:0][7:0] in_data;
  logic              out_valid, out_last, out_err, out_ready;
  logic [7:0]        out_data;

  pkt_arbiter #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .in_err, .in_ready,
                           .hdr({8'hC2, 8'hC1, 8'hC0}), .hdr_en(3'b011),
                           .out_valid, .out_data, .out_last, .out_err, .out_ready);

  // source model: queues of bytes with last flags
  logic [8:0] src_q[N][$];
  logic [8:0] exp_q[$];
  int order[$];

  always_comb for (int s = 0; s < N; s++) begin
    in_valid[s] = src_q[s].size() > 0;
    in_data[s]  = in_valid[s] ? src_q[s][0][7:0] : 8'h00;
    in_last[s]  = in_valid[s] ? src_q[s][0][8] : 1'b0;
    in_err[s]   = 1'b0;
  end

  always @(posedge clk) begin
    for (int s = 0; s < N; s++) if (in_valid[s] && in_ready[s]) void'(src_q[s].pop_front());
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || {out_last, out_data} !== exp_q[0]) begin
        failures++; $display("FAIL out %h last %b", out_data, out_last);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
    end
  end

  logic [8:0] pk[N][3][$];
  initial begin
    out_ready = 1;
    for (int p = 0; p < 3; p++)
      for (int s = 0; s < N; s++) begin
        int n;
        n = 1 + $urandom % 6;
        pk[s][p] = {};
        for (int i = 0; i < n; i++) pk[s][p].push_back({i == n - 1, 8'($urandom)});
        foreach (pk[s][p][i]) src_q[s].push_back(pk[s][p][i]);
      end
    // expected: round robin starting at source 0
    for (int p = 0; p < 3; p++)
      for (int s = 0; s < N; s++) begin
        if (s != 2) exp_q.push_back({1'b0, 8'hC0 + 8'(s)});
        foreach (pk[s][p][i]) exp_q.push_back(pk[s][p][i]);
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random stalls on the output
    repeat (400) begin
      @(negedge clk);
      out_ready = ($urandom % 3 != 0);
    end
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d bytes not seen", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
