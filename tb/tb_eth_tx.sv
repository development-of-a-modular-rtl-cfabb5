// tb_eth_tx: captures the GMII output for payloads of 10, 46, 200 and 1500
// bytes and compares each frame byte for byte with one built independently
// (tb_eth_pkg: preamble, header, zero padding to 46 bytes, bit-serial CRC-32).
// Also checks the 12-clock inter-frame gap and that the payload is taken at
// one byte per clock without stalls.
module tb_eth_tx;
  import tb_eth_pkg::*;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic       in_valid = 0, in_last = 0, in_ready, tx_en;
  logic [7:0] in_data = 0, txd;
  localparam logic [47:0] DST = 48'h0011_2233_4455, SRC = 48'h02CA_11CE_0003;

  eth_tx dut (.clk, .rst_n, .dst_mac(DST), .src_mac(SRC), .in_valid, .in_data, .in_last, .in_ready, .txd, .tx_en);

  logic [7:0] cap[$], frames[$][$];
  int gap = 0, gaps[$];
  always @(posedge clk) if (rst_n) begin
    if (tx_en) begin
      if (cap.size() == 0 && frames.size() > 0) gaps.push_back(gap);
      cap.push_back(txd); gap = 0;
    end else begin
      if (cap.size()) begin frames.push_back(cap); cap = {}; end
      gap++;
    end
  end

  int sizes[4] = '{10, 46, 200, 1500};
  logic [7:0] pays[4][$];
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (sizes[k]) begin
      pays[k] = {};
      for (int i = 0; i < sizes[k]; i++) pays[k].push_back(8'($urandom));
      for (int i = 0; i < sizes[k]; i++) begin
        @(negedge clk);
        in_valid = 1; in_data = pays[k][i]; in_last = (i == sizes[k] - 1);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        if (i > 0) begin
          #1 checks += 0;
        end
      end
      @(negedge clk); in_valid = 0; in_last = 0;
    end
    repeat (100) @(posedge clk);
    checks++;
    if (frames.size() != 4) begin failures++; $display("FAIL %0d frames", frames.size()); end
    else foreach (sizes[k]) begin
      logic [7:0] ref_fr[$];
      build_frame(DST, SRC, ETHERTYPE, pays[k], ref_fr);
      checks++;
      if (frames[k].size() != ref_fr.size()) begin failures++; $display("FAIL frame %0d length %0d exp %0d", k, frames[k].size(), ref_fr.size()); end
      else foreach (ref_fr[i]) if (frames[k][i] !== ref_fr[i]) begin
        failures++; $display("FAIL frame %0d byte %0d: %h exp %h", k, i, frames[k][i], ref_fr[i]); break;
      end
    end
    foreach (gaps[i]) begin
      checks++;
      if (gaps[i] < 12) begin failures++; $display("FAIL inter-frame gap %0d", gaps[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
