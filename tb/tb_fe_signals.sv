// tb_fe_signals: fast commands are produced by a fast_enc, as the CCC would.
// Checks: slowclk has period SLOW_DIV (10) with 5 clocks high; two
// fe_signals instances whose dividers started at different times are in
// phase after a sync command; train start gives one train_start pulse and
// asic_pwr_on only during the train when power pulsing is on; a trigger gives
// one trig_out; busy follows ram_full and buf_full.
module tb_fe_signals;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0, rst2_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic e_valid = 0, e_ready, line;
  fast_cmd_t e_cmd = FC_NONE;
  logic ram_full = 0, buf_full = 0, pp_en = 1;
  logic sc, ts, it, tr, pw, busy, ferr, sc2, ts2, it2, tr2, pw2, busy2, ferr2;

  fast_enc enc (.clk, .rst_n, .cmd_valid(e_valid), .cmd(e_cmd), .cmd_ready(e_ready), .line);
  fe_signals #(.SLOW_DIV(10)) dut (.clk, .rst_n, .fast_line(line), .ram_full, .buf_full, .pp_en,
    .slowclk(sc), .train_start(ts), .in_train(it), .trig_out(tr), .asic_pwr_on(pw), .busy, .fast_err(ferr));
  fe_signals #(.SLOW_DIV(10)) dut2 (.clk, .rst_n(rst2_n), .fast_line(line), .ram_full(1'b0), .buf_full(1'b0), .pp_en(1'b0),
    .slowclk(sc2), .train_start(ts2), .in_train(it2), .trig_out(tr2), .asic_pwr_on(pw2), .busy(busy2), .fast_err(ferr2));

  int n_ts = 0, n_tr = 0;
  always @(posedge clk) if (rst_n) begin
    if (ts) n_ts++;
    if (tr) n_tr++;
  end

  task automatic cmd(input fast_cmd_t c);
    @(negedge clk);
    e_valid = 1; e_cmd = c;
    while (!e_ready) @(negedge clk);
    @(negedge clk);
    e_valid = 0;
    repeat (10) @(negedge clk);
  endtask

  initial begin
    int hi, per, last_rise, mism;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    rst2_n = 1;           // second DIF's divider starts 3 clocks later
    // slow clock period and duty
    hi = 0; last_rise = -1; per = 0;
    for (int c = 0; c < 40; c++) begin
      logic p;
      p = sc;
      @(negedge clk);
      if (sc) hi++;
      if (sc && !p) begin if (last_rise >= 0) per = c - last_rise; last_rise = c; end
    end
    checks++; if (per != 10 || hi != 20) begin failures++; $display("FAIL slowclk period %0d high %0d/40", per, hi); end
    mism = 0;
    repeat (20) begin @(negedge clk); if (sc != sc2) mism++; end
    checks++; if (mism == 0) begin failures++; $display("FAIL test set-up: clocks already in phase"); end
    cmd(FC_SYNC);
    mism = 0;
    repeat (40) begin @(negedge clk); if (sc != sc2) mism++; end
    checks++; if (mism != 0) begin failures++; $display("FAIL slow clocks not synchronised"); end
    checks++; if (pw) begin failures++; $display("FAIL ASIC powered outside train"); end
    checks++; if (!pw2) begin failures++; $display("FAIL ASIC unpowered without power pulsing"); end
    cmd(FC_TRAIN_START);
    checks++; if (!pw || !it || n_ts != 1) begin failures++; $display("FAIL train start pw=%b ts=%0d", pw, n_ts); end
    cmd(FC_TRIG);
    checks++; if (n_tr != 1) begin failures++; $display("FAIL triggers %0d", n_tr); end
    cmd(FC_TRAIN_END);
    checks++; if (pw || it) begin failures++; $display("FAIL train end"); end
    checks++; if (busy) begin failures++; $display("FAIL busy idle"); end
    ram_full = 1; #1;
    checks++; if (!busy) begin failures++; $display("FAIL busy from ram_full"); end
    ram_full = 0; buf_full = 1; #1;
    checks++; if (!busy) begin failures++; $display("FAIL busy from buf_full"); end
    checks++; if (ferr) begin failures++; $display("FAIL fast error"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
