// tb_cpri_prbs_source -- self-checking test of the CPRI PRBS source.
//
// Runs CPRI option 1 (X = 1) for one full 10 ms radio frame plus a little
// (1.5625 M cycles of 6.4 ns) and checks:
//  * every output bit obeys the PRBS-31 recurrence b[n] = b[n-31] ^ b[n-28];
//  * the word rate: after C cycles the number of words equals
//    floor(C * 7680 * X / 125000) within one (614.4 Mb/s = 0.49152 B/cycle);
//  * the basic- and hyper-frame numbers of each word, worked out from its
//    byte offset 8n (20*X bytes per basic frame, 256 per hyper frame);
//  * out_rf_start on word 0 and on word 768000*X/8 = 96000 only.
// Then it switches to option 6 (X = 10) and checks the rate again.
module tb_cpri_prbs_source;
  import coe_pkg::*;

  logic clk = 0, rst_n = 0, en = 0;
  logic [5:0] cfg_x = 6'd1;
  logic out_valid, out_rf_start;
  logic [63:0] out_data;
  logic [7:0] out_hfn, out_bfn;

  int checks = 0, failures = 0;

  cpri_prbs_source dut (.*);

  always #3.2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // bit history for the recurrence check
  logic [127:0] hist;
  longint nwords = 0;
  longint ncyc   = 0;
  int rf_seen = 0;
  bit bad_rec = 0, bad_fr = 0, bad_rf = 0;

  always @(posedge clk) if (rst_n && en) begin
    ncyc++;
    if (out_valid) begin
      longint unsigned byte0, bf;
      logic [127:0] h;
      h = {out_data, hist[127:64]};
      if (nwords >= 1)
        for (int k = 64; k < 128; k++)
          if (h[k] != (h[k-31] ^ h[k-28])) bad_rec = 1;
      hist = h;
      byte0 = 64'(nwords) * 8;
      bf = byte0 / (20 * cfg_x);
      if (cfg_x == 1) begin
        if (out_bfn != 8'(bf % 256) || out_hfn != 8'((bf / 256) % 150)) bad_fr = 1;
        if (out_rf_start != (byte0 % 768000 == 0)) bad_rf = 1;
        if (out_rf_start) rf_seen++;
      end
      nwords++;
    end
  end

  initial begin
    // watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_w;
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    en = 1;
    repeat (1_570_000) @(posedge clk);
    #1;
    // words produced for ncyc enabled cycles (output lags by one cycle)
    exp_w = (ncyc * 7680 * 1) / 125000;
    check(nwords >= exp_w - 1 && nwords <= exp_w + 1, $sformatf("rate X=1: %0d words, expected %0d", nwords, exp_w));
    check(!bad_rec, "PRBS-31 recurrence");
    check(!bad_fr,  "basic/hyper frame numbers");
    check(!bad_rf,  "radio frame start flag position");
    check(rf_seen == 2, $sformatf("radio frame starts seen: %0d", rf_seen));
    // option 6 rate
    en = 0;
    rst_n = 0;
    @(posedge clk);
    cfg_x = 6'd10;
    nwords = 0; ncyc = 0; hist = '0;
    rst_n = 1;
    @(posedge clk);
    en = 1;
    repeat (100_000) @(posedge clk);
    #1;
    exp_w = (ncyc * 7680 * 10) / 125000;
    check(nwords >= exp_w - 1 && nwords <= exp_w + 1, $sformatf("rate X=10: %0d words, expected %0d", nwords, exp_w));
    check(!bad_rec, "PRBS-31 recurrence at X=10");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
