// tb_table2_encap -- encapsulation delay of every CPRI option / payload size
// pair of the CoE parameter table of the study (options 1-6, L_P = 1250 and
// 1500 bytes).
//
// A cpri_prbs_source at option k (X = 1, 2, 4, 5, 8, 10 bytes per CPRI word)
// feeds a coe_encap at default parameters. For each pair the test times 10
// consecutive frames and checks:
//  * the average time between frames, T_encap = L_P / R_CPRI, against the
//    table's value to within 0.02 us (the table rounds to 0.01 us; the words
//    arrive at slightly irregular times, at most 2.5 cycles apart at X = 10);
//  * that each frame carries 3 header words (19.2 ns of MAC/RoE overhead)
//    and ceil(L_P / 8) payload words;
//  * that the average period is the exact L_P * 15625 / (7680 * X) cycles
//    to within one cycle;
//  * the number of frames per 10 ms radio frame, ceil(768000 * X / L_P),
//    against the table (arithmetic only, a full radio frame is not
//    simulated). The table gives 3073 for option 4 at 1250 bytes, where the
//    division is exact (3072); that one entry is allowed one extra frame.
// The table's T_encap values are truncated to 0.01 us (16.271 -> 16.27).
module tb_table2_encap;
  import coe_pkg::*;

  localparam int NOPT = 6;
  localparam int XOPT [NOPT] = '{1, 2, 4, 5, 8, 10};
  // T_encap in units of 0.01 us, from the table
  localparam int T1250 [NOPT] = '{1627, 813, 406, 325, 203, 162};
  localparam int T1500 [NOPT] = '{1953, 976, 488, 390, 244, 195};
  localparam int N1250 [NOPT] = '{615, 1229, 2458, 3073, 4916, 6144};
  localparam int N1500 [NOPT] = '{512, 1024, 2048, 2560, 4096, 5120};

  logic clk = 0, rst_n = 0, en = 0;
  logic [5:0] cfg_x = 6'd1;
  logic src_valid, src_rf;
  logic [63:0] src_data;
  logic [7:0] hfn, bfn;
  logic [10:0] cfg_payload_len = 11'd1250;
  word_t out_word;
  logic out_valid, overflow;
  logic [31:0] frames_sent;

  cpri_prbs_source u_src (
    .clk, .rst_n, .en, .cfg_x,
    .out_valid (src_valid), .out_data (src_data), .out_rf_start (src_rf),
    .out_hfn (hfn), .out_bfn (bfn)
  );

  coe_encap u_enc (
    .clk, .rst_n,
    .in_valid (src_valid), .in_data (src_data), .in_rf_start (src_rf),
    .cfg_payload_len,
    .cfg_da (48'h02_00_00_00_0E_C0), .cfg_sa (48'h02_00_00_00_00_10),
    .cfg_flow_id (8'd1), .cfg_ts_sel (1'b1),
    .out_word, .out_valid, .frames_sent, .overflow
  );

  always #3.2 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc++;

  longint sops[$];
  int     words, bad_len;
  int     lp_now;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_word.sop) begin
      sops.push_back(cyc);
      words = 0;
    end
    words++;
    if (out_word.eop && words != 3 + (lp_now + 7) / 8) bad_len++;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < 2; l++)
      for (int o = 0; o < NOPT; o++) begin
        int lp, t_tab, n_tab, t_meas, n_calc;
        real per;
        lp = l ? 1500 : 1250;
        t_tab = l ? T1500[o] : T1250[o];
        n_tab = l ? N1500[o] : N1250[o];
        @(negedge clk);
        rst_n = 0; en = 0;
        cfg_x = 6'(XOPT[o]); cfg_payload_len = 11'(lp); lp_now = lp;
        sops = {}; bad_len = 0;
        repeat (3) @(negedge clk);
        rst_n = 1;
        @(negedge clk);
        en = 1;
        while (sops.size() < 11) @(posedge clk);
        per = real'(sops[10] - sops[0]) / 10.0;
        t_meas = int'(per * 0.64 + 0.5);          // 6.4 ns = 0.64 x 0.01 us
        n_calc = (768000 * XOPT[o] + lp - 1) / lp;
        $display("option %0d, L_P %0d: T_encap %0.3f us (table %0d.%02d us), %0d frames per radio frame",
                 o + 1, lp, per * 0.0064, t_tab / 100, t_tab % 100, n_calc);
        check(t_meas >= t_tab - 2 && t_meas <= t_tab + 2,
              $sformatf("option %0d L_P %0d: T_encap %0d vs %0d (0.01 us)", o + 1, lp, t_meas, t_tab));
        check(bad_len == 0 && !overflow, $sformatf("option %0d L_P %0d: frame lengths", o + 1, lp));
        // the table lists 3073 where 768000*5/1250 = 3072 exactly (option 6
        // at 1250 bytes, also exact, is listed as 6144): allow one extra
        // frame where the division is exact
        check(n_calc == n_tab || ((768000 * XOPT[o]) % lp == 0 && n_tab == n_calc + 1),
              $sformatf("option %0d L_P %0d: %0d frames per radio frame vs %0d", o + 1, lp, n_calc, n_tab));
        // the measured period is the exact one, L_P * 15625 / (7680 * X)
        // cycles, to within one cycle
        check(per > real'(lp) * 15625.0 / (7680.0 * XOPT[o]) - 1.0 &&
              per < real'(lp) * 15625.0 / (7680.0 * XOPT[o]) + 1.0,
              $sformatf("option %0d L_P %0d: period %0.2f cycles", o + 1, lp, per));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
