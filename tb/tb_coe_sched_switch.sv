// tb_coe_sched_switch -- self-checking test of the scheduled switch, built
// around the three-flow example of the study (Fig. 4): flows of 5000, 2500
// and 1250 Mb/s on a 10 Gb/s output, timeslot T_ETS = 0.8 us (125 cycles),
// schedule length L_S = 6.4 us (8 slots).
//
// Flow j's k-th frame (119 words) is written into port j so that it is
// complete 31 cycles before time k*T_j (T = 1.6, 3.2, 6.4 us = 250, 500,
// 1000 cycles). The test checks every forwarded frame word for word against
// what was injected, that no frame leaves before its last word came in
// (store-and-forward), that it leaves 2 cycles after its slot starts, and
// computes the jitter of the study's Eq. (7) from the departure times:
//  (a) slot order F1 F2 F3 F1 F2 F1 F1 -, read off Fig. 4(a): flow 1
//      inter-departure times 2.4 / 0.8 us, jitter 1.6 us (250 cycles);
//  (b) slot order F1 F2 F1 F3 F1 F2 F1 -, Fig. 4(b): jitter 0 on all flows.
// Then it provokes each counted event: a miss (open slot, empty queue, and a
// frame not yet complete), a conflict (slot shorter than a frame) and a
// drop (queue of 512 words offered 5 frames of 119 words).
module tb_coe_sched_switch;
  import coe_pkg::*;

  localparam int NP = 3;
  localparam int FW = 119;      // words per frame
  localparam int SLOT = 125;    // 0.8 us

  logic clk = 0, rst_n = 0;
  logic [NP-1:0] in_valid = '0;
  word_t in_word [NP];
  logic cfg_enable = 0;
  logic [6:0] cfg_num_slots = 7'd8;
  logic [15:0] cfg_slot_cycles = 16'(SLOT);
  logic gcl_we = 0;
  logic [5:0] gcl_addr = '0;
  logic gcl_open = 0;
  logic [1:0] gcl_port = '0;
  word_t out_word;
  logic out_valid;
  logic [5:0] cur_slot;
  logic [15:0] sent [NP];
  logic [15:0] drops [NP];
  logic [15:0] misses, conflicts;

  int checks = 0, failures = 0;

  coe_sched_switch dut (.*);

  always #3.2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc++;

  // injected frames, per port: words and the cycle the last word went in
  logic [63:0] sent_words [NP][$];
  longint      eop_cyc    [NP][$];
  longint      dep        [NP][$];   // departure (sop) cycles per flow
  longint      en_cyc;

  task automatic inject(input int p, input int nwords, input int tag);
    for (int w = 0; w < nwords; w++) begin
      logic [63:0] d;
      d = (w == 0) ? {32'(tag), 8'(p), 24'h5EC0DE} : {$urandom, $urandom};
      in_valid[p] <= 1'b1;
      in_word[p]  <= '{data: d, keep: '1, sop: (w == 0), eop: (w == nwords - 1)};
      sent_words[p].push_back(d);
      @(posedge clk);
      if (w == nwords - 1) eop_cyc[p].push_back(cyc);
    end
    in_valid[p] <= 1'b0;
    in_word[p]  <= '0;
  endtask

  // monitor: compare with the injected words, record departures
  int cur_p = -1;
  int wi;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_word.sop) begin
      cur_p = int'(out_word.data[31:24]);
      wi = 0;
      check(cur_p < NP, "flow tag");
      if (cur_p < NP) begin
        dep[cur_p].push_back(cyc);
        check(eop_cyc[cur_p].size() > 0 && eop_cyc[cur_p][0] < cyc, "store-and-forward");
        // enable is seen one cycle after en_cyc; slots then begin every
        // SLOT cycles and a frame leaves 2 cycles into its slot
        check((cyc - en_cyc - 3) % SLOT == 0 || cfg_slot_cycles != 16'(SLOT),
              $sformatf("frame leaves 2 cycles into its slot (%0d)", cyc - en_cyc));
        if (eop_cyc[cur_p].size() > 0) void'(eop_cyc[cur_p].pop_front());
      end
    end
    if (cur_p >= 0 && cur_p < NP) begin
      check(sent_words[cur_p].size() > 0 && out_word.data == sent_words[cur_p][0], "frame word");
      if (sent_words[cur_p].size() > 0) void'(sent_words[cur_p].pop_front());
      wi++;
      if (out_word.eop) begin
        check(wi == FW, "frame length");
        cur_p = -1;
      end
    end
  end

  function automatic longint jitter_of(input longint t[$]);
    longint mx = 0, mn = 64'h7FFF_FFFF_FFFF;
    for (int i = 0; i + 1 < t.size(); i++) begin
      longint d = t[i+1] - t[i];
      if (d > mx) mx = d;
      if (d < mn) mn = d;
    end
    return (t.size() < 2) ? 0 : mx - mn;
  endfunction

  task automatic write_gcl(input int slot, input bit open, input int port);
    @(negedge clk);
    gcl_we = 1; gcl_addr = 6'(slot); gcl_open = open; gcl_port = 2'(port);
    @(negedge clk);
    gcl_we = 0;
    @(posedge clk);
  endtask

  task automatic reset_dut();
    cfg_enable <= 0;
    rst_n <= 0;
    for (int p = 0; p < NP; p++) begin
      sent_words[p] = {}; eop_cyc[p] = {}; dep[p] = {};
      in_valid[p] <= 0; in_word[p] <= '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
  endtask

  // flow j's k-th frame complete 31 cycles before k*T_j after enable
  task automatic run_fig4(input logic [31:0] order, input int periods, output longint jit[NP]);
    int per[NP] = '{250, 500, 1000};
    reset_dut();
    // 4 bits per slot, slot 0 in the low nibble, F = gate closed
    for (int s = 0; s < 8; s++) write_gcl(s, order[4*s +: 4] != 4'hF, int'(order[4*s +: 2]));
    cfg_num_slots <= 7'd8;
    cfg_slot_cycles <= 16'(SLOT);
    // the first frames are in before the schedule starts
    fork
      inject(0, FW, 0);
      inject(1, FW, 0);
      inject(2, FW, 0);
    join
    repeat (30) @(posedge clk);
    cfg_enable <= 1;
    en_cyc = cyc + 1;
    fork
      for (int k = 1; k < periods * 4; k++) begin
        while (cyc < en_cyc + k * per[0] - FW - 31) @(posedge clk);
        inject(0, FW, k);
      end
      for (int k = 1; k < periods * 2; k++) begin
        while (cyc < en_cyc + k * per[1] - FW - 31) @(posedge clk);
        inject(1, FW, k);
      end
      for (int k = 1; k < periods; k++) begin
        while (cyc < en_cyc + k * per[2] - FW - 31) @(posedge clk);
        inject(2, FW, k);
      end
    join
    repeat (1200) @(posedge clk);
    for (int p = 0; p < NP; p++) jit[p] = jitter_of(dep[p]);
    // the traffic stops after `periods` schedule periods; the one period run
    // after that finds all 7 open slots empty
    check(misses == 7 && conflicts == 0, $sformatf("7 trailing misses (%0d), no conflicts (%0d)", misses, conflicts));
    check(sent[0] == 16'(periods * 4) && sent[1] == 16'(periods * 2) && sent[2] == 16'(periods),
          "frames forwarded per flow");
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint jit[NP];
    logic [31:0] ord_a = 32'hF001_0210;   // F1 F2 F3 F1 F2 F1 F1 -
    logic [31:0] ord_b = 32'hF010_2010;   // F1 F2 F1 F3 F1 F2 F1 -

    run_fig4(ord_a, 3, jit);
    $display("Fig. 4(a) schedule: jitter %0d / %0d / %0d cycles", jit[0], jit[1], jit[2]);
    check(jit[0] == 250, "flow 1 jitter 1.6 us in schedule (a)");
    check(jit[2] == 0, "flow 3 jitter 0 in schedule (a)");
    // flow 1 inter-departure times are 2.4, 1.6 and 0.8 us
    check(dep[0][1] - dep[0][0] == 375 && dep[0][2] - dep[0][1] == 250 &&
          dep[0][3] - dep[0][2] == 125, "flow 1 inter-departure times (a)");

    run_fig4(ord_b, 3, jit);
    $display("Fig. 4(b) schedule: jitter %0d / %0d / %0d cycles", jit[0], jit[1], jit[2]);
    check(jit[0] == 0 && jit[1] == 0 && jit[2] == 0, "zero jitter in schedule (b)");
    check(dep[0][1] - dep[0][0] == 250, "flow 1 period 1.6 us (b)");

    // miss: open slot, empty queue; then a frame still arriving at slot start
    reset_dut();
    write_gcl(0, 1, 1);
    write_gcl(1, 0, 0);
    cfg_num_slots <= 7'd2;
    cfg_slot_cycles <= 16'(SLOT);
    cfg_enable <= 1;
    en_cyc = cyc + 1;
    repeat (2 * SLOT) @(posedge clk);
    check(misses == 16'd1, $sformatf("miss on empty queue (%0d)", misses));
    // start a frame 20 cycles before slot 0 comes round again: incomplete
    while ((cyc - en_cyc) % (2 * SLOT) != 2 * SLOT - 20) @(posedge clk);
    inject(1, FW, 7);
    repeat (3 * SLOT) @(posedge clk);
    // misses: slot at 0, slot at 250 (still empty), slot at 500 (frame
    // begun at 480 is still coming in), then it leaves at 750
    check(misses == 16'd3, $sformatf("incomplete frame not sent (%0d misses)", misses));
    check(sent[1] == 16'd1, "frame sent in the following period");

    // conflict: one port every slot, slot shorter than a frame
    reset_dut();
    write_gcl(0, 1, 2);
    write_gcl(1, 1, 2);
    cfg_num_slots <= 7'd2;
    cfg_slot_cycles <= 16'd100;
    inject(2, FW, 1);
    inject(2, FW, 2);
    cfg_enable <= 1;
    en_cyc = cyc + 1;
    repeat (500) @(posedge clk);
    check(conflicts >= 16'd1, $sformatf("conflict counted (%0d)", conflicts));
    check(sent[2] == 16'd2, "both frames still sent");

    // drop: 5 frames of 119 words into a 512-word queue, gates closed
    reset_dut();
    write_gcl(0, 0, 0);
    cfg_num_slots <= 7'd1;
    for (int f = 0; f < 5; f++) inject(0, FW, f);
    check(drops[0] == 16'd1, $sformatf("one frame dropped (%0d)", drops[0]));
    // the 4 stored frames are intact: open the gate and drain them
    for (int k = 0; k < FW; k++) void'(sent_words[0].pop_back());
    write_gcl(0, 1, 0);
    cfg_slot_cycles <= 16'(SLOT);
    cfg_enable <= 1;
    en_cyc = cyc + 1;
    repeat (6 * SLOT) @(posedge clk);
    check(sent[0] == 16'd4, $sformatf("4 stored frames forwarded (%0d)", sent[0]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
