// tb_coe_fronthaul_top -- end-to-end test of the CoE fronthaul at its
// default size (three radio equipments, 4 KiB encapsulation buffers,
// 64-entry gate-control list, 512-word switch queues).
//
// Each phase starts from reset:
//  A "jitter-free schedule": three option-1 flows (614.4 Mb/s) with
//    L_P = 1536 bytes, so that a frame is complete every 20 us = 3125
//    cycles exactly. Schedule: 5 slots of 625 cycles, flows in slots 0, 1, 2.
//    Expected: every frame arrives intact at the REC, each flow's payload is
//    one unbroken PRBS-31 stream, the measured jitter is 0 on all flows.
//  B "mismatched schedule": same flows and slot order, but 7 slots of 400
//    cycles, so the schedule repeats every 2800 cycles while frames come
//    every 3125. Some open slots find empty queues (misses) and packets
//    leave 2800 or 5600 cycles apart: jitter of 2800 cycles (17.9 us).
//  C "queue overflow": flow 2's gate is never opened; its 512-word queue
//    holds two 1544-byte frames (193 words each) and then drops.
//  D "slot too short": 150-cycle slots for 195-word frames; slots begin
//    while a frame is still leaving (conflicts).
//  E "searched schedule": as A, but the gate-control list is left empty and
//    the comb-fitting search computes it (three flows, one packet every 5
//    slots); it must report zero jitter, and the traffic must then see none.
// Every phase checks that the REC reports no bad frame. Each mechanism
// (encapsulation, store-and-forward forwarding, miss, conflict, drop, zero
// and non-zero jitter) is counted and a failure is counted for any that
// never happened.
module tb_coe_fronthaul_top;
  import coe_pkg::*;

  localparam int N_RE = 3;

  logic clk = 0, rst_n = 0;
  logic [N_RE-1:0] re_en = '0;
  logic [5:0]  cfg_x [N_RE];
  logic [10:0] cfg_payload_len [N_RE];
  logic [47:0] cfg_sa [N_RE];
  logic [47:0] cfg_da = 48'h02_00_00_00_0E_C0;
  logic        cfg_ts_sel = 1'b1;
  logic        cfg_sched_enable = 0;
  logic [6:0]  cfg_num_slots = 7'd1;
  logic [15:0] cfg_slot_cycles = 16'd625;
  logic        gcl_we = 0;
  logic [5:0]  gcl_addr = '0;
  logic        gcl_open = 0;
  logic [1:0]  gcl_port = '0;
  logic        cfit_start = 0;
  logic [6:0]  cfit_period [N_RE];
  logic        cfit_busy, cfit_feasible;
  logic [6:0]  cfit_jitter;
  word_t       link_word;
  logic        link_valid;
  logic        rec_pay_valid;
  word_t       rec_pay_word;
  logic [7:0]  rec_flow;
  logic        rec_frame_done, rec_frame_ok;
  logic [31:0] rec_frames_ok, rec_frames_bad;
  logic [31:0] re_frames_sent [N_RE];
  logic [N_RE-1:0] re_overflow;
  logic [15:0] sw_sent [N_RE];
  logic [15:0] sw_drops [N_RE];
  logic [15:0] sw_misses, sw_conflicts;
  logic        jit_clear = 0;
  logic [31:0] jitter [N_RE];
  logic [31:0] worst_jitter;

  coe_fronthaul_top dut (.*);

  always #3.2 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // mechanism counters
  int n_encap = 0, n_fwd = 0, n_miss = 0, n_conflict = 0, n_drop = 0;
  int n_zero_jitter = 0, n_jitter = 0, n_rec_ok = 0, n_cfit = 0;

  // ---- per-flow PRBS-31 continuity of the recovered payload
  logic [30:0] hist [N_RE];
  int          nbits [N_RE];
  bit          prbs_on = 0;
  int          prbs_err = 0;
  always @(posedge clk) if (rst_n && rec_pay_valid && prbs_on && rec_flow < N_RE) begin
    int f;
    f = int'(rec_flow);
    for (int k = 0; k < 64; k++)
      if (rec_pay_word.keep[k / 8]) begin
        logic b;
        b = rec_pay_word.data[k];
        if (nbits[f] >= 31 && b != (hist[f][30] ^ hist[f][27])) prbs_err++;
        hist[f] = {hist[f][29:0], b};
        nbits[f]++;
      end
  end

  task automatic write_gcl(input int slot, input bit open, input int port);
    @(negedge clk);
    gcl_we = 1; gcl_addr = 6'(slot); gcl_open = open; gcl_port = 2'(port);
    @(negedge clk);
    gcl_we = 0;
  endtask

  // order: one nibble per slot, slot 0 lowest, F = closed
  task automatic setup(input int x, input int lp, input int nslots, input int slot_cyc,
                       input logic [63:0] order);
    @(negedge clk);
    rst_n = 0; re_en = '0; cfg_sched_enable = 0; prbs_on = 0;
    for (int j = 0; j < N_RE; j++) begin
      cfg_x[j] = 6'(x); cfg_payload_len[j] = 11'(lp);
      cfg_sa[j] = 48'h02_00_00_00_00_10 + 48'(j);
      hist[j] = '0; nbits[j] = 0;
    end
    cfg_num_slots = 7'(nslots);
    cfg_slot_cycles = 16'(slot_cyc);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < nslots; s++)
      write_gcl(s, order[4*s +: 4] != 4'hF, int'(order[4*s +: 2]));
    @(negedge clk);
    re_en = '1;
    cfg_sched_enable = 1;
  endtask

  task automatic tally(input string phase);
    int enc = 0, fwd = 0;
    for (int j = 0; j < N_RE; j++) begin
      enc += int'(re_frames_sent[j]);
      fwd += int'(sw_sent[j]);
      n_drop += int'(sw_drops[j]);
      check(!re_overflow[j], $sformatf("%s: no encapsulator overflow", phase));
    end
    n_encap += enc; n_fwd += fwd;
    n_miss += int'(sw_misses); n_conflict += int'(sw_conflicts);
    n_rec_ok += int'(rec_frames_ok);
    check(rec_frames_bad == 0, $sformatf("%s: no bad frame at the REC (%0d)", phase, rec_frames_bad));
    check(int'(rec_frames_ok) == fwd, $sformatf("%s: REC got every forwarded frame (%0d/%0d)",
          phase, rec_frames_ok, fwd));
    $display("%s: encapsulated %0d forwarded %0d misses %0d conflicts %0d drops %0d/%0d/%0d jitter %0d/%0d/%0d cycles",
             phase, enc, fwd, sw_misses, sw_conflicts, sw_drops[0], sw_drops[1], sw_drops[2],
             jitter[0], jitter[1], jitter[2]);
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // ---------------- A: jitter-free schedule
    setup(1, 1536, 5, 625, 64'hFFFF_FFFF_FFFF_F210);
    prbs_on = 1;
    repeat (8 * 3125 + 2000) @(posedge clk);
    tally("A");
    for (int j = 0; j < N_RE; j++) begin
      check(sw_sent[j] >= 16'd7, $sformatf("A: flow %0d forwarded %0d frames", j, sw_sent[j]));
      check(jitter[j] == 0, $sformatf("A: flow %0d jitter %0d", j, jitter[j]));
    end
    check(dut.u_jit.intervals[0] >= 16'd6, "A: jitter measured over several packets");
    check(prbs_err == 0, $sformatf("A: payload continuity (%0d bit errors)", prbs_err));
    if (worst_jitter == 0) n_zero_jitter++;

    // ---------------- B: mismatched schedule period
    setup(1, 1536, 7, 400, 64'hFFFF_FFFF_FFFF_F210);
    prbs_on = 1;
    repeat (10 * 3125 + 2000) @(posedge clk);
    tally("B");
    check(prbs_err == 0, $sformatf("B: payload continuity (%0d bit errors)", prbs_err));
    // each flow's departures are one or two schedule periods apart
    for (int j = 0; j < N_RE; j++)
      check(jitter[j] == 32'd0 || jitter[j] == 32'd2800, $sformatf("B: flow %0d jitter %0d", j, jitter[j]));
    check(worst_jitter == 32'd2800, $sformatf("B: worst jitter %0d, expected 2800", worst_jitter));
    if (worst_jitter != 0) n_jitter++;

    // ---------------- C: flow 2 never served
    setup(1, 1544, 5, 625, 64'hFFFF_FFFF_FFFF_FF10);
    repeat (4 * 3142 + 2000) @(posedge clk);
    tally("C");
    check(sw_drops[2] >= 16'd1 && sw_drops[0] == 0 && sw_drops[1] == 0, "C: flow 2 drops only");

    // ---------------- D: slots shorter than a frame
    setup(4, 1536, 4, 150, 64'hFFFF_FFFF_FFFF_1010);
    repeat (12_000) @(posedge clk);
    tally("D");
    check(sw_conflicts >= 16'd1, "D: conflicts counted");

    // ---------------- E: schedule from the comb-fitting search
    setup(1, 1536, 5, 625, 64'hFFFF_FFFF_FFFF_FFFF);
    @(negedge clk);
    re_en = '0; cfg_sched_enable = 0;
    for (int j = 0; j < N_RE; j++) cfit_period[j] = 7'd5;
    @(negedge clk);
    cfit_start = 1;
    @(negedge clk);
    cfit_start = 0;
    while (cfit_busy) @(negedge clk);
    check(cfit_feasible && cfit_jitter == 0, "E: search found a zero-jitter schedule");
    for (int s = 0; s < 5; s++)
      check(dut.u_sw.gcl[s] == ((s < 3) ? {1'b1, 2'(s)} : 3'b000),
            $sformatf("E: slot %0d entry %b", s, dut.u_sw.gcl[s]));
    @(negedge clk);
    prbs_on = 1;
    re_en = '1; cfg_sched_enable = 1;
    repeat (8 * 3125 + 2000) @(posedge clk);
    tally("E");
    check(prbs_err == 0, $sformatf("E: payload continuity (%0d bit errors)", prbs_err));
    for (int j = 0; j < N_RE; j++) begin
      check(sw_sent[j] >= 16'd7, $sformatf("E: flow %0d forwarded %0d frames", j, sw_sent[j]));
      check(jitter[j] == 0, $sformatf("E: flow %0d jitter %0d", j, jitter[j]));
    end
    if (cfit_feasible && worst_jitter == 0 && sw_sent[0] != 0) n_cfit++;

    check(n_encap > 0, "mechanism: encapsulation");
    check(n_cfit > 0, "mechanism: comb-fitting schedule search");
    check(n_fwd > 0, "mechanism: scheduled forwarding");
    check(n_rec_ok > 0, "mechanism: FCS-checked de-encapsulation");
    check(n_miss > 0, "mechanism: open slot with empty queue");
    check(n_conflict > 0, "mechanism: slot conflict");
    check(n_drop > 0, "mechanism: queue overflow drop");
    check(n_zero_jitter > 0, "mechanism: zero-jitter schedule");
    check(n_jitter > 0, "mechanism: jitter from a mismatched schedule");
    $display("mechanisms: encap %0d fwd %0d rec_ok %0d miss %0d conflict %0d drop %0d zero-jitter %0d jitter %0d c-fit %0d",
             n_encap, n_fwd, n_rec_ok, n_miss, n_conflict, n_drop, n_zero_jitter, n_jitter, n_cfit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
