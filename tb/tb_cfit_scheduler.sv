// tb_cfit_scheduler -- self-checking test of the comb-fitting scheduler.
//
// Each case starts the search, captures the gate-control list it writes
// (one entry per cycle) and checks, independently of the scheduler:
//  * one entry per slot, slots 0..N_S-1 in order, done right after the last;
//  * every flow has exactly N_S / P_f open slots;
//  * the jitter recomputed here from the written list (per flow max - min
//    cyclic distance between its slots, worst over flows) equals best_jitter.
// Cases:
//  1. the three-flow example (P = 2, 4, 8 slots of an 8-slot schedule):
//     jitter 0 and the list F1 F2 F1 F3 F1 F2 F1 - that the flow order
//     1 > 2 > 3 gives (flow 2 slid by one slot, flow 3 by three);
//  2. P = 2, 3, 6 in 6 slots: no zero-jitter schedule exists (the 2-slot
//     and 3-slot combs always collide); the best is 2 slots;
//  3. P = 1, 2, 4 in 4 slots: 7 packets for 4 slots, not feasible;
//  4. random feasible sets of periods dividing 48 or 64 slots.
module tb_cfit_scheduler;

  localparam int NF = 3;
  localparam int MS = 64;

  logic clk = 0, rst_n = 0, start = 0;
  logic [6:0] cfg_num_slots = 7'd8;
  logic [6:0] cfg_period [NF];
  logic busy, done, feasible;
  logic [6:0] best_jitter;
  logic gcl_we;
  logic [5:0] gcl_addr;
  logic gcl_open;
  logic [1:0] gcl_port;

  cfit_scheduler dut (.*);

  always #3.2 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // captured list: -1 closed, else the flow
  int gl [MS];
  int nw;
  always @(posedge clk) if (rst_n && gcl_we) begin
    check(int'(gcl_addr) == nw, "list written in slot order");
    gl[gcl_addr] = gcl_open ? int'(gcl_port) : -1;
    nw++;
  end

  function automatic int list_jitter(input int ns);
    int w = 0;
    for (int f = 0; f < NF; f++) begin
      int first = -1, last = -1, mn = 1000, mx = 0;
      for (int s = 0; s < ns; s++)
        if (gl[s] == f) begin
          if (last >= 0) begin
            if (s - last < mn) mn = s - last;
            if (s - last > mx) mx = s - last;
          end else first = s;
          last = s;
        end
      if (first >= 0) begin
        int g = first + ns - last;
        if (g < mn) mn = g;
        if (g > mx) mx = g;
        if (mx - mn > w) w = mx - mn;
      end
    end
    return w;
  endfunction

  task automatic run(input int ns, input int p0, input int p1, input int p2, output int jit);
    int per [NF];
    int cyc;
    per = '{p0, p1, p2};
    @(negedge clk);
    cfg_num_slots = 7'(ns);
    for (int f = 0; f < NF; f++) cfg_period[f] = 7'(per[f]);
    for (int s = 0; s < MS; s++) gl[s] = -2;
    nw = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 100_000) begin @(negedge clk); cyc++; end
    check(done && !busy, "search finished");
    check(nw == ns, $sformatf("%0d list entries for %0d slots", nw, ns));
    if (feasible)
      for (int f = 0; f < NF; f++) begin
        int n = 0;
        for (int s = 0; s < ns; s++) if (gl[s] == f) n++;
        check(n == ns / per[f], $sformatf("flow %0d has %0d slots, expected %0d", f, n, ns / per[f]));
      end
    jit = list_jitter(ns);
    if (feasible) check(int'(best_jitter) == jit, $sformatf("reported jitter %0d, list gives %0d", best_jitter, jit));
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int jit;
    for (int f = 0; f < NF; f++) cfg_period[f] = 7'd1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. three-flow example
    run(8, 2, 4, 8, jit);
    check(feasible && jit == 0, $sformatf("example: zero jitter (%0d)", jit));
    check(gl[0] == 0 && gl[1] == 1 && gl[2] == 0 && gl[3] == 2 && gl[4] == 0 &&
          gl[5] == 1 && gl[6] == 0 && gl[7] == -1, "example: list F1 F2 F1 F3 F1 F2 F1 -");

    // 2. no zero-jitter schedule exists
    run(6, 2, 3, 6, jit);
    check(feasible && jit == 2, $sformatf("6-slot case: best jitter 2 (%0d)", jit));

    // 3. overload
    run(4, 1, 2, 4, jit);
    check(!feasible, "7 packets in 4 slots: not feasible");

    // 4. random sets
    for (int k = 0; k < 12; k++) begin
      int ns, p[NF], load;
      int divs48[8] = '{2, 3, 4, 6, 8, 12, 16, 24};
      int divs64[5] = '{2, 4, 8, 16, 32};
      ns = (k % 2) ? 64 : 48;
      do begin
        load = 0;
        for (int f = 0; f < NF; f++) begin
          p[f] = (ns == 48) ? divs48[$urandom % 8] : divs64[$urandom % 5];
          load += ns / p[f];
        end
      end while (load > ns);
      run(ns, p[0], p[1], p[2], jit);
      check(feasible, $sformatf("random set %0d/%0d/%0d of %0d slots feasible", p[0], p[1], p[2], ns));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
