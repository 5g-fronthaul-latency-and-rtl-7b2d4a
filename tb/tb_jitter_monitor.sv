// tb_jitter_monitor -- self-checking test of the Eq. (7) jitter monitor.
//
// Part 1 replays the flow-1 departures of Fig. 4(a) of the study (slots 0,
// 3, 5, 6 of an 8-slot, 125-cycle schedule: inter-arrival 2.4, 1.6, 0.8 us)
// on flow 0, a strictly periodic flow on flow 1 and a single packet on flow
// 2: expected jitter 250, 0, 0 cycles, worst 250 on flow 0.
// Part 2 (after clear) sends random arrivals for three flows, plus events
// for a flow number out of range, and compares every output with the
// max-minus-min of the inter-arrival times computed here.
module tb_jitter_monitor;

  localparam int NF = 3;
  localparam int SLOT_A[4] = '{0, 3, 5, 6};   // flow 1 slots in Fig. 4(a)

  logic clk = 0, rst_n = 0, clear = 0;
  logic evt_valid = 0;
  logic [7:0] evt_flow = '0;
  logic [31:0] jitter [NF];
  logic [31:0] max_delay [NF];
  logic [31:0] min_delay [NF];
  logic [15:0] intervals [NF];
  logic [31:0] worst_jitter;
  logic [1:0]  worst_flow;

  int checks = 0, failures = 0;

  jitter_monitor #(.N_FLOWS(NF)) dut (.*);

  always #3.2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // model
  longint last_t [NF];
  longint mx [NF], mn [NF];
  int     nint [NF];
  longint t = 0;

  task automatic model_clear();
    for (int j = 0; j < NF; j++) begin
      last_t[j] = -1; mx[j] = 0; mn[j] = 64'h7FFF_FFFF; nint[j] = 0;
    end
  endtask

  // one cycle; ev = -1 for none
  task automatic step(input int ev);
    evt_valid <= (ev >= 0);
    evt_flow  <= (ev >= 0) ? 8'(ev) : 8'h0;
    if (ev >= 0 && ev < NF) begin
      if (last_t[ev] >= 0) begin
        longint d = t - last_t[ev];
        if (d > mx[ev]) mx[ev] = d;
        if (d < mn[ev]) mn[ev] = d;
        nint[ev]++;
      end
      last_t[ev] = t;
    end
    t++;
    @(posedge clk);
  endtask

  task automatic compare(input string tag);
    longint w = 0;
    evt_valid <= 0;
    @(posedge clk);
    #1;
    for (int j = 0; j < NF; j++) begin
      longint e = (nint[j] > 0) ? mx[j] - mn[j] : 0;
      if (e > w) w = e;
      check(jitter[j] == 32'(e), $sformatf("%s jitter flow %0d: %0d vs %0d", tag, j, jitter[j], e));
      check(intervals[j] == 16'(nint[j]), $sformatf("%s intervals flow %0d", tag, j));
    end
    check(worst_jitter == 32'(w), $sformatf("%s worst jitter %0d vs %0d", tag, worst_jitter, w));
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model_clear();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // Fig. 4(a): 3 schedule periods of 1000 cycles
    for (int c = 0; c < 3000; c++) begin
      int ev;
      ev = -1;
      for (int s = 0; s < 4; s++) if (c % 1000 == SLOT_A[s] * 125) ev = 0;
      if (c % 500 == 60) ev = 1;
      if (c == 400) ev = 2;
      step(ev);
    end
    compare("fig4a");
    check(jitter[0] == 32'd250 && worst_flow == 2'd0, "Fig. 4(a) flow 1 jitter 1.6 us");
    check(max_delay[0] == 32'd375 && min_delay[0] == 32'd125, "2.4 us / 0.8 us extremes");

    // random traffic
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    model_clear();
    for (int c = 0; c < 20000; c++) begin
      int r = $urandom % 100;
      step((r < 3) ? 0 : (r < 5) ? 1 : (r < 6) ? 2 : (r < 7) ? 5 : -1);
    end
    compare("random");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
