// tb_coe_decap -- self-checking test of the REC-side de-encapsulator.
//
// Frames are built here, independently of coe_encap: three header words
// (DA, SA, EtherType, 6-byte RoE header, FCS from a bit-serial CRC-32) and
// random payloads of random length (61..1500 bytes). The test checks the
// payload words and byte enables that come out, the parsed header fields,
// the arrival pulse (2 cycles after the first word, with the flow id) and
// frame_ok. Then it sends frames with a flipped payload bit, a wrong FCS, a
// wrong EtherType and a frame cut short inside its header, and checks that
// each is counted as bad while good frames around them still pass.
module tb_coe_decap;
  import coe_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  word_t in_word = '0;
  logic pay_valid;
  word_t pay_word;
  logic [47:0] hdr_da, hdr_sa;
  logic [15:0] hdr_type;
  roe_hdr_t hdr_roe;
  logic arr_valid;
  logic [7:0] arr_flow;
  logic frame_done, frame_ok;
  logic [31:0] frames_ok, frames_bad;

  int checks = 0, failures = 0;

  coe_decap dut (.*);

  always #3.2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic logic [31:0] crc_bits(input byte unsigned b[$]);
    logic [31:0] c = 32'hFFFF_FFFF;
    foreach (b[i])
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = c[0] ^ b[i][k];
        c  = c >> 1;
        if (fb) c = c ^ 32'hEDB88320;
      end
    return ~c;
  endfunction

  byte unsigned exp_pay[$];
  int  n_arr = 0, n_done = 0, n_ok_done = 0;
  longint cyc = 0, sop_cyc;
  always @(posedge clk) cyc++;

  // payload monitor
  int pay_bytes = 0;
  bit pay_bad = 0;
  always @(posedge clk) if (rst_n) begin
    if (pay_valid)
      for (int k = 0; k < 8; k++)
        if (pay_word.keep[k]) begin
          if (exp_pay.size() == 0 || pay_word.data[8*k +: 8] != exp_pay[0]) pay_bad = 1;
          if (exp_pay.size() > 0) void'(exp_pay.pop_front());
        end
    if (arr_valid) n_arr++;
    if (frame_done) begin
      n_done++;
      if (frame_ok) n_ok_done++;
    end
  end

  // send a frame; kind 0 good, 1 payload bit flip, 2 FCS wrong,
  // 3 wrong EtherType, 4 cut after the first header word
  task automatic send(input int plen, input logic [7:0] flow, input int kind);
    byte unsigned b[$];
    byte unsigned pay[$];
    roe_hdr_t roe;
    logic [47:0] da = 48'h0A_0B_0C_0D_0E_0F, sa = 48'h12_34_56_78_9A_BC;
    logic [15:0] et;
    logic [31:0] fcs;
    int nw;
    et  = (kind == 3) ? 16'h0800 : 16'hFC3D;
    roe = '{version: 2'd1, pkt_type: 4'd0, sof: flow[0], ts_sel: 1'b1, flow_id: flow,
            timestamp: $urandom};
    for (int k = 0; k < 6; k++) b.push_back(da[47-8*k -: 8]);
    for (int k = 0; k < 6; k++) b.push_back(sa[47-8*k -: 8]);
    b.push_back(et[15:8]); b.push_back(et[7:0]);
    for (int k = 0; k < 6; k++) b.push_back(roe[47-8*k -: 8]);
    for (int k = 0; k < plen; k++) pay.push_back(8'($urandom));
    fcs = crc_bits({b, pay});
    if (kind == 2) fcs = fcs ^ 32'h1;
    if (kind == 1) pay[plen/2] = pay[plen/2] ^ 8'h10;
    if (kind != 4) foreach (pay[i]) exp_pay.push_back(pay[i]);
    for (int k = 0; k < 4; k++) b.push_back(fcs[8*k +: 8]);
    b = {b, pay};
    nw = (kind == 4) ? 1 : (b.size() + 7) / 8;
    for (int w = 0; w < nw; w++) begin
      logic [63:0] d = '0;
      logic [7:0] kp = '0;
      for (int k = 0; k < 8; k++)
        if (8*w + k < b.size()) begin d[8*k +: 8] = b[8*w + k]; kp[k] = 1; end
      in_valid <= 1;
      in_word  <= '{data: d, keep: kp, sop: (w == 0), eop: (w == nw - 1)};
      @(posedge clk);
      if (w == 0) sop_cyc = cyc;
    end
    in_valid <= 0;
    in_word  <= '0;
    repeat (3) @(posedge clk);
    if (kind != 4) begin
      check(hdr_da == da && hdr_sa == sa && hdr_roe == roe, "parsed header");
      check(arr_flow == flow, "arrival flow id");
    end
  endtask

  // arrival pulse 2 cycles after the DUT took the first word (sop_cyc is
  // the count of the edge before that one, hence + 3)
  always @(posedge clk) if (rst_n && arr_valid) check(cyc == sop_cyc + 3, $sformatf("arrival pulse 2 cycles after the first word (%0d)", cyc - sop_cyc));

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int good = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 12; i++) begin
      send(61 + ($urandom % 1440), 8'(i), 0);
      good++;
      repeat (2) @(posedge clk);
    end
    send(1500, 8'd3, 0); good++;
    send(1000, 8'd2, 0); good++;
    check(frames_ok == 32'(good) && frames_bad == 0, "good frames accepted");
    check(!pay_bad && exp_pay.size() == 0, "payload bytes");
    check(n_done == good && n_ok_done == good, "frame_done / frame_ok pulses");
    for (int kind = 1; kind <= 4; kind++) begin
      send(200 + 8 * kind, 8'(kind), kind);
      send(333, 8'd9, 0); good++;
      repeat (4) @(posedge clk);
      check(frames_bad == 32'(kind), $sformatf("bad frame kind %0d counted (%0d)", kind, frames_bad));
      check(frames_ok == 32'(good), "next good frame passes");
    end
    check(n_arr == good + 3, $sformatf("arrival pulses %0d", n_arr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
