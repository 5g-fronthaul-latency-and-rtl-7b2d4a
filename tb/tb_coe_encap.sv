// tb_coe_encap -- self-checking test of the CoE encapsulator.
//
// Drives random CPRI line data at the exact rate of a CPRI option and keeps
// its own copy of every byte. Each output frame is checked against a model
// written here:
//  * dst_src / src_len_roe_header / roe_header_fcs words: addresses,
//    EtherType 0xFC3D, RoE version / type / SOF / flow id / timestamp;
//  * the payload equals the next L_P input bytes, last word partly filled;
//  * the FCS equals a bit-serial CRC-32 (checked first on "123456789");
//  * frame length 3 + ceil(L_P/8) words, header 3 cycles (19.2 ns);
//  * the header leaves exactly 2 cycles after the last payload byte came in;
//  * frames follow each other every T_encap = L_P / R_CPRI on average
//    (19.53 us for L_P = 1500 at option 1, as in Table II of the study);
//  * at least 2 idle cycles (20 bytes with the unused lanes) between frames.
// Runs three configurations: (L_P, option) = (1500, 1) with sequence-number
// timestamps, (1250, 2) with time stamps, (1000, 6 with X = 10).
module tb_coe_encap;
  import coe_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_rf_start = 0;
  logic [63:0] in_data = '0;
  logic [10:0] cfg_payload_len;
  logic [47:0] cfg_da = 48'h02_11_22_33_44_55;
  logic [47:0] cfg_sa = 48'h02_AA_BB_CC_DD_EE;
  logic [7:0]  cfg_flow_id = 8'h5A;
  logic        cfg_ts_sel;
  word_t       out_word;
  logic        out_valid;
  logic [31:0] frames_sent;
  logic        overflow;

  int checks = 0, failures = 0;

  coe_encap dut (.*);

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

  // ------------------------------------------------------------ stimulus
  byte unsigned inq[$];        // input bytes not yet seen in a frame
  longint       in_cyc[$];     // arrival cycle of each of those bytes
  longint       cyc = 0;
  int           x_opt = 1;
  bit           run = 0;
  int           acc = 0;

  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    in_valid    <= 0;
    in_rf_start <= 0;
    if (run) begin
      acc += 7680 * x_opt;
      if (acc >= 125000) begin
        logic [63:0] d;
        acc -= 125000;
        d = {$urandom, $urandom};
        in_valid    <= 1;
        in_data     <= d;
        in_rf_start <= (inq.size() == 0 && frames_seen == 0 && nbytes_in == 0);
        for (int k = 0; k < 8; k++) begin
          inq.push_back(d[8*k +: 8]);
          in_cyc.push_back(cyc + 1);   // visible to the DUT in the next cycle
        end
        nbytes_in += 8;
      end
    end
  end
  longint nbytes_in = 0;

  // ------------------------------------------------------------ checker
  int          frames_seen = 0;
  int          widx = 0;
  byte unsigned fb[$];
  logic [63:0] hw[3];
  longint      sop_cyc, last_eop_cyc = -1, first_sop_cyc;
  longint      exp_sop;
  int          lp;
  int          min_gap = 1000;
  logic [31:0] prev_ts;

  always @(posedge clk) if (rst_n && run) begin
    if (out_valid) begin
      if (out_word.sop) begin
        check(widx == 0, "sop inside a frame");
        widx = 0; fb = {};
        sop_cyc = cyc;
        if (last_eop_cyc >= 0 && (cyc - last_eop_cyc - 1) < min_gap) min_gap = cyc - last_eop_cyc - 1;
        if (frames_seen == 0) first_sop_cyc = cyc;
        // the last payload byte of this frame arrived at in_cyc[lp-1]
        exp_sop = in_cyc[lp-1] + 2;
        check(cyc == exp_sop, $sformatf("sop at %0d, expected %0d", cyc, exp_sop));
      end
      if (widx < 3) hw[widx] = out_word.data;
      else for (int k = 0; k < 8; k++) if (out_word.keep[k]) fb.push_back(out_word.data[8*k +: 8]);
      if (widx >= 3 && !out_word.eop) check(out_word.keep == 8'hFF, "full payload word");
      if (widx < 3) check(!out_word.eop, "eop in header");
      widx++;
      if (out_word.eop) begin
        byte unsigned hdr[$];
        byte unsigned exp_pay[$];
        byte unsigned all[$];
        logic [47:0] da, sa; logic [15:0] et; roe_hdr_t roe;
        logic [31:0] fcs;
        hdr = {}; exp_pay = {}; all = {};
        for (int k = 0; k < 8; k++) hdr.push_back(hw[0][8*k +: 8]);
        for (int k = 0; k < 8; k++) hdr.push_back(hw[1][8*k +: 8]);
        for (int k = 0; k < 4; k++) hdr.push_back(hw[2][8*k +: 8]);
        fcs = hw[2][63:32];
        for (int k = 0; k < 6; k++) da[47-8*k -: 8] = hdr[k];
        for (int k = 0; k < 6; k++) sa[47-8*k -: 8] = hdr[6+k];
        et = {hdr[12], hdr[13]};
        for (int k = 0; k < 6; k++) roe[47-8*k -: 8] = hdr[14+k];
        check(widx == 3 + (lp + 7) / 8, $sformatf("frame length %0d words", widx));
        check(da == cfg_da && sa == cfg_sa, "addresses");
        check(et == 16'hFC3D, "EtherType");
        check(roe.version == 2'd1 && roe.pkt_type == 4'd0 && roe.flow_id == cfg_flow_id &&
              roe.ts_sel == cfg_ts_sel, "RoE fixed fields");
        check(roe.sof == (frames_seen == 0), $sformatf("RoE SOF flag frame %0d", frames_seen));
        if (!cfg_ts_sel) check(roe.timestamp == 32'(frames_seen), "RoE sequence number");
        else if (frames_seen > 0)
          check(roe.timestamp - prev_ts == 32'(in_cyc[0] - first_byte_cyc),
                "RoE timestamp spacing");
        prev_ts = roe.timestamp;
        first_byte_cyc = in_cyc[0];
        for (int k = 0; k < lp; k++) begin
          exp_pay.push_back(inq.pop_front());
          void'(in_cyc.pop_front());
        end
        check(fb == exp_pay, "payload bytes");
        all = {hdr, fb};
        check(fcs == crc_bits(all), "FCS");
        check(out_word.keep == ((lp % 8 == 0) ? 8'hFF : 8'((1 << (lp % 8)) - 1)), "last keep");
        last_eop_cyc = cyc;
        widx = 0;
        frames_seen++;
      end
    end
  end
  longint first_byte_cyc;

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_cfg(input int plen, input int x, input bit tsel, input int nframes);
    real per, exp_per;
    rst_n = 0; run = 0;
    inq = {}; in_cyc = {}; frames_seen = 0; widx = 0; acc = 0; nbytes_in = 0;
    last_eop_cyc = -1; min_gap = 1000;
    cfg_payload_len = 11'(plen); lp = plen; x_opt = x; cfg_ts_sel = tsel;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run = 1;
    while (frames_seen < nframes) @(posedge clk);
    #1;
    per = real'(last_eop_cyc - first_sop_cyc - (3 + (plen + 7) / 8 - 1)) / real'(nframes - 1);
    exp_per = real'(plen) * 15625.0 / (7680.0 * real'(x));
    check(per > exp_per - 8.0 && per < exp_per + 8.0,
          $sformatf("frame period %0.1f cycles, T_encap %0.1f cycles", per, exp_per));
    check(min_gap >= 2, $sformatf("inter-frame idle %0d cycles", min_gap));
    check(frames_sent == 32'(nframes), "frames_sent counter");
    check(!overflow, "no overflow");
    $display("L_P=%0d X=%0d: T_encap %0.2f us (period %0.1f cycles), %0d frames",
             plen, x, per * 6.4e-3, per, nframes);
  endtask

  initial begin
    byte unsigned v[$];
    v = {8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    check(crc_bits(v) == 32'hCBF43926, "reference CRC-32 of 123456789");
    run_cfg(1500, 1, 1'b0, 5);
    run_cfg(1250, 2, 1'b1, 6);
    run_cfg(1000, 10, 1'b0, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
