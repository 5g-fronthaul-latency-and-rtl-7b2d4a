// coe_decap -- REC-side CPRI-over-Ethernet de-encapsulator.
//
// Takes the frame stream that coe_encap produces (after it has crossed the
// switch) and undoes the encapsulation: the three header words are parsed
// (destination and source address, Ethernet type, 6-byte RoE header and the
// FCS carried in the third header word), the CRC-32 is recomputed over
// header and payload, and the payload words are handed on with their byte
// enables. At the end of each frame frame_done pulses with frame_ok set
// when the FCS matched and the Ethernet type was the RoE type.
//
// arr_valid pulses once per frame, the cycle after its second header word
// came in (the flow id sits in that word), with the flow id: a fixed 2
// cycles after the frame's first word, so it can time the packet arrivals
// at the REC for jitter measurement (jitter_monitor).
//
// Interface: in_valid/in_word stream without back-pressure; pay_valid /
// pay_word out, one cycle later. hdr_* hold the last parsed header.
// A frame shorter than its header, or a word without sop outside a frame, is
// counted as bad. The study only says that de-capsulation is done at the REC;
// everything here is the mirror image of coe_encap.
module coe_decap
  import coe_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  word_t       in_word,
  // payload out
  output logic        pay_valid,
  output word_t       pay_word,
  // header of the last frame
  output logic [47:0] hdr_da,
  output logic [47:0] hdr_sa,
  output logic [15:0] hdr_type,
  output roe_hdr_t    hdr_roe,
  // per-frame events
  output logic        arr_valid,
  output logic [7:0]  arr_flow,
  output logic        frame_done,
  output logic        frame_ok,
  output logic [31:0] frames_ok,
  output logic [31:0] frames_bad
);

  logic [1:0]  widx;        // 0,1,2 header words, 3 payload
  logic        in_frame;
  logic [31:0] crc;
  logic [31:0] fcs_rx;
  logic [63:0] w0;
  logic [63:0] w1;
  logic [159:0] be;         // header bytes back in big-endian field order
  logic [159:0] hb;
  logic         ok_now;
  logic         first_pay;

  // wire bytes of the first 20 header bytes
  assign hb = {in_word.data[31:0], w1, w0};
  always_comb
    for (int k = 0; k < 20; k++) be[159-8*k -: 8] = hb[8*k +: 8];

  assign ok_now = (~crc32_word(crc, in_word.data, in_word.keep) == fcs_rx) &&
                  (hdr_type == ETH_TYPE_ROE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx       <= '0;
      in_frame   <= 1'b0;
      crc        <= '0;
      fcs_rx     <= '0;
      first_pay  <= 1'b0;
      w0         <= '0;
      w1         <= '0;
      pay_valid  <= 1'b0;
      pay_word   <= '0;
      hdr_da     <= '0;
      hdr_sa     <= '0;
      hdr_type   <= '0;
      hdr_roe    <= '0;
      arr_valid  <= 1'b0;
      arr_flow   <= '0;
      frame_done <= 1'b0;
      frame_ok   <= 1'b0;
      frames_ok  <= '0;
      frames_bad <= '0;
    end else begin
      pay_valid  <= 1'b0;
      pay_word   <= '0;
      arr_valid  <= 1'b0;
      frame_done <= 1'b0;
      if (in_valid) begin
        if (in_word.sop || !in_frame) begin
          // a new frame; a word outside a frame or a frame cut short counts as bad
          // (and a one-word frame is too short to hold a header)
          frames_bad <= frames_bad + 32'(!in_word.sop || in_frame)
                                   + 32'(in_word.sop && in_word.eop);
          w0       <= in_word.data;
          widx     <= 2'd1;
          in_frame <= in_word.sop && !in_word.eop;
          crc      <= crc32_word(32'hFFFF_FFFF, in_word.data, '1);
        end else if (widx == 2'd1) begin
          w1        <= in_word.data;
          widx      <= 2'd2;
          crc       <= crc32_word(crc, in_word.data, '1);
          arr_valid <= 1'b1;
          arr_flow  <= in_word.data[63:56];   // RoE byte 1: flow id
          hdr_type  <= {in_word.data[39:32], in_word.data[47:40]};
          if (in_word.eop) begin
            frames_bad <= frames_bad + 32'd1;
            in_frame   <= 1'b0;
          end
        end else if (widx == 2'd2) begin
          widx     <= 2'd3;
          first_pay <= 1'b1;
          crc      <= crc32_word(crc, in_word.data, 8'h0F);
          fcs_rx   <= in_word.data[63:32];
          hdr_da   <= be[159:112];
          hdr_sa   <= be[111:64];
          hdr_roe  <= be[47:0];
          if (in_word.eop) begin
            frames_bad <= frames_bad + 32'd1;
            in_frame   <= 1'b0;
          end
        end else begin
          crc       <= crc32_word(crc, in_word.data, in_word.keep);
          pay_valid <= 1'b1;
          pay_word  <= in_word;
          pay_word.sop <= first_pay;
          first_pay    <= 1'b0;
          if (in_word.eop) begin
            in_frame   <= 1'b0;
            frame_done <= 1'b1;
            frame_ok   <= ok_now;
            if (ok_now) frames_ok  <= frames_ok + 32'd1;
            else        frames_bad <= frames_bad + 32'd1;
          end
        end
      end
    end
  end

endmodule
