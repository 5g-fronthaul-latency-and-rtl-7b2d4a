// coe_encap -- structure-agnostic CPRI-over-Ethernet encapsulator.
//
// CPRI line data arrives as 8-byte words at the CPRI rate (a word every
// 1.6 to 16 cycles). It is written into a circular byte buffer and cut into
// payloads of cfg_payload_len bytes (L_P = N_B basic frames) without regard
// to what the bytes mean. When a payload is complete, the frame is sent at
// the full 10 Gb/s of the datapath: three header words (dst_src,
// src_len_roe_header, roe_header_fcs: 24 bytes, 3 cycles = 19.2 ns) then the
// payload words, the last one partly filled. Input keeps arriving while a
// frame is sent, into the other part of the buffer.
//
// Because the whole payload is held before the frame starts (the
// encapsulation delay T_encap = L_P / R_CPRI), the CRC-32 frame check
// sequence is already known when the header is sent, and it travels in the
// third header word next to the last four bytes of the RoE header, in the
// word layout of the source study's simulation. (IEEE 802.3 puts the FCS
// after the payload; a receiver built for this layout is coe_decap.) The
// CRC is computed as the bytes are written: the header part when a payload
// opens, then byte by byte.
//
// RoE header (6 bytes): version, packet type, start-of-frame flag, flow id,
// timestamp-select and a 32-bit timestamp. With cfg_ts_sel = 1 the
// timestamp is the cycle count at which the payload's first byte arrived,
// with 0 it is the packet sequence number. The start-of-frame flag marks
// the first packet whose payload starts in a new CPRI radio frame. Field
// widths and these meanings are this design's choices.
//
// Between frames the output stays idle long enough to stand for the
// preamble, SFD and inter-packet gap (20 bytes, counting the unused lanes of
// the last payload word), so each frame takes L_P + 44 bytes of link time,
// rounded up to whole words.
//
// Interface: in_* from cpri_prbs_source; out_word/out_valid is a stream
// without back-pressure. cfg_* must be static while running; cfg_payload_len
// must be at least 16 and at most BUF_BYTES/2.
// Timing: the first header word leaves 2 cycles after the cycle that
// delivered the payload's last byte. A frame occupies 3 + ceil(L_P/8) cycles
// plus the gap.
module coe_encap
  import coe_pkg::*;
#(
  parameter int unsigned BUF_BYTES    = 4096,   // power of two
  parameter int unsigned DESC_DEPTH   = 4,
  parameter logic [1:0]  ROE_VERSION  = 2'd1,
  parameter logic [3:0]  ROE_PKT_TYPE = 4'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  // CPRI line data
  input  logic              in_valid,
  input  logic [DATA_W-1:0] in_data,
  input  logic              in_rf_start,
  // configuration
  input  logic [10:0]       cfg_payload_len,
  input  logic [47:0]       cfg_da,
  input  logic [47:0]       cfg_sa,
  input  logic [7:0]        cfg_flow_id,
  input  logic              cfg_ts_sel,
  // Ethernet frame stream
  output word_t             out_word,
  output logic              out_valid,
  // status
  output logic [31:0]       frames_sent,
  output logic              overflow
);

  localparam int unsigned AW   = $clog2(BUF_BYTES);
  localparam int unsigned ROWS = BUF_BYTES / DATA_B;
  localparam int unsigned DW   = $clog2(DESC_DEPTH);

  typedef struct packed {
    logic [AW-1:0] start;
    roe_hdr_t      roe;
    logic [31:0]   fcs;
  } desc_t;

  // ---------------------------------------------------------------- buffer
  logic [7:0] bank [DATA_B][ROWS];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   fill;
  logic          wr_en;

  assign wr_en = in_valid && (fill <= (AW+1)'(BUF_BYTES - DATA_B));

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int b = 0; b < DATA_B; b++) begin
        logic [2:0]    lane;
        logic [AW-1:0] a;
        lane = 3'(b) - wr_ptr[2:0];
        a    = wr_ptr + AW'(lane);
        bank[b][a[AW-1:3]] <= in_data[8*lane +: 8];
      end
  end

  function automatic logic [DATA_W-1:0] buf_read(input logic [AW-1:0] p);
    logic [DATA_W-1:0] w;
    for (int k = 0; k < DATA_B; k++) begin
      logic [AW-1:0] a;
      a = p + AW'(k);
      w[8*k +: 8] = bank[a[2:0]][a[AW-1:3]];
    end
    return w;
  endfunction

  // ------------------------------------------------ payload cutting and CRC
  logic          open_q;
  logic [10:0]   cnt_q;
  logic [31:0]   crc_q;
  logic [31:0]   seq_q;
  logic [31:0]   now_q;
  logic [11:0]   since_rf_q;     // bytes since the last radio-frame start
  logic [AW-1:0] cur_start_q;
  roe_hdr_t      cur_roe_q;

  roe_hdr_t      roe0, roe1;
  logic [31:0]   hcrc0, hcrc1;
  logic [31:0]   seq_open;

  // header CRC of the next payload to open, with and without the SOF flag
  assign seq_open = open_q ? seq_q + 32'd1 : seq_q;
  always_comb begin
    roe0 = '{version: ROE_VERSION, pkt_type: ROE_PKT_TYPE, sof: 1'b0,
             ts_sel: cfg_ts_sel, flow_id: cfg_flow_id,
             timestamp: cfg_ts_sel ? now_q : seq_open};
    roe1 = roe0;
    roe1.sof = 1'b1;
  end
  assign hcrc0 = crc32_hdr(hdr_bytes(cfg_da, cfg_sa, ETH_TYPE_ROE, roe0));
  assign hcrc1 = crc32_hdr(hdr_bytes(cfg_da, cfg_sa, ETH_TYPE_ROE, roe1));

  logic          open_d;
  logic [10:0]   cnt_d;
  logic [31:0]   crc_d;
  logic [31:0]   seq_d;
  logic [11:0]   since_rf_d;
  logic [AW-1:0] cur_start_d;
  roe_hdr_t      cur_roe_d;
  logic          push;
  desc_t         push_desc;

  always_comb begin
    logic sof;
    sof         = 1'b0;
    open_d      = open_q;
    cnt_d       = cnt_q;
    crc_d       = crc_q;
    seq_d       = seq_q;
    since_rf_d  = since_rf_q;
    cur_start_d = cur_start_q;
    cur_roe_d   = cur_roe_q;
    push        = 1'b0;
    push_desc   = '0;
    if (wr_en) begin
      for (int k = 0; k < DATA_B; k++) begin
        if (k == 0 && in_rf_start) since_rf_d = '0;
        if (!open_d) begin
          sof         = (since_rf_d < {1'b0, cfg_payload_len});
          open_d      = 1'b1;
          cnt_d       = '0;
          crc_d       = sof ? hcrc1 : hcrc0;
          cur_roe_d   = sof ? roe1 : roe0;
          cur_start_d = wr_ptr + AW'(k);
        end
        crc_d = crc32_byte(crc_d, in_data[8*k +: 8]);
        cnt_d = cnt_d + 11'd1;
        if (since_rf_d != '1) since_rf_d = since_rf_d + 12'd1;
        if (cnt_d == cfg_payload_len) begin
          push            = 1'b1;
          push_desc.start = cur_start_d;
          push_desc.roe   = cur_roe_d;
          push_desc.fcs   = ~crc_d;
          open_d          = 1'b0;
          seq_d           = seq_d + 32'd1;
        end
      end
    end
  end

  // ------------------------------------------------------ descriptor FIFO
  desc_t       dfifo [DESC_DEPTH];
  logic [DW:0] dwp, drp;
  logic        dempty, dpop;
  desc_t       dhead;
  assign dempty = (dwp == drp);
  assign dhead  = dfifo[drp[DW-1:0]];

  always_ff @(posedge clk) if (push) dfifo[dwp[DW-1:0]] <= push_desc;

  // ----------------------------------------------------------- transmitter
  typedef enum logic [2:0] {S_IDLE, S_H1, S_H2, S_PAY} tx_state_t;
  tx_state_t     st;
  desc_t         cur;
  logic [10:0]   left;           // payload bytes still to send
  logic [1:0]    gap;
  logic [159:0]  hb, hb_head;
  logic          release_frame;

  assign hb      = hdr_bytes(cfg_da, cfg_sa, ETH_TYPE_ROE, cur.roe);
  assign hb_head = hdr_bytes(cfg_da, cfg_sa, ETH_TYPE_ROE, dhead.roe);
  assign dpop = (st == S_IDLE) && !dempty && (gap == 0);
  assign release_frame = (st == S_PAY) && (left <= 11'd8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr      <= '0;
      fill        <= '0;
      open_q      <= 1'b0;
      cnt_q       <= '0;
      crc_q       <= '0;
      seq_q       <= '0;
      now_q       <= '0;
      since_rf_q  <= '1;
      cur_start_q <= '0;
      cur_roe_q   <= '0;
      dwp         <= '0;
      drp         <= '0;
      st          <= S_IDLE;
      cur         <= '0;
      left        <= '0;
      gap         <= '0;
      rd_ptr      <= '0;
      out_word    <= '0;
      out_valid   <= 1'b0;
      frames_sent <= '0;
      overflow    <= 1'b0;
    end else begin
      now_q <= now_q + 32'd1;
      if (in_valid && !wr_en) overflow <= 1'b1;
      if (push && (dwp - drp) == (DW+1)'(DESC_DEPTH)) overflow <= 1'b1;
      if (wr_en) wr_ptr <= wr_ptr + AW'(DATA_B);
      fill <= fill + (wr_en ? (AW+1)'(DATA_B) : '0)
                   - (release_frame ? (AW+1)'(cfg_payload_len) : '0);
      open_q      <= open_d;
      cnt_q       <= cnt_d;
      crc_q       <= crc_d;
      seq_q       <= seq_d;
      since_rf_q  <= since_rf_d;
      cur_start_q <= cur_start_d;
      cur_roe_q   <= cur_roe_d;
      if (push) dwp <= dwp + 1'b1;
      if (dpop) drp <= drp + 1'b1;

      out_valid <= 1'b0;
      out_word  <= '0;
      unique case (st)
        S_IDLE: begin
          if (gap != 0) gap <= gap - 2'd1;
          if (dpop) begin
            // dst_src: DA, first two bytes of SA
            cur       <= dhead;
            rd_ptr    <= dhead.start;
            left      <= cfg_payload_len;
            out_valid <= 1'b1;
            out_word  <= '{data: hb_head[63:0],
                           keep: '1, sop: 1'b1, eop: 1'b0};
            st        <= S_H1;
          end
        end
        S_H1: begin
          // src_len_roe_header: rest of SA, Ethernet type, RoE bytes 0-1
          out_valid <= 1'b1;
          out_word  <= '{data: hb[127:64], keep: '1, sop: 1'b0, eop: 1'b0};
          st        <= S_H2;
        end
        S_H2: begin
          // roe_header_fcs: RoE bytes 2-5, FCS (least significant byte first)
          out_valid <= 1'b1;
          out_word  <= '{data: {cur.fcs, hb[159:128]}, keep: '1, sop: 1'b0, eop: 1'b0};
          st        <= S_PAY;
        end
        S_PAY: begin
          out_valid <= 1'b1;
          out_word.data <= buf_read(rd_ptr);
          if (left <= 11'd8) begin
            out_word.keep <= keep_of(left[3:0]);
            out_word.eop  <= 1'b1;
            // preamble + SFD + IPG = 20 bytes, less the unused lanes
            gap           <= (left[3:0] <= 4'd4) ? 2'd2 : 2'd3;
            frames_sent   <= frames_sent + 32'd1;
            st            <= S_IDLE;
          end else begin
            out_word.keep <= '1;
            left          <= left - 11'd8;
            rd_ptr        <= rd_ptr + AW'(DATA_B);
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
