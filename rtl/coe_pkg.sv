// coe_pkg -- types, constants and functions shared by the CPRI-over-Ethernet
// (CoE) fronthaul blocks.
//
// All blocks run on one 64-bit datapath clocked at 156.25 MHz (6.4 ns per
// cycle), which carries 10 Gb/s: one 8-byte word per cycle. Byte lane 0
// (data[7:0]) is the first byte on the wire.
//
// The 24 bytes of MAC/RoE overhead a frame carries on this datapath are
// packed into three header words, named after the fields they hold:
//   dst_src            : destination address (6 B), source address bytes 0-1
//   src_len_roe_header : source address bytes 2-5, Ethernet type (2 B),
//                        RoE header bytes 0-1
//   roe_header_fcs     : RoE header bytes 2-5, frame check sequence (4 B)
// followed by the payload words. Preamble, start-of-frame delimiter and the
// inter-packet gap (8 + 12 bytes) are not carried as data; they are kept as
// idle time on the link so that a frame occupies L_P + 44 bytes of link time.
package coe_pkg;

  localparam int unsigned DATA_W    = 64;
  localparam int unsigned DATA_B    = DATA_W / 8;
  // Overheads in bytes
  localparam int unsigned HDR_BYTES = 24;   // DA+SA+type+RoE+FCS
  localparam int unsigned HDR_WORDS = HDR_BYTES / DATA_B;
  localparam int unsigned PRE_SFD_BYTES = 8;  // preamble 7 + SFD 1
  localparam int unsigned IPG_BYTES     = 12;
  localparam int unsigned LINK_GAP_BYTES = PRE_SFD_BYTES + IPG_BYTES; // 20
  localparam int unsigned LEH_BYTES = HDR_BYTES + LINK_GAP_BYTES;     // 44

  // EtherType registered for Radio over Ethernet (IEEE 1914.3).
  localparam logic [15:0] ETH_TYPE_ROE = 16'hFC3D;

  // CPRI timing in units of the 6.4 ns clock. A basic frame lasts
  // 1/3.84 MHz; 156.25e6/3.84e6 = 15625/384 cycles. The CPRI source paces
  // its bytes with this exact ratio.
  localparam int unsigned BF_CYC_NUM = 15625;
  localparam int unsigned BF_CYC_DEN = 384;
  localparam int unsigned WORDS_PER_BF   = 16;
  localparam int unsigned BF_PER_HF      = 256;
  localparam int unsigned HF_PER_RF      = 150;

  // 6-byte RoE header. Field widths are this design's choice; the paper
  // lists the fields only.
  typedef struct packed {
    logic [1:0]  version;
    logic [3:0]  pkt_type;
    logic        sof;        // first packet starting in a new radio frame
    logic        ts_sel;     // 1: timestamp holds a time, 0: a sequence number
    logic [7:0]  flow_id;
    logic [31:0] timestamp;
  } roe_hdr_t;

  // One word of a frame stream.
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [DATA_B-1:0] keep;   // valid byte lanes, contiguous from lane 0
    logic              sop;
    logic              eop;
  } word_t;

  localparam int unsigned WORD_T_W = $bits(word_t);

  // CRC-32 of IEEE 802.3 (reflected polynomial 0xEDB88320), one byte.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc,
                                             input logic [7:0]  b);
    logic [31:0] c;
    c = crc ^ {24'h0, b};
    for (int i = 0; i < 8; i++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  // CRC-32 over the byte lanes of a word selected by keep.
  function automatic logic [31:0] crc32_word(input logic [31:0]       crc,
                                             input logic [DATA_W-1:0] d,
                                             input logic [DATA_B-1:0] keep);
    logic [31:0] c;
    c = crc;
    for (int k = 0; k < DATA_B; k++)
      if (keep[k]) c = crc32_byte(c, d[8*k +: 8]);
    return c;
  endfunction

  // The 20 header bytes covered by the FCS, in wire order (byte 0 first).
  function automatic logic [159:0] hdr_bytes(input logic [47:0] da,
                                             input logic [47:0] sa,
                                             input logic [15:0] etype,
                                             input roe_hdr_t    roe);
    logic [159:0] v;
    logic [159:0] be;
    be = {da, sa, etype, roe};        // big-endian: byte 0 in [159:152]
    for (int k = 0; k < 20; k++) v[8*k +: 8] = be[159-8*k -: 8];
    return v;
  endfunction

  // CRC register after the 20 header bytes, starting from all ones.
  function automatic logic [31:0] crc32_hdr(input logic [159:0] hb);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    for (int k = 0; k < 20; k++) c = crc32_byte(c, hb[8*k +: 8]);
    return c;
  endfunction

  // keep mask with the n lowest lanes set (n = 1..8).
  function automatic logic [DATA_B-1:0] keep_of(input logic [3:0] n);
    logic [DATA_B-1:0] m;
    for (int k = 0; k < DATA_B; k++) m[k] = (4'(k) < n);
    return m;
  endfunction

endpackage
