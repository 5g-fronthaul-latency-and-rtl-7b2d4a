// cpri_prbs_source -- stand-in for the CPRI stream of one radio equipment.
//
// Produces pseudo-random (PRBS-31, x^31 + x^28 + 1) data at the line rate of
// a chosen CPRI option, as 8-byte words on the 6.4 ns / 64-bit datapath, and
// tracks where each word sits in the CPRI framing of Fig. 1 of the source
// study: 16 words per basic frame, 256 basic frames per hyper frame, 150
// hyper frames per 10 ms radio frame.
//
// Rate: the option is given by X, the bytes per CPRI word (1 for option 1 up
// to 16 for option 7). One basic frame lasts 1/3.84 MHz and carries 16*X
// bytes before 8B/10B coding, i.e. 20*X bytes of line data. This design
// carries the line data (as the payload sizing L_P = N_B * R_CPRI * T_B
// does), so a basic frame is 20*X bytes and lasts 15625/384 clock cycles.
// A phase accumulator adds 7680*X per cycle and emits a word each time it
// passes 125000 (= 8 bytes * 15625), which gives the exact average rate.
// X above 16 would need more than one word per cycle and is not supported.
//
// Interface: out_valid pulses with each word; out_data bit 0 is the first
// generated bit. out_rf_start marks a word whose first byte is the first
// byte of a radio frame (768000*X bytes per radio frame, a multiple of 8,
// so radio frames start on word boundaries). out_hfn / out_bfn are the hyper
// frame (Z) and basic frame (Y) numbers of the word's first byte.
// Timing: outputs are registered; the first word appears a few cycles after
// en rises. The PRBS polynomial and the accumulator are this design's
// choices; the study names only "PRBS data".
module cpri_prbs_source
  import coe_pkg::*;
#(
  parameter logic [30:0] SEED = 31'h7FFF_FFFF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [5:0]        cfg_x,         // bytes per CPRI word, 1..16
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data,
  output logic              out_rf_start,
  output logic [7:0]        out_hfn,
  output logic [7:0]        out_bfn
);

  localparam int unsigned ACC_STEP = 7680;    // per unit of X
  localparam int unsigned ACC_WRAP = 125000;  // 8 bytes * 15625

  logic [17:0] acc;
  logic [30:0] lfsr, lfsr_next;
  logic [DATA_W-1:0] prbs_word;
  logic [9:0]  bib;      // byte of the word's first byte within its basic frame
  logic [7:0]  bfn, hfn;
  logic [9:0]  bf_bytes;
  logic [17:0] acc_sum;
  logic        fire;

  assign bf_bytes = 10'(20 * cfg_x);
  assign acc_sum  = acc + 18'(ACC_STEP * cfg_x);
  assign fire     = en && (acc_sum >= 18'(ACC_WRAP));

  // 64 steps of the Fibonacci LFSR per word.
  always_comb begin
    logic [30:0] s;
    s = lfsr;
    for (int k = 0; k < DATA_W; k++) begin
      prbs_word[k] = s[30] ^ s[27];
      s = {s[29:0], s[30] ^ s[27]};
    end
    lfsr_next = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc          <= '0;
      lfsr         <= SEED;
      bib          <= '0;
      bfn          <= '0;
      hfn          <= '0;
      out_valid    <= 1'b0;
      out_data     <= '0;
      out_rf_start <= 1'b0;
      out_hfn      <= '0;
      out_bfn      <= '0;
    end else begin
      out_valid <= fire;
      if (en) acc <= fire ? acc_sum - 18'(ACC_WRAP) : acc_sum;
      if (fire) begin
        out_data     <= prbs_word;
        lfsr         <= lfsr_next;
        out_rf_start <= (bib == 0) && (bfn == 0) && (hfn == 0);
        out_hfn      <= hfn;
        out_bfn      <= bfn;
        // advance the framing position by 8 bytes (a basic frame is at
        // least 20 bytes, so at most one basic-frame boundary per word)
        if (bib + 10'd8 >= bf_bytes) begin
          bib <= bib + 10'd8 - bf_bytes;
          if (bfn == 8'(BF_PER_HF - 1)) begin
            bfn <= '0;
            hfn <= (hfn == 8'(HF_PER_RF - 1)) ? 8'd0 : hfn + 8'd1;
          end else begin
            bfn <= bfn + 8'd1;
          end
        end else begin
          bib <= bib + 10'd8;
        end
      end
    end
  end

endmodule
