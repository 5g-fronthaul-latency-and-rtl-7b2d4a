// frame_fifo -- store-and-forward frame queue of one switch input port.
//
// Words of a frame are written as they arrive, but a frame becomes visible
// to the reader only after its last word is in (store-and-forward, so a
// frame crossing the switch waits for at least its own length, the hop
// delay T_hop = L_E / R_E). If the queue fills up in the middle of a frame,
// the rest of that frame is discarded, the write pointer is wound back to
// where the frame began and drops is incremented; complete frames already
// queued are not disturbed.
//
// Interface: in_valid/in_word is a stream without back-pressure. The read
// side shows the head word combinationally (rd_word) whenever frames > 0;
// rd_en takes it. frames counts the complete frames held.
// Timing: a frame is readable the cycle after its last word was written.
// The read-side assertion is disabled during reset; that is why lint sees
// rst_n used both as an asynchronous reset and in a clocked expression.
module frame_fifo
  import coe_pkg::*;
#(
  parameter int unsigned DEPTH = 512   // words, power of two
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  word_t       in_word,
  input  logic        rd_en,
  output word_t       rd_word,
  output logic [15:0] frames,
  output logic [15:0] drops
);

  localparam int unsigned AW = $clog2(DEPTH);

  word_t        mem [DEPTH];
  logic [AW:0]  wp, wp_start, rp;
  logic         dropping;
  logic         full, wr;
  logic         commit, pop_last;

  assign full     = (wp - rp) == (AW+1)'(DEPTH);
  assign wr       = in_valid && !dropping && !full;
  assign commit   = wr && in_word.eop;
  assign rd_word  = mem[rp[AW-1:0]];
  assign pop_last = rd_en && rd_word.eop;

  always_ff @(posedge clk) if (wr) mem[wp[AW-1:0]] <= in_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      wp_start <= '0;
      rp       <= '0;
      dropping <= 1'b0;
      frames   <= '0;
      drops    <= '0;
    end else begin
      if (rd_en) rp <= rp + 1'b1;
      frames <= frames + (commit ? 16'd1 : 16'd0) - (pop_last ? 16'd1 : 16'd0);
      if (in_valid && in_word.sop) wp_start <= wp;
      if (in_valid && !dropping && full) begin
        // no room: abandon the frame being written
        wp       <= in_word.sop ? wp : wp_start;
        dropping <= !in_word.eop;
        drops    <= drops + 16'd1;
      end else if (in_valid && dropping) begin
        if (in_word.eop) dropping <= 1'b0;
      end else if (wr) begin
        wp <= wp + 1'b1;
      end
    end
  end

  // the reader only takes words of complete frames
  a_rd_complete: assert property (@(posedge clk) disable iff (!rst_n)
                                  rd_en |-> frames != 0);

endmodule
