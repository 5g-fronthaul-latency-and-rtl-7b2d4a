// coe_sched_switch -- scheduled (time-slotted) Ethernet switch that
// multiplexes the CoE flows of several radio equipments onto one output.
//
// Each input port has a store-and-forward frame queue (frame_fifo). The
// output is driven by a periodic schedule in the style of IEEE 802.1Qbv
// on/off gates: the schedule length L_S is divided into cfg_num_slots
// timeslots of cfg_slot_cycles clock cycles each (T_ETS = L_E / R_E), and a
// gate-control list (GCL) says, for every slot, which input port's gate is
// open, if any. At the first cycle of a slot whose gate is open, the head
// frame of that port is sent, if a complete frame is queued. The schedule
// itself is computed elsewhere (for instance by a comb-fitting search)
// and written into the GCL through the gcl_* port.
//
// Events counted (all saturate at 2^16-1 apart from the per-port ones):
//   sent[p]   frames forwarded from port p
//   misses    an open slot found its port's queue empty
//   conflicts an open slot began while the previous frame (with its
//             20-byte preamble/SFD/inter-packet-gap time) was still going
//   drops[p]  frames lost because port p's queue was full
//
// Interface: in_valid/in_word per port, a stream without back-pressure.
// out_word/out_valid, likewise. The slot counter restarts from slot 0 when
// cfg_enable rises. GCL entries are written one per cycle, gcl_addr < MAX_SLOTS.
// Timing: the first word of a frame leaves 2 cycles after its slot starts.
// The slot mechanism follows the source study (periodic on/off slots,
// store-and-forward switch); queue depth, GCL size and the conflict rule are
// this design's choices.
module coe_sched_switch
  import coe_pkg::*;
#(
  parameter int unsigned N_PORTS   = 3,
  parameter int unsigned MAX_SLOTS = 64,
  parameter int unsigned QDEPTH    = 512,
  localparam int unsigned PW       = (N_PORTS > 1) ? $clog2(N_PORTS) : 1,
  localparam int unsigned SW       = $clog2(MAX_SLOTS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // input ports
  input  logic [N_PORTS-1:0] in_valid,
  input  word_t              in_word [N_PORTS],
  // schedule
  input  logic               cfg_enable,
  input  logic [SW:0]        cfg_num_slots,    // 1..MAX_SLOTS
  input  logic [15:0]        cfg_slot_cycles,  // T_ETS in cycles
  input  logic               gcl_we,
  input  logic [SW-1:0]      gcl_addr,
  input  logic               gcl_open,
  input  logic [PW-1:0]      gcl_port,
  // output port
  output word_t              out_word,
  output logic               out_valid,
  output logic [SW-1:0]      cur_slot,
  // statistics
  output logic [15:0]        sent      [N_PORTS],
  output logic [15:0]        drops     [N_PORTS],
  output logic [15:0]        misses,
  output logic [15:0]        conflicts
);

  typedef struct packed {
    logic          open;
    logic [PW-1:0] port;
  } gcl_entry_t;

  gcl_entry_t gcl [MAX_SLOTS];

  // ------------------------------------------------------------ queues
  word_t              q_word   [N_PORTS];
  logic [15:0]        q_frames [N_PORTS];
  logic [N_PORTS-1:0] q_rd;

  for (genvar p = 0; p < N_PORTS; p++) begin : g_q
    frame_fifo #(.DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .in_valid (in_valid[p]),
      .in_word  (in_word[p]),
      .rd_en    (q_rd[p]),
      .rd_word  (q_word[p]),
      .frames   (q_frames[p]),
      .drops    (drops[p])
    );
  end

  // ------------------------------------------------------------ slot timer
  logic        en_q;
  logic [15:0] slot_cyc;
  logic        slot_start;
  logic [SW-1:0] nxt_slot, starting;
  gcl_entry_t  ent;

  // the slot counter restarts at slot 0 when the schedule is enabled
  assign slot_start = cfg_enable && (!en_q || slot_cyc == 16'd0);
  assign starting   = en_q ? nxt_slot : '0;
  assign ent        = gcl[starting];

  // ------------------------------------------------------------ output
  logic          busy, sending;
  logic [PW-1:0] src;
  logic [1:0]    gap;
  logic          start;

  assign busy  = sending || (gap != 0);

  assign start = slot_start && ent.open && !busy && (q_frames[ent.port] != 0);

  always_comb begin
    q_rd = '0;
    if (sending) q_rd[src] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (gcl_we) gcl[gcl_addr] <= '{open: gcl_open, port: gcl_port};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q      <= 1'b0;
      slot_cyc  <= '0;
      cur_slot  <= '0;
      nxt_slot  <= '0;
      sending   <= 1'b0;
      src       <= '0;
      gap       <= '0;
      out_word  <= '0;
      out_valid <= 1'b0;
      misses    <= '0;
      conflicts <= '0;
      for (int p = 0; p < N_PORTS; p++) sent[p] <= '0;
    end else begin
      en_q <= cfg_enable;
      // slot timer: slot_cyc counts down inside a slot
      if (!cfg_enable) begin
        slot_cyc <= '0;
        cur_slot <= '0;
        nxt_slot <= '0;
      end else if (slot_start) begin
        slot_cyc <= cfg_slot_cycles - 16'd1;
        cur_slot <= starting;
        nxt_slot <= ((SW+1)'(starting) + 1'b1 >= cfg_num_slots)
                    ? '0 : starting + 1'b1;
      end else begin
        slot_cyc <= slot_cyc - 16'd1;
      end

      if (slot_start && ent.open) begin
        if (busy) begin
          if (conflicts != '1) conflicts <= conflicts + 16'd1;
        end else if (q_frames[ent.port] == 0) begin
          if (misses != '1) misses <= misses + 16'd1;
        end
      end

      // frame transmission
      out_valid <= sending;
      out_word  <= sending ? q_word[src] : '0;
      if (start) begin
        sending <= 1'b1;
        src     <= ent.port;
      end else if (sending) begin
        if (q_word[src].eop) begin
          sending   <= 1'b0;
          sent[src] <= sent[src] + 16'd1;
          // idle for preamble + SFD + IPG = 20 bytes, less the unused
          // lanes of the last word: 2 or 3 cycles, of which this is one
          gap <= (q_word[src].keep[4]) ? 2'd2 : 2'd1;
        end
      end else if (gap != 0) begin
        gap <= gap - 2'd1;
      end
    end
  end

endmodule
