// cfit_scheduler -- comb-fitting (C-FIT) timeslot scheduler for the switch's
// gate-control list.
//
// Given, for each of N_FLOWS CoE flows, the distance between its packets in
// timeslots (cfg_period[f], so the flow has cfg_num_slots / cfg_period[f]
// packets per schedule length), it searches for a non-conflicting schedule
// of at most one packet per slot with the least jitter, and then writes it
// into a gate-control list through gcl_we/gcl_addr/gcl_open/gcl_port (the
// write port of coe_sched_switch).
//
// How it works, in timeslot units:
//  1. basic offset: flow f's packets sit at slots 0, P_f, 2*P_f, ... (each
//     flow a perfect comb, jitter 0, but combs collide).
//  2. for every order in which the flows can be taken (N_FLOWS! orders), the
//     combs are merged one at a time ("matcombine"): of the schedule built so
//     far and the next flow's comb, the one with more packets stays in place
//     and the other is slid by 0, 1, 2, ... slots until it fits without a
//     conflict. If no slide fits, the other one stays unshifted and each of
//     its packets that collides is moved to the nearest free slot (the later
//     one first at equal distance).
//  3. the jitter of the merged schedule is the largest, over flows, of the
//     largest minus the smallest (cyclic) distance between consecutive
//     packets of the flow; the order with the least jitter is kept (the
//     first one found among equals).
// The search is sequential: one slide step, one nearest-slot step or one
// slot of the jitter scan per clock cycle, a few thousand cycles for three
// flows and 64 slots.
//
// Interface: pulse start with cfg_* stable; busy stays high until done
// pulses, which is the cycle after the last GCL write. best_jitter is in
// timeslots; feasible is low if the packets do not fit the slots.
// cfg_period[f] must divide cfg_num_slots. The basic offsets, the sliding
// and the nearest-slot rule follow the study's algorithms; starting every
// comb at slot 0 follows its worked example, the tie rules are this design's
// own choice.
module cfit_scheduler #(
  parameter int unsigned N_FLOWS   = 3,
  parameter int unsigned MAX_SLOTS = 64,
  localparam int unsigned SW = $clog2(MAX_SLOTS),
  localparam int unsigned FW = (N_FLOWS > 1) ? $clog2(N_FLOWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [SW:0]   cfg_num_slots,            // N_S, 1..MAX_SLOTS
  input  logic [SW:0]   cfg_period [N_FLOWS],     // slots between packets
  output logic          busy,
  output logic          done,
  output logic          feasible,
  output logic [SW:0]   best_jitter,
  output logic          gcl_we,
  output logic [SW-1:0] gcl_addr,
  output logic          gcl_open,
  output logic [FW-1:0] gcl_port
);

  localparam logic [FW:0] EMPTY = (FW+1)'(1 << FW);   // owner code of a free slot

  typedef enum logic [3:0] {
    S_IDLE, S_MASK, S_PERM, S_MERGE, S_SLIDE, S_FIX0, S_FIX, S_NEAR, S_STEP, S_JIT, S_ADV, S_OUT
  } state_t;
  state_t st;

  logic [SW:0]   ns;
  logic [FW:0]   res  [MAX_SLOTS];       // schedule built so far
  logic [FW:0]   xo   [MAX_SLOTS];       // schedule being slid
  logic [FW:0]   yo   [MAX_SLOTS];       // schedule kept in place
  logic [FW:0]   best [MAX_SLOTS];
  logic [MAX_SLOTS-1:0] mask [N_FLOWS];  // basic-offset comb of each flow
  logic [SW:0]   npk  [N_FLOWS];         // packets per flow
  logic [SW:0]   nres;                   // packets placed so far
  logic [FW-1:0] perm [N_FLOWS];         // current flow order
  logic [FW-1:0] pi;                     // position in the order
  logic [FW-1:0] fl;                     // flow being handled
  logic [SW:0]   s, d, cnt;              // slot / distance / comb counters
  logic [SW:0]   last, first, gmin, gmax;
  logic          seen;
  logic [SW:0]   jit;                    // jitter of the current order
  logic          ok;                     // current order fitted
  logic          any_best;

  // ---- combinational helpers
  logic [MAX_SLOTS-1:0] xocc, yocc, rocc;
  logic                 clash;
  logic                 perm_ok;
  logic [SW:0]          up, dn;          // slot s+d and s-d, modulo ns (< ns, top bit 0)
  always_comb begin
    for (int i = 0; i < MAX_SLOTS; i++) begin
      xocc[i] = (xo[i] != EMPTY);
      yocc[i] = (yo[i] != EMPTY);
      rocc[i] = (res[i] != EMPTY);
    end
    clash = |(xocc & yocc);
    perm_ok = 1'b1;
    for (int a = 0; a < N_FLOWS; a++)
      for (int b = 0; b < N_FLOWS; b++)
        if (a < b && perm[a] == perm[b]) perm_ok = 1'b0;
    up = (s + d >= ns) ? s + d - ns : s + d;
    dn = (s >= d) ? s - d : s + ns - d;
  end

  // xo rotated by one slot (slot i -> i+1, slot ns-1 -> 0)
  logic [FW:0] xo_rot [MAX_SLOTS];
  always_comb
    for (int i = 0; i < MAX_SLOTS; i++)
      xo_rot[i] = (i == 0) ? xo[SW'(ns - 1'b1)] : ((SW+1)'(i) < ns ? xo[i-1] : EMPTY);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      busy <= 1'b0; done <= 1'b0; feasible <= 1'b0; best_jitter <= '0;
      gcl_we <= 1'b0; gcl_addr <= '0; gcl_open <= 1'b0; gcl_port <= '0;
      ns <= '0; nres <= '0; pi <= '0; fl <= '0; s <= '0; d <= '0; cnt <= '0;
      last <= '0; first <= '0; gmin <= '0; gmax <= '0; seen <= 1'b0;
      jit <= '0; ok <= 1'b0; any_best <= 1'b0;
      for (int i = 0; i < MAX_SLOTS; i++) begin
        res[i] <= EMPTY; xo[i] <= EMPTY; yo[i] <= EMPTY; best[i] <= EMPTY;
      end
      for (int f = 0; f < N_FLOWS; f++) begin
        mask[f] <= '0; npk[f] <= '0; perm[f] <= '0;
      end
    end else begin
      done   <= 1'b0;
      gcl_we <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          busy <= 1'b1; feasible <= 1'b0; any_best <= 1'b0;
          ns <= cfg_num_slots;
          fl <= '0; s <= '0; cnt <= '0;
          for (int f = 0; f < N_FLOWS; f++) begin
            mask[f] <= '0; npk[f] <= '0; perm[f] <= '0;
          end
          st <= S_MASK;
        end

        // basic offset: comb of flow fl, one slot per cycle
        S_MASK: begin
          if (cnt == '0) begin
            mask[fl][SW'(s)] <= 1'b1;
            npk[fl]     <= npk[fl] + 1'b1;
          end
          cnt <= (cnt + 1'b1 >= cfg_period[fl]) ? '0 : cnt + 1'b1;
          if (s + 1'b1 >= ns) begin
            s <= '0; cnt <= '0;
            if (32'(fl) == N_FLOWS - 1) st <= S_PERM;
            else fl <= fl + 1'b1;
          end else s <= s + 1'b1;
        end

        // skip tuples that are not orders; start the merge of a valid one
        S_PERM: begin
          if (perm_ok) begin
            for (int i = 0; i < MAX_SLOTS; i++)
              res[i] <= mask[perm[0]][i] ? {1'b0, perm[0]} : EMPTY;
            nres <= npk[perm[0]];
            pi   <= '0;
            ok   <= 1'b1;
            st   <= S_STEP;
            fl <= '0; s <= '0; seen <= 1'b0; jit <= '0;
          end else st <= S_ADV;
        end

        // set up matcombine of res and the comb of flow perm[pi]
        S_MERGE: begin
          for (int i = 0; i < MAX_SLOTS; i++) begin
            logic [FW:0] c;
            c = mask[perm[pi]][i] ? {1'b0, perm[pi]} : EMPTY;
            // the one with more packets stays (yo), the other slides (xo)
            if (npk[perm[pi]] > nres) begin yo[i] <= c; xo[i] <= res[i]; end
            else begin yo[i] <= res[i]; xo[i] <= c; end
          end
          nres <= nres + npk[perm[pi]];
          s <= '0;
          st <= S_SLIDE;
        end

        // slide xo one slot per cycle until it fits
        S_SLIDE: begin
          if (!clash) begin
            for (int i = 0; i < MAX_SLOTS; i++) res[i] <= xocc[i] ? xo[i] : yo[i];
            st <= S_STEP;
          end else if (s + 1'b1 >= ns) begin
            // no shift fits: the last rotation brings xo back in place
            for (int i = 0; i < MAX_SLOTS; i++) xo[i] <= xo_rot[i];
            st <= S_FIX0;
          end else begin
            for (int i = 0; i < MAX_SLOTS; i++) xo[i] <= xo_rot[i];
            s <= s + 1'b1;
          end
        end

        // keep the packets of xo that do not collide
        S_FIX0: begin
          for (int i = 0; i < MAX_SLOTS; i++) res[i] <= yocc[i] ? yo[i] : xo[i];
          s  <= '0;
          st <= S_FIX;
        end

        // find the next colliding packet of xo
        S_FIX: begin
          if (s >= ns) st <= S_STEP;
          else if (xocc[SW'(s)] && yocc[SW'(s)]) begin d <= (SW+1)'(1); st <= S_NEAR; end
          else s <= s + 1'b1;
        end

        // nearest free slot of res around s, later one first
        S_NEAR: begin
          if (!rocc[SW'(up)]) begin
            res[SW'(up)] <= xo[SW'(s)]; s <= s + 1'b1; st <= S_FIX;
          end else if (!rocc[SW'(dn)]) begin
            res[SW'(dn)] <= xo[SW'(s)]; s <= s + 1'b1; st <= S_FIX;
          end else if (d + d >= ns) begin
            ok <= 1'b0; s <= s + 1'b1; st <= S_FIX;   // no room
          end else d <= d + 1'b1;
        end

        // jitter scan: flow fl, slot s
        S_JIT: begin
          if (s < ns) begin
            if (res[SW'(s)] == {1'b0, fl}) begin
              if (!seen) begin
                first <= s; gmin <= '1; gmax <= '0;
              end else begin
                if (s - last < gmin) gmin <= s - last;
                if (s - last > gmax) gmax <= s - last;
              end
              last <= s; seen <= 1'b1;
            end
            s <= s + 1'b1;
          end else begin
            // closing (cyclic) gap
            logic [SW:0] g, lo, hi;
            g  = first + ns - last;
            lo = (seen && g < gmin) ? g : gmin;
            hi = (seen && g > gmax) ? g : gmax;
            if (!seen) ok <= 1'b0;
            else if (hi - lo > jit) jit <= hi - lo;
            s <= '0; seen <= 1'b0;
            if (32'(fl) == N_FLOWS - 1) begin
              // order finished: keep it if better
              if ((ok && seen) && (!any_best || (((hi - lo > jit) ? hi - lo : jit) < best_jitter))) begin
                best_jitter <= (hi - lo > jit) ? hi - lo : jit;
                any_best <= 1'b1;
                feasible <= 1'b1;
                for (int i = 0; i < MAX_SLOTS; i++) best[i] <= res[i];
              end
              st <= S_ADV;
            end else fl <= fl + 1'b1;
          end
        end

        // next merge step, or the jitter scan when all flows are in
        S_STEP: begin
          if (32'(pi) + 1 < N_FLOWS) begin
            pi <= pi + 1'b1;
            st <= S_MERGE;
          end else begin
            fl <= '0; s <= '0; seen <= 1'b0; jit <= '0;
            st <= S_JIT;
          end
        end

        // next order: odometer over all tuples, perm[N_FLOWS-1] fastest
        S_ADV: begin
          logic carry;
          carry = 1'b1;
          for (int a = N_FLOWS - 1; a >= 0; a--)
            if (carry) begin
              if (32'(perm[a]) == N_FLOWS - 1) perm[a] <= '0;
              else begin perm[a] <= perm[a] + 1'b1; carry = 1'b0; end
            end
          s <= '0;
          st <= carry ? S_OUT : S_PERM;
        end

        // write the best schedule into the gate-control list
        S_OUT: begin
          if (s < ns) begin
            gcl_we   <= 1'b1;
            gcl_addr <= SW'(s);
            gcl_open <= any_best && best[SW'(s)] != EMPTY;
            gcl_port <= best[SW'(s)][FW-1:0];
            s <= s + 1'b1;
          end else begin
            busy <= 1'b0; done <= 1'b1; st <= S_IDLE;
          end
        end

        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
