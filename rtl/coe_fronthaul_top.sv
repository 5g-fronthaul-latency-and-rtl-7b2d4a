// coe_fronthaul_top -- CPRI-over-Ethernet fronthaul: N_RE radio equipments,
// one scheduled Ethernet switch and the de-encapsulation at the REC pool.
//
// Each radio equipment j is a CPRI source (cpri_prbs_source, PRBS data at the
// chosen CPRI option) feeding an encapsulator (coe_encap) that cuts the
// stream into L_P-byte payloads and frames them with flow id j. The N_RE
// frame streams enter a store-and-forward switch (coe_sched_switch) whose
// output is gated by a periodic timeslot schedule written into its GCL. The
// switch output is the 10 Gb/s fronthaul link towards the REC pool; it is
// brought out as link_* where an Ethernet PHY would attach, and also fed to
// the REC-side de-encapsulator (coe_decap), whose packet arrivals drive the
// jitter measurement of the metric defined by the study (jitter_monitor).
// The recovered CPRI payload leaves on rec_pay_*.
//
// The switch's gate-control list is written through gcl_* or, after a pulse
// on cfit_start, by the comb-fitting schedule search (cfit_scheduler) from
// the per-RE packet periods in cfit_period; the search owns the list while
// cfit_busy is high.
//
// Everything runs on one 156.25 MHz clock (6.4 ns, 64 bits per cycle).
// Timing: a payload leaves its encapsulator 2 cycles after its last CPRI
// byte, waits in the switch queue for an open slot of its RE, leaves 2
// cycles into that slot, and its arrival is registered at the REC 2 cycles
// after its first word. Lint reports rst_n as used synchronously: that is
// the switch queues' assertion, disabled during reset.
// Configuration inputs are static while running. The wiring of Fig. 2 of
// the study (three REs, one switch, one REC pool) sets N_RE = 3; the
// connection of the PHYs, radios and REC pool are outside this design.
module coe_fronthaul_top
  import coe_pkg::*;
#(
  parameter int unsigned N_RE      = 3,
  parameter int unsigned BUF_BYTES = 4096,
  parameter int unsigned MAX_SLOTS = 64,
  parameter int unsigned QDEPTH    = 512,
  localparam int unsigned PW       = (N_RE > 1) ? $clog2(N_RE) : 1,
  localparam int unsigned SW       = $clog2(MAX_SLOTS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // radio equipment side
  input  logic [N_RE-1:0]    re_en,
  input  logic [5:0]         cfg_x           [N_RE],  // CPRI bytes per word
  input  logic [10:0]        cfg_payload_len [N_RE],  // L_P in bytes
  input  logic [47:0]        cfg_sa          [N_RE],
  input  logic [47:0]        cfg_da,                  // REC pool address
  input  logic               cfg_ts_sel,
  // switch schedule
  input  logic               cfg_sched_enable,
  input  logic [SW:0]        cfg_num_slots,
  input  logic [15:0]        cfg_slot_cycles,
  input  logic               gcl_we,
  input  logic [SW-1:0]      gcl_addr,
  input  logic               gcl_open,
  input  logic [PW-1:0]      gcl_port,
  // comb-fitting schedule search, writes the GCL when it finishes
  input  logic               cfit_start,
  input  logic [SW:0]        cfit_period     [N_RE],  // slots between packets
  output logic               cfit_busy,
  output logic               cfit_feasible,
  output logic [SW:0]        cfit_jitter,             // in timeslots
  // fronthaul link (switch output, towards the PHY)
  output word_t              link_word,
  output logic               link_valid,
  // REC side
  output logic               rec_pay_valid,
  output word_t              rec_pay_word,
  output logic [7:0]         rec_flow,
  output logic               rec_frame_done,
  output logic               rec_frame_ok,
  output logic [31:0]        rec_frames_ok,
  output logic [31:0]        rec_frames_bad,
  // status
  output logic [31:0]        re_frames_sent  [N_RE],
  output logic [N_RE-1:0]    re_overflow,
  output logic [15:0]        sw_sent         [N_RE],
  output logic [15:0]        sw_drops        [N_RE],
  output logic [15:0]        sw_misses,
  output logic [15:0]        sw_conflicts,
  input  logic               jit_clear,
  output logic [31:0]        jitter          [N_RE],
  output logic [31:0]        worst_jitter
);

  word_t           enc_word  [N_RE];
  logic [N_RE-1:0] enc_valid;

  for (genvar j = 0; j < N_RE; j++) begin : g_re
    logic              src_valid;
    logic [DATA_W-1:0] src_data;
    logic              src_rf_start;
    logic [7:0]        src_hfn, src_bfn;

    cpri_prbs_source #(.SEED(31'h7FFF_FFFF - 31'(j) * 31'h1234_567)) u_src (
      .clk, .rst_n,
      .en           (re_en[j]),
      .cfg_x        (cfg_x[j]),
      .out_valid    (src_valid),
      .out_data     (src_data),
      .out_rf_start (src_rf_start),
      .out_hfn      (src_hfn),
      .out_bfn      (src_bfn)
    );

    coe_encap #(.BUF_BYTES(BUF_BYTES)) u_encap (
      .clk, .rst_n,
      .in_valid        (src_valid),
      .in_data         (src_data),
      .in_rf_start     (src_rf_start),
      .cfg_payload_len (cfg_payload_len[j]),
      .cfg_da          (cfg_da),
      .cfg_sa          (cfg_sa[j]),
      .cfg_flow_id     (8'(j)),
      .cfg_ts_sel      (cfg_ts_sel),
      .out_word        (enc_word[j]),
      .out_valid       (enc_valid[j]),
      .frames_sent     (re_frames_sent[j]),
      .overflow        (re_overflow[j])
    );
  end

  logic [SW-1:0] cur_slot;

  // gate-control list: written from outside, or by the schedule search
  logic          cf_we, cf_open, cf_done;
  logic [SW-1:0] cf_addr;
  logic [PW-1:0] cf_port;
  logic          sw_gcl_we, sw_gcl_open;
  logic [SW-1:0] sw_gcl_addr;
  logic [PW-1:0] sw_gcl_port;

  cfit_scheduler #(.N_FLOWS(N_RE), .MAX_SLOTS(MAX_SLOTS)) u_cfit (
    .clk, .rst_n,
    .start         (cfit_start),
    .cfg_num_slots (cfg_num_slots),
    .cfg_period    (cfit_period),
    .busy          (cfit_busy),
    .done          (cf_done),
    .feasible      (cfit_feasible),
    .best_jitter   (cfit_jitter),
    .gcl_we        (cf_we),
    .gcl_addr      (cf_addr),
    .gcl_open      (cf_open),
    .gcl_port      (cf_port)
  );

  always_comb begin
    if (cfit_busy) begin
      sw_gcl_we = cf_we; sw_gcl_addr = cf_addr; sw_gcl_open = cf_open; sw_gcl_port = cf_port;
    end else begin
      sw_gcl_we = gcl_we; sw_gcl_addr = gcl_addr; sw_gcl_open = gcl_open; sw_gcl_port = gcl_port;
    end
  end

  coe_sched_switch #(.N_PORTS(N_RE), .MAX_SLOTS(MAX_SLOTS), .QDEPTH(QDEPTH)) u_sw (
    .clk, .rst_n,
    .in_valid        (enc_valid),
    .in_word         (enc_word),
    .cfg_enable      (cfg_sched_enable),
    .cfg_num_slots   (cfg_num_slots),
    .cfg_slot_cycles (cfg_slot_cycles),
    .gcl_we          (sw_gcl_we),
    .gcl_addr        (sw_gcl_addr),
    .gcl_open        (sw_gcl_open),
    .gcl_port        (sw_gcl_port),
    .out_word        (link_word),
    .out_valid       (link_valid),
    .cur_slot        (cur_slot),
    .sent            (sw_sent),
    .drops           (sw_drops),
    .misses          (sw_misses),
    .conflicts       (sw_conflicts)
  );

  logic        arr_valid;
  logic [7:0]  arr_flow;
  logic [47:0] hdr_da, hdr_sa;
  logic [15:0] hdr_type;
  roe_hdr_t    hdr_roe;

  coe_decap u_decap (
    .clk, .rst_n,
    .in_valid   (link_valid),
    .in_word    (link_word),
    .pay_valid  (rec_pay_valid),
    .pay_word   (rec_pay_word),
    .hdr_da, .hdr_sa, .hdr_type, .hdr_roe,
    .arr_valid, .arr_flow,
    .frame_done (rec_frame_done),
    .frame_ok   (rec_frame_ok),
    .frames_ok  (rec_frames_ok),
    .frames_bad (rec_frames_bad)
  );

  assign rec_flow = hdr_roe.flow_id;

  logic [31:0]   max_d [N_RE];
  logic [31:0]   min_d [N_RE];
  logic [15:0]   n_int [N_RE];
  logic [PW-1:0] worst_flow;

  jitter_monitor #(.N_FLOWS(N_RE), .TW(32)) u_jit (
    .clk, .rst_n,
    .clear        (jit_clear),
    .evt_valid    (arr_valid),
    .evt_flow     (arr_flow),
    .jitter       (jitter),
    .max_delay    (max_d),
    .min_delay    (min_d),
    .intervals    (n_int),
    .worst_jitter (worst_jitter),
    .worst_flow   (worst_flow)
  );

endmodule
