// jitter_monitor -- packet-to-packet jitter of each CoE flow at the REC.
//
// Implements the jitter metric of the source study:
//   delay(i,j)  = arrival(i+1,j) - arrival(i,j)
//   Jitter(j)   = max_i delay(i,j) - min_i delay(i,j)
//   Jitter      = max_j Jitter(j)
// Each arrival event (evt_valid with the flow index evt_flow) is stamped with
// a free-running cycle counter. Per flow the monitor keeps the previous
// arrival time and the smallest and largest inter-arrival time seen since
// the last clear. jitter[j] and worst_jitter are combinational from those
// registers, in clock cycles (6.4 ns each); a flow with fewer than two
// intervals reports 0. Events for a flow index >= N_FLOWS are ignored.
//
// Interface: clear resets all statistics (not the time base). intervals[j]
// counts the inter-arrival times measured for flow j.
// Timing: an event is reflected in the outputs the cycle after it.
module jitter_monitor #(
  parameter int unsigned N_FLOWS = 3,
  parameter int unsigned TW      = 32,
  localparam int unsigned FW     = (N_FLOWS > 1) ? $clog2(N_FLOWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          evt_valid,
  input  logic [7:0]    evt_flow,
  output logic [TW-1:0] jitter       [N_FLOWS],
  output logic [TW-1:0] max_delay    [N_FLOWS],
  output logic [TW-1:0] min_delay    [N_FLOWS],
  output logic [15:0]   intervals    [N_FLOWS],
  output logic [TW-1:0] worst_jitter,
  output logic [FW-1:0] worst_flow
);

  logic [TW-1:0] now;
  logic [TW-1:0] last [N_FLOWS];
  logic          seen [N_FLOWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0;
      for (int j = 0; j < N_FLOWS; j++) begin
        last[j]      <= '0;
        seen[j]      <= 1'b0;
        max_delay[j] <= '0;
        min_delay[j] <= '1;
        intervals[j] <= '0;
      end
    end else begin
      now <= now + 1'b1;
      for (int j = 0; j < N_FLOWS; j++) begin
        if (clear) begin
          seen[j]      <= 1'b0;
          max_delay[j] <= '0;
          min_delay[j] <= '1;
          intervals[j] <= '0;
        end else if (evt_valid && evt_flow == 8'(j)) begin
          logic [TW-1:0] d;
          d       = now - last[j];
          last[j] <= now;
          seen[j] <= 1'b1;
          if (seen[j]) begin
            if (d > max_delay[j]) max_delay[j] <= d;
            if (d < min_delay[j]) min_delay[j] <= d;
            if (intervals[j] != '1) intervals[j] <= intervals[j] + 16'd1;
          end
        end
      end
    end
  end

  always_comb begin
    worst_jitter = '0;
    worst_flow   = '0;
    for (int j = 0; j < N_FLOWS; j++) begin
      jitter[j] = (intervals[j] != 0) ? max_delay[j] - min_delay[j] : '0;
      if (jitter[j] > worst_jitter) begin
        worst_jitter = jitter[j];
        worst_flow   = FW'(j);
      end
    end
  end

endmodule
