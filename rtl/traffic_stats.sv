// Per-core traffic counters.
//
// The paper measures each coherence scheme by the bus traffic it causes:
// its simulator counts, at each core, the reads and writes issued and the
// read requests, write requests (invalidates) and update requests sent on
// the bus. This block keeps those five counts per core, plus the victim
// write-backs, which the paper does not report but which are bus traffic
// too. Every counter is CNT_BITS wide and wraps; `clear` zeroes all of them.
// Events are sampled on the rising clock edge:
//   cpu_fire[i]/cpu_we[i] - core i's cache accepted a load or a store,
//   cm_valid/cm_cmd/cm_src - bus commit: read request, invalidate or
//                           update, charged to the issuing cache cm_src,
//   wb_done/wb_src        - a victim write-back finished.
module traffic_stats
  import coh_pkg::*;
#(
  parameter int unsigned N        = 8,
  parameter int unsigned CNT_BITS = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [N-1:0]        cpu_fire,
  input  logic [N-1:0]        cpu_we,
  input  logic                cm_valid,
  input  bus_cmd_e            cm_cmd,
  input  logic [CORE_W-1:0]   cm_src,
  input  logic                wb_done,
  input  logic [CORE_W-1:0]   wb_src,
  output logic [CNT_BITS-1:0] n_reads     [N],
  output logic [CNT_BITS-1:0] n_writes    [N],
  output logic [CNT_BITS-1:0] n_read_reqs [N],
  output logic [CNT_BITS-1:0] n_invals    [N],
  output logic [CNT_BITS-1:0] n_updates   [N],
  output logic [CNT_BITS-1:0] n_wbacks    [N]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        n_reads[i] <= '0; n_writes[i] <= '0; n_read_reqs[i] <= '0;
        n_invals[i] <= '0; n_updates[i] <= '0; n_wbacks[i] <= '0;
      end
    end else if (clear) begin
      for (int i = 0; i < N; i++) begin
        n_reads[i] <= '0; n_writes[i] <= '0; n_read_reqs[i] <= '0;
        n_invals[i] <= '0; n_updates[i] <= '0; n_wbacks[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        if (cpu_fire[i] && !cpu_we[i]) n_reads[i]  <= n_reads[i] + 1'b1;
        if (cpu_fire[i] &&  cpu_we[i]) n_writes[i] <= n_writes[i] + 1'b1;
        if (cm_valid && int'(cm_src) == i) begin
          if (cm_cmd == BUS_READ)  n_read_reqs[i] <= n_read_reqs[i] + 1'b1;
          if (cm_cmd == BUS_INVAL) n_invals[i]    <= n_invals[i] + 1'b1;
          if (cm_cmd == BUS_UPD)   n_updates[i]   <= n_updates[i] + 1'b1;
        end
        if (wb_done && int'(wb_src) == i) n_wbacks[i] <= n_wbacks[i] + 1'b1;
      end
    end
  end

endmodule
