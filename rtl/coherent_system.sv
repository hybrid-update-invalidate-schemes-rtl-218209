// Top level: N private caches kept coherent by a hybrid update/invalidate
// MOESI protocol on one snooping bus.
//
// Each core's load/store port goes to its own l1_cache (64 sets x 4 blocks
// by default, as in the paper). The caches share snoop_bus, which
// serialises their read requests, invalidates and updates, broadcasts them
// to all caches and reaches main memory through the mem_* port. The write
// policy (scheme, threshold, min_sharers) is a run-time setting shared by
// all caches: Threshold with threshold 1 is the setting the paper found
// best overall; Number of Sharers works best with min_sharers near half the
// number of cores. traffic_stats counts, per core, the loads, stores and
// bus messages that the paper uses as its measure of merit.
//
// The cores and the main memory are outside this design: the processor
// ports and the memory port are top-level ports. Each core may have one
// request outstanding (cpu_req_valid/ready handshake, response pulse on
// cpu_resp_valid). Memory answers mem_req with a one-cycle mem_ack, after
// any latency; read data is taken with the acknowledge.
module coherent_system
  import coh_pkg::*;
#(
  parameter int unsigned N_CORES  = 8,   // paper's figures: 8 cores
  parameter int unsigned SETS     = 64,  // paper: 64 sets per cache
  parameter int unsigned WAYS     = 4,   // paper: 4 blocks per set
  parameter int unsigned CNT_W    = 2,   // per-block counter width (assumed)
  parameter int unsigned CNT_BITS = 32   // traffic counter width (assumed)
) (
  input  logic                clk,
  input  logic                rst_n,
  // write-policy configuration
  input  scheme_e             scheme,
  input  logic [CNT_W-1:0]    threshold,
  input  logic [4:0]          min_sharers,
  // processor ports
  input  logic [N_CORES-1:0]  cpu_req_valid,
  output logic [N_CORES-1:0]  cpu_req_ready,
  input  logic [N_CORES-1:0]  cpu_req_we,
  input  logic [ADDR_W-1:0]   cpu_req_addr   [N_CORES],
  input  logic [DATA_W-1:0]   cpu_req_wdata  [N_CORES],
  output logic [N_CORES-1:0]  cpu_resp_valid,
  output logic [DATA_W-1:0]   cpu_resp_rdata [N_CORES],
  output logic [N_CORES-1:0]  cpu_resp_bus,
  // main memory port
  output logic                mem_req,
  output logic                mem_we,
  output logic [ADDR_W-1:0]   mem_addr,
  output logic [DATA_W-1:0]   mem_wdata,
  input  logic                mem_ack,
  input  logic [DATA_W-1:0]   mem_rdata,
  // traffic counters
  input  logic                stats_clear,
  output logic [CNT_BITS-1:0] n_reads     [N_CORES],
  output logic [CNT_BITS-1:0] n_writes    [N_CORES],
  output logic [CNT_BITS-1:0] n_read_reqs [N_CORES],
  output logic [CNT_BITS-1:0] n_invals    [N_CORES],
  output logic [CNT_BITS-1:0] n_updates   [N_CORES],
  output logic [CNT_BITS-1:0] n_wbacks    [N_CORES]
);

  localparam int unsigned SH_W = 5;  // counts 0..16 sharers

  bus_req_t          breq        [N_CORES];
  logic [N_CORES-1:0] breq_update;
  snoop_resp_t       snp_resp    [N_CORES];
  logic              snp_valid;
  logic [ADDR_W-1:0] snp_addr;
  logic [SH_W-1:0]   snp_others;
  bus_commit_t       cm;
  logic              wb_done;
  logic [CORE_W-1:0] cur_src;

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    l1_cache #(
      .SETS(SETS), .WAYS(WAYS), .CNT_W(CNT_W), .SH_W(SH_W),
      .ID(CORE_W'(i))
    ) u_cache (
      .clk, .rst_n,
      .scheme, .threshold, .min_sharers,
      .cpu_req_valid  (cpu_req_valid[i]),
      .cpu_req_ready  (cpu_req_ready[i]),
      .cpu_req_we     (cpu_req_we[i]),
      .cpu_req_addr   (cpu_req_addr[i]),
      .cpu_req_wdata  (cpu_req_wdata[i]),
      .cpu_resp_valid (cpu_resp_valid[i]),
      .cpu_resp_rdata (cpu_resp_rdata[i]),
      .cpu_resp_bus   (cpu_resp_bus[i]),
      .breq           (breq[i]),
      .breq_update    (breq_update[i]),
      .snp_valid, .snp_addr, .snp_others,
      .snp_resp       (snp_resp[i]),
      .cm
    );
  end

  snoop_bus #(.N(N_CORES), .SH_W(SH_W)) u_bus (
    .clk, .rst_n,
    .breq, .breq_update,
    .snp_valid, .snp_addr, .snp_others, .snp_resp,
    .cm, .wb_done, .cur_src,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata
  );

  traffic_stats #(.N(N_CORES), .CNT_BITS(CNT_BITS)) u_stats (
    .clk, .rst_n,
    .clear    (stats_clear),
    .cpu_fire (cpu_req_valid & cpu_req_ready),
    .cpu_we   (cpu_req_we),
    .cm_valid (cm.valid),
    .cm_cmd   (cm.cmd),
    .cm_src   (cm.src),
    .wb_done,
    .wb_src   (cur_src),
    .n_reads, .n_writes, .n_read_reqs, .n_invals, .n_updates, .n_wbacks
  );

endmodule
