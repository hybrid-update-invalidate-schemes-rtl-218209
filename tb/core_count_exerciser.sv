// Test helper: one coherent_system with N cores and its own memory model,
// driven with random serial loads and stores on a small shared address
// pool, each load checked against a flat memory image. Runs the Number of
// Sharers scheme with a minimum of N/2+1 sharers so that, on 16 cores, an
// update needs more than 8 sharers. Reports its counts through outputs
// when `done` rises.
module core_count_exerciser #(
  parameter int N   = 2,
  parameter int OPS = 4000
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   updates,
  output int   invals,
  output int   max_sharers
);
  import coh_pkg::*;

  logic clk = 0, rst_n = 0;
  scheme_e scheme;
  logic [1:0] threshold;
  logic [4:0] min_sharers;
  logic [N-1:0] cpu_req_valid, cpu_req_ready, cpu_req_we, cpu_resp_valid, cpu_resp_bus;
  logic [ADDR_W-1:0] cpu_req_addr [N];
  logic [DATA_W-1:0] cpu_req_wdata [N], cpu_resp_rdata [N];
  logic mem_req, mem_we, mem_ack;
  logic [ADDR_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;
  logic stats_clear;
  logic [31:0] n_reads [N], n_writes [N], n_read_reqs [N], n_invals [N], n_updates [N], n_wbacks [N];

  coherent_system #(.N_CORES(N)) dut (.*);
  main_memory_model #(.MAX_LAT(2)) u_mem (.*);

  always #5 clk = ~clk;

  logic [31:0] gold [logic [31:0]];

  // largest sharer count seen on the bus
  always @(posedge clk)
    if (dut.snp_valid && int'(dut.snp_others) + 1 > max_sharers) max_sharers = int'(dut.snp_others) + 1;

  initial begin
    done = 0; checks = 0; failures = 0; updates = 0; invals = 0; max_sharers = 0;
    cpu_req_valid = '0; cpu_req_we = '0; stats_clear = 0;
    for (int i = 0; i < N; i++) begin cpu_req_addr[i] = '0; cpu_req_wdata[i] = '0; end
    scheme = SCH_SHARERS; threshold = 2'd1; min_sharers = 5'(N / 2 + 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < OPS; k++) begin
      int c;
      bit we;
      logic [31:0] a, v, exp_v;
      c  = $urandom % N;
      we = ($urandom % 8) == 0;
      a  = {26'($urandom % 6), 6'($urandom % 2)};
      v  = $urandom;
      @(negedge clk);
      cpu_req_valid[c] = 1; cpu_req_we[c] = we; cpu_req_addr[c] = a; cpu_req_wdata[c] = v;
      do @(posedge clk); while (!cpu_req_ready[c]);
      @(negedge clk);
      cpu_req_valid[c] = 0;
      while (!cpu_resp_valid[c]) @(negedge clk);
      if (we) gold[a] = v;
      else begin
        exp_v = gold.exists(a) ? gold[a] : (a ^ 32'h5A5A_0000);
        checks++;
        if (cpu_resp_rdata[c] != exp_v) begin
          failures++;
          if (failures < 10) $display("%0d cores: core %0d load %h got %h exp %h", N, c, a, cpu_resp_rdata[c], exp_v);
        end
      end
    end
    repeat (2) @(negedge clk);
    for (int c = 0; c < N; c++) begin updates += n_updates[c]; invals += n_invals[c]; end
    done = 1;
  end
endmodule
