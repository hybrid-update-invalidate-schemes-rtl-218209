// Runs the three synthetic sharing patterns on the full 8-core system under
// each hybrid scheme setting and prints the bus traffic (read requests +
// invalidates + updates) in the way the results are usually tabulated:
// one row per workload, one column per scheme setting.
//
//   Locks  - 3 shared lock blocks; on each step a random core, with 10%
//            probability, touches a lock: it frees a lock it holds (store),
//            else reads the lock and takes it (store) if it is free. All
//            other accesses go to the core's private range.
//   Arrays - a 2-D array, one row per core; each step a random core
//            processes the next element of its row: it reads the element
//            and its four neighbours (up, down, left, right) and writes it.
//   Server - core 0 (server) reads and writes anywhere; the clients read
//            the public half or their own slice of the private half.
//
// Operations are issued one at a time (the traffic count does not depend on
// timing), so a flat memory image kept here gives the value every load must
// return. Also checked: the per-core load/store counters add up to what was
// issued, and over all runs invalidates and updates both occurred.
// The probabilities follow the workload descriptions; the range sizes and
// run length (OPS per run instead of five million) are this test's choice.
module tb_workloads;
  import coh_pkg::*;

  localparam int N = 8;
  localparam int OPS = 50000;

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

  coherent_system dut (.*);
  main_memory_model #(.MAX_LAT(1)) u_mem (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] gold [logic [31:0]];
  int issued_r, issued_w, tot_inv, tot_upd;

  function automatic logic [31:0] gold_val(logic [31:0] a);
    return gold.exists(a) ? gold[a] : (a ^ 32'h5A5A_0000);
  endfunction

  task automatic op(input int c, input bit we, input logic [31:0] a, output logic [31:0] rd);
    logic [31:0] v;
    v = $urandom;
    @(negedge clk);
    cpu_req_valid[c] = 1; cpu_req_we[c] = we; cpu_req_addr[c] = a; cpu_req_wdata[c] = v;
    do @(posedge clk); while (!cpu_req_ready[c]);
    @(negedge clk);
    cpu_req_valid[c] = 0;
    while (!cpu_resp_valid[c]) @(negedge clk);
    rd = cpu_resp_rdata[c];
    if (we) begin
      gold[a] = v; issued_w++;
    end else begin
      issued_r++;
      checks++;
      if (rd != gold_val(a)) begin
        failures++;
        if (failures < 10) $display("core %0d load %h got %h exp %h", c, a, rd, gold_val(a));
      end
    end
  endtask

  // address map (block addresses)
  localparam logic [31:0] LOCK_BASE = 32'h0000_0000;   // 3 locks, one per block
  localparam logic [31:0] PRIV_BASE = 32'h0001_0000;   // + core*1024
  localparam int          PRIV_SIZE = 1024;
  localparam logic [31:0] ARR_BASE  = 32'h0002_0000;   // N rows x 64 columns
  localparam int          ARR_COLS  = 64;
  localparam logic [31:0] SRV_BASE  = 32'h0003_0000;
  localparam int          SRV_PUB   = 1024;            // public half
  localparam int          SRV_PRIV  = 128;             // per-client slice

  task automatic run_locks();
    int holder [3];
    logic [31:0] rd;
    for (int l = 0; l < 3; l++) holder[l] = -1;
    for (int k = 0; k < OPS; k++) begin
      int c, l;
      c = $urandom % N;
      if ($urandom % 10 == 0) begin
        l = $urandom % 3;
        if (holder[l] == c) begin
          op(c, 1, LOCK_BASE + l, rd); holder[l] = -1;
        end else begin
          op(c, 0, LOCK_BASE + l, rd);
          if (holder[l] < 0) begin op(c, 1, LOCK_BASE + l, rd); holder[l] = c; end
        end
      end else
        op(c, ($urandom % 4) == 0, PRIV_BASE + c * PRIV_SIZE + ($urandom % PRIV_SIZE), rd);
    end
  endtask

  task automatic run_arrays();
    int col [N];
    logic [31:0] rd;
    for (int c = 0; c < N; c++) col[c] = 0;
    for (int k = 0; k < OPS / 6; k++) begin
      int c, x;
      c = $urandom % N;
      x = col[c];
      op(c, 0, ARR_BASE + c * ARR_COLS + x, rd);
      if (c > 0)            op(c, 0, ARR_BASE + (c - 1) * ARR_COLS + x, rd);
      if (c < N - 1)        op(c, 0, ARR_BASE + (c + 1) * ARR_COLS + x, rd);
      if (x > 0)            op(c, 0, ARR_BASE + c * ARR_COLS + x - 1, rd);
      if (x < ARR_COLS - 1) op(c, 0, ARR_BASE + c * ARR_COLS + x + 1, rd);
      op(c, 1, ARR_BASE + c * ARR_COLS + x, rd);
      col[c] = (x + 1) % ARR_COLS;
    end
  endtask

  task automatic run_server();
    logic [31:0] rd;
    for (int k = 0; k < OPS; k++) begin
      int c;
      c = $urandom % N;
      if (c == 0)
        op(0, ($urandom % 2) == 0, SRV_BASE + ($urandom % (SRV_PUB + (N - 1) * SRV_PRIV)), rd);
      else if ($urandom % 2)
        op(c, 0, SRV_BASE + ($urandom % SRV_PUB), rd);
      else
        op(c, 0, SRV_BASE + SRV_PUB + (c - 1) * SRV_PRIV + ($urandom % SRV_PRIV), rd);
    end
  endtask

  // scheme settings, as in the published comparison
  localparam int NCFG = 8;
  string cfg_name [NCFG] = '{"Thr1", "Thr2", "Thr3", "Adapted", "Sh3", "Sh4", "Sh5", "Sh6"};

  initial begin
    int traffic [3][NCFG];
    string wl [3] = '{"Locks", "Arrays", "Server"};
    cpu_req_valid = '0; cpu_req_we = '0; stats_clear = 0;
    for (int i = 0; i < N; i++) begin cpu_req_addr[i] = '0; cpu_req_wdata[i] = '0; end
    issued_r = 0; issued_w = 0; tot_inv = 0; tot_upd = 0;
    for (int w = 0; w < 3; w++)
      for (int f = 0; f < NCFG; f++) begin
        int sr, sw;
        // fresh caches and memory for every run
        rst_n = 0;
        gold.delete();
        u_mem.store.delete();
        scheme = (f < 3) ? SCH_THRESHOLD : (f == 3) ? SCH_ADAPTED : SCH_SHARERS;
        threshold = (f < 3) ? 2'(f + 1) : 2'd1;
        min_sharers = (f >= 4) ? 5'(f - 1) : 5'd4;
        repeat (3) @(posedge clk);
        rst_n = 1;
        issued_r = 0; issued_w = 0;
        process::self().srandom(1000 + w);   // same trace for every scheme
        case (w)
          0: run_locks();
          1: run_arrays();
          default: run_server();
        endcase
        repeat (2) @(negedge clk);
        sr = 0; sw = 0; traffic[w][f] = 0;
        for (int c = 0; c < N; c++) begin
          sr += n_reads[c]; sw += n_writes[c];
          traffic[w][f] += n_read_reqs[c] + n_invals[c] + n_updates[c];
          tot_inv += n_invals[c]; tot_upd += n_updates[c];
        end
        checks++;
        if (sr != issued_r || sw != issued_w) begin
          failures++; $display("%s/%s: counted %0d/%0d loads/stores, issued %0d/%0d",
                               wl[w], cfg_name[f], sr, sw, issued_r, issued_w);
        end
      end
    $display("bus transactions (read requests + invalidates + updates), 8 cores:");
    $display("%-8s %8s %8s %8s %8s %8s %8s %8s %8s", "", cfg_name[0], cfg_name[1], cfg_name[2],
             cfg_name[3], cfg_name[4], cfg_name[5], cfg_name[6], cfg_name[7]);
    for (int w = 0; w < 3; w++)
      $display("%-8s %8d %8d %8d %8d %8d %8d %8d %8d", wl[w], traffic[w][0], traffic[w][1],
               traffic[w][2], traffic[w][3], traffic[w][4], traffic[w][5], traffic[w][6], traffic[w][7]);
    checks++;
    if (tot_inv == 0 || tot_upd == 0) begin
      failures++; $display("invalidates %0d, updates %0d: one kind never happened", tot_inv, tot_upd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
