// Randomised test of snoop_bus with 4 caches played by the testbench.
// Each fake cache holds a hit/owner/data answer per address, drawn at
// random (at most one owner). Requests (read or write, with or without a
// victim write-back, with a random update decision) arrive from random
// caches. Checked for every transaction: round-robin grant order, the
// sharer count returned during the snoop phase, the memory write-back and
// read (present exactly when needed, right address and data), the commit
// command, data and shared flag, and the cycle count from grant to commit
// (one cycle from the snoop phase to the commit, plus memory time).
module tb_snoop_bus;
  import coh_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  bus_req_t breq [N];
  logic [N-1:0] breq_update;
  logic snp_valid;
  logic [ADDR_W-1:0] snp_addr;
  logic [4:0] snp_others;
  snoop_resp_t snp_resp [N];
  bus_commit_t cm;
  logic wb_done;
  logic [CORE_W-1:0] cur_src;
  logic mem_req, mem_we, mem_ack;
  logic [ADDR_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;

  snoop_bus #(.N(N), .SH_W(5)) dut (.*);
  main_memory_model #(.MAX_LAT(2)) u_mem (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fake snoop answers, fixed per transaction
  bit          f_hit [N];
  bit          f_own [N];
  logic [31:0] f_dat [N];
  always_comb
    for (int i = 0; i < N; i++) begin
      snp_resp[i].hit   = snp_valid && f_hit[i];
      snp_resp[i].owner = snp_valid && f_own[i];
      snp_resp[i].data  = f_dat[i];
    end

  // memory traffic monitor
  int n_memwr, n_memrd;
  logic [31:0] last_wr_addr, last_wr_data;
  always @(posedge clk) if (mem_req && mem_ack) begin
    if (mem_we) begin n_memwr++; last_wr_addr = mem_addr; last_wr_data = mem_wdata; end
    else n_memrd++;
  end

  int ev_c2c, ev_mem, ev_wb, ev_upd, ev_inv;

  initial begin
    int last = N - 1;
    for (int i = 0; i < N; i++) begin breq[i] = '0; f_hit[i] = 0; f_own[i] = 0; f_dat[i] = '0; end
    breq_update = '0;
    n_memwr = 0; n_memrd = 0; ev_c2c = 0; ev_mem = 0; ev_wb = 0; ev_upd = 0; ev_inv = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int exp_src, others, owner, t_grant, pw, pr, lat_mem;
      bit upd;
      logic [N-1:0] reqs;
      @(negedge clk);
      // new set of requests
      reqs = N'($urandom) | N'(1 << ($urandom % N));
      for (int i = 0; i < N; i++) begin
        breq[i] = '0;
        if (reqs[i]) begin
          breq[i].valid    = 1;
          breq[i].kind     = ($urandom % 2) ? REQ_WRITE : REQ_READ;
          breq[i].addr     = 32'h100 + ($urandom % 64);
          breq[i].wdata    = $urandom;
          breq[i].wb_valid = ($urandom % 4) == 0;
          breq[i].wb_addr  = 32'h800 + $urandom % 64;
          breq[i].wb_data  = $urandom;
        end
      end
      breq_update = N'($urandom);
      exp_src = -1;
      for (int k = 1; k <= N; k++)
        if (exp_src < 0 && reqs[(last + k) % N]) exp_src = (last + k) % N;
      // snoop answers of the others: random holders, at most one owner
      owner = ($urandom % 2) ? int'($urandom % N) : -1;
      others = 0;
      for (int i = 0; i < N; i++) begin
        f_hit[i] = (i != exp_src) && (($urandom % 2) || i == owner);
        f_own[i] = (i != exp_src) && (i == owner);
        f_dat[i] = $urandom;
        if (f_hit[i]) others++;
      end
      if (owner == exp_src) owner = -1;
      pw = n_memwr; pr = n_memrd;
      @(posedge clk);  // grant edge
      @(negedge clk);  // snoop phase
      t_grant = cyc;
      checks++;
      if (int'(cur_src) != exp_src) begin
        failures++; $display("t %0d grant %0d exp %0d", t, cur_src, exp_src);
      end
      last = exp_src;
      checks++;
      if (!snp_valid || snp_addr != breq[exp_src].addr || int'(snp_others) != others) begin
        failures++; $display("t %0d snoop phase wrong: others %0d exp %0d", t, snp_others, others);
      end
      while (!cm.valid) @(negedge clk);
      lat_mem = (n_memwr - pw) + (n_memrd - pr);
      upd = breq_update[exp_src];
      checks += 4;
      if (int'(cm.src) != exp_src || cm.addr != breq[exp_src].addr || cm.shared != (others > 0)) begin
        failures++; $display("t %0d commit header wrong", t);
      end
      if (breq[exp_src].kind == REQ_READ) begin
        if (cm.cmd != BUS_READ) begin failures++; $display("t %0d not a read", t); end
        if (owner >= 0) begin
          ev_c2c++;
          if (cm.data != f_dat[owner] || n_memrd != pr) begin failures++; $display("t %0d owner data", t); end
        end else begin
          ev_mem++;
          if (cm.data != u_mem.peek(breq[exp_src].addr) || n_memrd != pr + 1) begin
            failures++; $display("t %0d memory data", t);
          end
        end
      end else begin
        if (upd) ev_upd++; else ev_inv++;
        if (cm.cmd != (upd ? BUS_UPD : BUS_INVAL) || cm.data != breq[exp_src].wdata || n_memrd != pr) begin
          failures++; $display("t %0d write commit wrong", t);
        end
      end
      if (breq[exp_src].wb_valid) begin
        ev_wb++;
        if (n_memwr != pw + 1 || last_wr_addr != breq[exp_src].wb_addr || last_wr_data != breq[exp_src].wb_data) begin
          failures++; $display("t %0d write-back wrong", t);
        end
      end else if (n_memwr != pw) begin
        failures++; $display("t %0d unexpected write-back", t);
      end
      // with no memory access the commit follows the snoop phase directly
      if (lat_mem == 0) begin
        checks++;
        if (cyc - t_grant != 1) begin failures++; $display("t %0d latency %0d", t, cyc - t_grant); end
      end
      @(posedge clk);
      for (int i = 0; i < N; i++) breq[i] = '0;
    end
    $display("c2c %0d mem %0d wb %0d upd %0d inv %0d", ev_c2c, ev_mem, ev_wb, ev_upd, ev_inv);
    checks++;
    if (ev_c2c == 0 || ev_mem == 0 || ev_wb == 0 || ev_upd == 0 || ev_inv == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
