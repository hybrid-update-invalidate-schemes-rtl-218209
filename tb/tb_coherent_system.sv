// End-to-end test of coherent_system at its default size (8 cores, 64 sets
// x 4 ways), no parameter overrides.
//
// Phase A, serial: one load or store at a time, on a small address pool
// that maps many tags onto few sets so blocks are evicted. A reference
// model kept here (MOESI states, per-block counters, round-robin
// replacement, the three write-policy schemes) predicts for every operation
// the data returned, whether the bus is used and which message it carries
// (read request, invalidate, update, write-back); the design's traffic
// counters and responses are compared with it. The scheme, threshold and
// sharer minimum change every 400 operations.
// Phase B, concurrent: all cores issue operations at once. Each address has
// one writing core that stores increasing values; every read must return a
// value no older than the last one that core saw, and a writer must read
// back its own last value.
// Each mechanism (memory fill, cache-to-cache supply, silent store, load
// hit, invalidate, update of each scheme, write-back, bus contention) is
// counted; one that never happened counts as a failure.
module tb_coherent_system;
  import coh_pkg::*;

  localparam int N = 8, SETS = 64, WAYS = 4;
  localparam int N_OPS_A = 20000, N_OPS_B = 2000;

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
  main_memory_model #(.MAX_LAT(3)) u_mem (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ reference model
  int          m_st  [N][SETS][WAYS];   // 0 I, 1 S, 2 E, 3 O, 4 M
  logic [25:0] m_tag [N][SETS][WAYS];
  int          m_cnt [N][SETS][WAYS];
  logic [31:0] m_dat [N][SETS][WAYS];
  int          m_rr  [N][SETS];
  logic [31:0] m_mem [logic [31:0]];

  // mechanism counters
  int ev_memfill, ev_c2c, ev_silent, ev_hit, ev_inv, ev_wb, ev_contend, ev_cnt_sat;
  int ev_upd [3];

  function automatic logic [31:0] mem_val(logic [31:0] a);
    return m_mem.exists(a) ? m_mem[a] : (a ^ 32'h5A5A_0000);
  endfunction

  function automatic int find(int c, logic [31:0] a);
    for (int w = 0; w < WAYS; w++)
      if (m_st[c][a[5:0]][w] != 0 && m_tag[c][a[5:0]][w] == a[31:6]) return w;
    return -1;
  endfunction

  function automatic int victim(int c, int s);
    for (int w = 0; w < WAYS; w++) if (m_st[c][s][w] == 0) return w;
    return m_rr[c][s];
  endfunction

  // returns expected: bus kind 0 none, 1 read, 2 inval, 3 update; wb; data
  task automatic model_op(input int c, input bit we, input logic [31:0] a, input logic [31:0] v,
                          input int sch, input int thr, input int msh,
                          output int kind, output bit wb, output logic [31:0] data);
    int s, w, others, own, vw;
    bit upd;
    s = int'(a[5:0]);
    w = find(c, a);
    wb = 0; kind = 0; data = v;
    if (!we && w >= 0) begin
      data = m_dat[c][s][w]; ev_hit++;
      return;
    end
    if (we && w >= 0 && (m_st[c][s][w] == 2 || m_st[c][s][w] == 4)) begin
      m_st[c][s][w] = 4; m_dat[c][s][w] = v;
      if (m_cnt[c][s][w] > 0) m_cnt[c][s][w]--;
      ev_silent++;
      return;
    end
    others = 0; own = -1;
    for (int o = 0; o < N; o++) if (o != c) begin
      int ow = find(o, a);
      if (ow >= 0) begin
        others++;
        if (m_st[o][s][ow] >= 3) own = o;
      end
    end
    if (w < 0) begin
      vw = victim(c, s);
      if (m_st[c][s][vw] >= 3) begin
        wb = 1; ev_wb++;
        m_mem[{m_tag[c][s][vw], 6'(s)}] = m_dat[c][s][vw];
      end
      if (m_st[c][s][vw] != 0) m_rr[c][s] = (vw + 1) % WAYS;
      m_st[c][s][vw] = 0;
    end
    if (!we) begin
      kind = 1;
      if (own >= 0) begin
        data = m_dat[own][s][find(own, a)]; ev_c2c++;
      end else begin
        data = mem_val(a); ev_memfill++;
      end
      for (int o = 0; o < N; o++) if (o != c) begin
        int ow = find(o, a);
        if (ow >= 0) begin
          if (m_cnt[o][s][ow] < 3) m_cnt[o][s][ow]++; else ev_cnt_sat++;
          if (m_st[o][s][ow] == 4) m_st[o][s][ow] = 3;
          if (m_st[o][s][ow] == 2) m_st[o][s][ow] = 1;
        end
      end
      m_st[c][s][vw] = (others > 0) ? 1 : 2;
      m_tag[c][s][vw] = a[31:6]; m_dat[c][s][vw] = data; m_cnt[c][s][vw] = 0;
      return;
    end
    // store to a block in O, S or I
    case (sch)
      0: upd = ((w >= 0) ? m_cnt[c][s][w] : 0) >= thr;
      1: upd = (w >= 0) && (m_st[c][s][w] == 3);
      default: upd = (others + ((w >= 0) ? 1 : 0)) >= msh;
    endcase
    kind = upd ? 3 : 2;
    if (upd) ev_upd[sch]++; else ev_inv++;
    for (int o = 0; o < N; o++) if (o != c) begin
      int ow = find(o, a);
      if (ow >= 0) begin
        if (upd) begin m_st[o][s][ow] = 1; m_dat[o][s][ow] = v; end
        else m_st[o][s][ow] = 0;
      end
    end
    if (w < 0) begin
      w = vw; m_cnt[c][s][w] = 0; m_tag[c][s][w] = a[31:6];
    end else if (m_cnt[c][s][w] > 0) m_cnt[c][s][w]--;
    m_st[c][s][w] = (upd && others > 0) ? 3 : 4;
    m_dat[c][s][w] = v;
  endtask

  // ------------------------------------------------------------ driving
  task automatic cpu_op(input int c, input bit we, input logic [31:0] a, input logic [31:0] v,
                        output logic [31:0] rdata, output bit used_bus);
    @(negedge clk);
    cpu_req_valid[c] = 1; cpu_req_we[c] = we; cpu_req_addr[c] = a; cpu_req_wdata[c] = v;
    do @(posedge clk); while (!cpu_req_ready[c]);
    @(negedge clk);
    cpu_req_valid[c] = 0;
    while (!cpu_resp_valid[c]) @(negedge clk);
    rdata = cpu_resp_rdata[c];
    used_bus = cpu_resp_bus[c];
  endtask

  // bus contention monitor
  always @(posedge clk) if (rst_n) begin
    int nreq;
    nreq = 0;
    for (int i = 0; i < N; i++) if (dut.breq[i].valid) nreq++;
    if (nreq > 1) ev_contend++;
  end

  logic [31:0] last_wr [N][16];   // phase B: per writer, per address slot
  int unsigned wseq [N];
  int n_done = 0;

  initial begin
    int sch, thr, msh;
    cpu_req_valid = '0; cpu_req_we = '0; stats_clear = 0;
    for (int i = 0; i < N; i++) begin cpu_req_addr[i] = '0; cpu_req_wdata[i] = '0; end
    scheme = SCH_THRESHOLD; threshold = 2'd1; min_sharers = 5'd4;
    for (int c = 0; c < N; c++)
      for (int s = 0; s < SETS; s++) begin
        m_rr[c][s] = 0;
        for (int w = 0; w < WAYS; w++) begin
          m_st[c][s][w] = 0; m_cnt[c][s][w] = 0; m_tag[c][s][w] = '0; m_dat[c][s][w] = '0;
        end
      end
    ev_memfill = 0; ev_c2c = 0; ev_silent = 0; ev_hit = 0; ev_inv = 0; ev_wb = 0;
    ev_contend = 0; ev_cnt_sat = 0; ev_upd = '{0, 0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    sch = 0; thr = 1; msh = 4;

    // ---------------- phase A
    for (int k = 0; k < N_OPS_A; k++) begin
      int c, kind, prr, pinv, pupd, pwb;
      bit we, wb, used;
      logic [31:0] a, v, exp_d, got;
      if (k % 400 == 0) begin
        sch = (k / 400) % 3;
        thr = (k / 1200) % 4;
        msh = 2 + (k / 400) % 5;
        @(negedge clk);
        scheme = scheme_e'(sch); threshold = 2'(thr); min_sharers = 5'(msh);
      end
      c  = $urandom % N;
      we = ($urandom % 3) == 0;
      // 4 sets, 8 tags each: more tags than ways, so blocks get evicted
      a  = {26'($urandom % 8), 6'($urandom % 4)};
      v  = $urandom;
      prr = n_read_reqs[c]; pinv = n_invals[c]; pupd = n_updates[c]; pwb = n_wbacks[c];
      model_op(c, we, a, v, sch, thr, msh, kind, wb, exp_d);
      cpu_op(c, we, a, v, got, used);
      repeat (2) @(negedge clk);
      checks++;
      if (!we && got !== exp_d) begin
        failures++;
        if (failures < 20) $display("op %0d core %0d load %h: got %h exp %h", k, c, a, got, exp_d);
      end
      checks++;
      if (used != (kind != 0)) begin
        failures++;
        if (failures < 20) $display("op %0d core %0d: bus used %b, expected kind %0d", k, c, used, kind);
      end
      checks++;
      if (int'(n_read_reqs[c]) - prr != (kind == 1) ||
          int'(n_invals[c]) - pinv != (kind == 2) ||
          int'(n_updates[c]) - pupd != (kind == 3) ||
          int'(n_wbacks[c]) - pwb != int'(wb)) begin
        failures++;
        if (failures < 20)
          $display("op %0d core %0d %s %h sch %0d: rr %0d inv %0d upd %0d wb %0d, expected kind %0d wb %0d",
                   k, c, we ? "store" : "load", a, sch, int'(n_read_reqs[c]) - prr,
                   int'(n_invals[c]) - pinv, int'(n_updates[c]) - pupd, int'(n_wbacks[c]) - pwb, kind, wb);
      end
    end

    // final state and data of the modelled sets in cores 0 and 7
    for (int s = 0; s < 4; s++)
      for (int w = 0; w < WAYS; w++) begin
        checks += 2;
        if (m_st[0][s][w] != int'(dut.g_core[0].u_cache.st_a[s][w]) ||
            (m_st[0][s][w] != 0 && m_dat[0][s][w] != dut.g_core[0].u_cache.dat_a[s][w])) begin
          failures++; $display("core 0 set %0d way %0d differs from the model", s, w);
        end
        if (m_st[7][s][w] != int'(dut.g_core[7].u_cache.st_a[s][w]) ||
            (m_st[7][s][w] != 0 && m_dat[7][s][w] != dut.g_core[7].u_cache.dat_a[s][w])) begin
          failures++; $display("core 7 set %0d way %0d differs from the model", s, w);
        end
      end

    // ---------------- phase B
    @(negedge clk);
    scheme = SCH_THRESHOLD; threshold = 2'd1;
    for (int c = 0; c < N; c++) begin
      wseq[c] = 0;
      for (int j = 0; j < 16; j++) last_wr[c][j] = '0;
    end
    begin
      logic [31:0] seen [N][16];
      for (int c = 0; c < N; c++) for (int j = 0; j < 16; j++) seen[c][j] = '0;
      // addresses 0x1000 + j: first write makes values small counters
      for (int j = 0; j < 16; j++) begin
        logic [31:0] g; bit u;
        cpu_op(j % N, 1, 32'h1000 + j, 32'h1, g, u);
        last_wr[j % N][j] = 32'h1;
        for (int c = 0; c < N; c++) seen[c][j] = 32'h1;
      end
      for (int c0 = 0; c0 < N; c0++) begin
        fork
          automatic int c = c0;
          begin
            for (int k = 0; k < N_OPS_B; k++) begin
              automatic int j;
              automatic bit we, u;
              automatic logic [31:0] g;
              j = $urandom % 16;
              we = (j % N == c) && ($urandom % 2 == 0);
              if (we) begin
                last_wr[c][j] = last_wr[c][j] + 1;
                cpu_op(c, 1, 32'h1000 + j, last_wr[c][j], g, u);
              end else begin
                cpu_op(c, 0, 32'h1000 + j, 32'h0, g, u);
                checks++;
                if (g < seen[c][j] || (j % N == c && g != last_wr[c][j])) begin
                  failures++;
                  if (failures < 20) $display("phase B core %0d addr %0d read %0d after %0d", c, j, g, seen[c][j]);
                end
                seen[c][j] = g;
              end
            end
            n_done++;
          end
        join_none
      end
      wait (n_done == N);
    end

    // ---------------- mechanisms
    $display("memory fills %0d, cache-to-cache %0d, load hits %0d, silent stores %0d",
             ev_memfill, ev_c2c, ev_hit, ev_silent);
    $display("invalidates %0d, updates threshold/adapted/sharers %0d/%0d/%0d, write-backs %0d",
             ev_inv, ev_upd[0], ev_upd[1], ev_upd[2], ev_wb);
    $display("counter saturations %0d, cycles with bus contention %0d", ev_cnt_sat, ev_contend);
    foreach (ev_upd[i]) begin
      checks++; if (ev_upd[i] == 0) begin failures++; $display("no update under scheme %0d", i); end
    end
    checks += 8;
    if (ev_memfill == 0) begin failures++; $display("no memory fill"); end
    if (ev_c2c == 0)     begin failures++; $display("no cache-to-cache supply"); end
    if (ev_hit == 0)     begin failures++; $display("no load hit"); end
    if (ev_silent == 0)  begin failures++; $display("no silent store"); end
    if (ev_inv == 0)     begin failures++; $display("no invalidate"); end
    if (ev_wb == 0)      begin failures++; $display("no write-back"); end
    if (ev_cnt_sat == 0) begin failures++; $display("no counter saturation"); end
    if (ev_contend == 0) begin failures++; $display("no bus contention"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
