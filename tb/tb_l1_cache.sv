// Directed test of one l1_cache (64 sets x 4 ways). The testbench plays
// the bus and the other caches: it answers bus requests with a snoop phase
// (choosing how many other caches hold the block) and a commit, and it
// injects transactions of other caches. Checked: data returned, bus request
// kind, write-back of dirty victims, the update/invalidate choice of all
// three schemes, MOESI state and counter after each step, the snoop answer,
// and the two-cycle latency of a hit.
module tb_l1_cache;
  import coh_pkg::*;

  logic clk = 0, rst_n = 0;
  scheme_e scheme;
  logic [1:0] threshold;
  logic [4:0] min_sharers;
  logic cpu_req_valid, cpu_req_ready, cpu_req_we, cpu_resp_valid, cpu_resp_bus;
  logic [ADDR_W-1:0] cpu_req_addr;
  logic [DATA_W-1:0] cpu_req_wdata, cpu_resp_rdata;
  bus_req_t breq;
  logic breq_update;
  logic snp_valid;
  logic [ADDR_W-1:0] snp_addr;
  logic [4:0] snp_others;
  snoop_resp_t snp_resp;
  bus_commit_t cm;

  l1_cache #(.SETS(64), .WAYS(4), .CNT_W(2), .SH_W(5), .ID(4'd0)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int way_of(logic [31:0] a);
    for (int w = 0; w < 4; w++)
      if (dut.st_a[a[5:0]][w] != ST_I && dut.tag_a[a[5:0]][w] == a[31:6]) return w;
    return -1;
  endfunction

  function automatic moesi_e st_of(logic [31:0] a);
    int w = way_of(a);
    return (w < 0) ? ST_I : dut.st_a[a[5:0]][w];
  endfunction

  function automatic int cnt_of(logic [31:0] a);
    int w = way_of(a);
    return (w < 0) ? -1 : int'(dut.cnt_a[a[5:0]][w]);
  endfunction

  // Issue one processor op. If it needs the bus, play the bus with `others`
  // other holders, `own_data` as fill data; report what was requested.
  task automatic op(input bit we, input logic [31:0] a, input logic [31:0] v, input int others,
                    input logic [31:0] fill, output logic [31:0] rdata, output bit used,
                    output bus_req_t rq, output bit upd, output int lat);
    int t0;
    @(negedge clk);
    cpu_req_valid = 1; cpu_req_we = we; cpu_req_addr = a; cpu_req_wdata = v;
    @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    cpu_req_valid = 0;
    rq = '0; upd = 0;
    // give the cache a cycle to look up
    @(negedge clk);
    if (breq.valid) begin
      rq = breq;
      snp_valid = 1; snp_addr = a; snp_others = 5'(others);
      @(negedge clk);
      upd = breq_update;
      cm = '0; cm.valid = 1; cm.src = 4'd0; cm.addr = a; cm.shared = (others > 0);
      if (rq.kind == REQ_READ) begin cm.cmd = BUS_READ; cm.data = fill; end
      else begin cm.cmd = upd ? BUS_UPD : BUS_INVAL; cm.data = rq.wdata; end
      @(negedge clk);
      cm = '0; snp_valid = 0; snp_others = '0;
    end
    while (!cpu_resp_valid) @(negedge clk);
    lat = cyc - t0;
    rdata = cpu_resp_rdata; used = cpu_resp_bus;
  endtask

  // A transaction of another cache (src 1) seen by this cache.
  task automatic foreign(input bus_cmd_e cmd, input logic [31:0] a, input logic [31:0] d,
                         output snoop_resp_t r);
    @(negedge clk);
    snp_valid = 1; snp_addr = a; snp_others = '0;
    #1 r = snp_resp;
    @(negedge clk);
    cm = '0; cm.valid = 1; cm.cmd = cmd; cm.src = 4'd1; cm.addr = a; cm.data = d;
    @(negedge clk);
    cm = '0; snp_valid = 0;
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    logic [31:0] rd;
    bit used, upd;
    bus_req_t rq;
    int lat;
    snoop_resp_t sr;
    logic [31:0] A, B;
    A = 32'h0000_0105;   // set 5
    B = 32'h0000_0245;   // set 5, another tag
    cpu_req_valid = 0; cpu_req_we = 0; cpu_req_addr = '0; cpu_req_wdata = '0;
    snp_valid = 0; snp_addr = '0; snp_others = '0; cm = '0;
    scheme = SCH_THRESHOLD; threshold = 2'd1; min_sharers = 5'd4;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. load miss, nobody else holds it: read request, fill in E
    op(0, A, 0, 0, 32'hDEAD_0001, rd, used, rq, upd, lat);
    check(used && rq.kind == REQ_READ && !rq.wb_valid, "load miss asks for a read");
    check(rd == 32'hDEAD_0001, "load miss returns fill data");
    check(st_of(A) == ST_E && cnt_of(A) == 0, "fill in E with counter 0");
    // 2. load hit: no bus, two cycles
    op(0, A, 0, 0, 0, rd, used, rq, upd, lat);
    check(!used && rd == 32'hDEAD_0001, "load hit");
    check(lat == 2, $sformatf("hit latency %0d, expected 2", lat));
    // 3. store hit in E: silent, to M
    op(1, A, 32'h1111, 0, 0, rd, used, rq, upd, lat);
    check(!used && st_of(A) == ST_M, "silent store E->M");
    check(lat == 2, "store hit latency");
    // 4. another cache reads A: this cache supplies, M->O, counter +1
    foreign(BUS_READ, A, 0, sr);
    check(sr.hit && sr.owner && sr.data == 32'h1111, "owner answers snoop with data");
    check(st_of(A) == ST_O && cnt_of(A) == 1, "snooped read: M->O, counter 1");
    // 5. Threshold 1: counter 1 >= 1 -> update, stays O, counter 0
    op(1, A, 32'h2222, 1, 0, rd, used, rq, upd, lat);
    check(used && rq.kind == REQ_WRITE && upd, "threshold met: update");
    check(st_of(A) == ST_O && cnt_of(A) == 0, "after update O, counter 0");
    // 6. counter 0 < 1 -> invalidate, to M
    op(1, A, 32'h3333, 1, 0, rd, used, rq, upd, lat);
    check(used && !upd, "threshold not met: invalidate");
    check(st_of(A) == ST_M, "after invalidate M");
    // 7. four foreign reads: the counter stops at 3
    foreign(BUS_READ, A, 0, sr);
    foreign(BUS_READ, A, 0, sr);
    foreign(BUS_READ, A, 0, sr);
    foreign(BUS_READ, A, 0, sr);
    check(cnt_of(A) == 3 && st_of(A) == ST_O, "counter saturates at 3");
    // 8. Adapted-MOESI: store to O -> update
    scheme = SCH_ADAPTED;
    op(1, A, 32'h4444, 2, 0, rd, used, rq, upd, lat);
    check(used && upd && st_of(A) == ST_O, "adapted: update from O");
    // 9. foreign update of A: this cache takes the data and goes to S
    foreign(BUS_UPD, A, 32'h5555, sr);
    check(st_of(A) == ST_S, "foreign update -> S");
    op(0, A, 0, 0, 0, rd, used, rq, upd, lat);
    check(!used && rd == 32'h5555, "updated data read locally");
    // 10. Adapted: store to S -> invalidate
    op(1, A, 32'h6666, 2, 0, rd, used, rq, upd, lat);
    check(used && !upd && st_of(A) == ST_M, "adapted: invalidate from S");
    // 11. foreign invalidate -> I
    foreign(BUS_INVAL, A, 0, sr);
    check(st_of(A) == ST_I, "foreign invalidate -> I");
    // 12. Number of Sharers: miss with 3 others, min 3 -> update, O
    scheme = SCH_SHARERS; min_sharers = 5'd3;
    op(1, A, 32'h7777, 3, 0, rd, used, rq, upd, lat);
    check(used && upd && st_of(A) == ST_O, "sharers 3 >= 3: update, O");
    // 13. hit in O with 1 other (2 sharers) < 3 -> invalidate
    op(1, A, 32'h8888, 1, 0, rd, used, rq, upd, lat);
    check(used && !upd && st_of(A) == ST_M, "sharers 2 < 3: invalidate");
    // 14. fill the set: A(M) + 3 more; the 5th miss evicts the oldest (A)
    //     with a write-back of its dirty data
    op(0, B, 0, 1, 32'hB0B0, rd, used, rq, upd, lat);
    check(st_of(B) == ST_S, "fill with other sharers in S");
    op(0, 32'h0000_0385, 0, 0, 32'h1, rd, used, rq, upd, lat);
    op(0, 32'h0000_0405, 0, 0, 32'h2, rd, used, rq, upd, lat);
    op(0, 32'h0000_0505, 0, 0, 32'h3, rd, used, rq, upd, lat);
    check(used && rq.wb_valid && rq.wb_addr == A && rq.wb_data == 32'h8888,
          "dirty victim written back");
    check(st_of(A) == ST_I && st_of(32'h0000_0505) == ST_E, "victim replaced");
    // 15. next miss evicts the clean S block B without write-back
    op(0, 32'h0000_0605, 0, 0, 32'h4, rd, used, rq, upd, lat);
    check(used && !rq.wb_valid && st_of(B) == ST_I, "clean victim dropped");
    // 16. snoop of an address not held
    foreign(BUS_READ, 32'h0000_0777, 0, sr);
    check(!sr.hit && !sr.owner, "no snoop hit for an absent block");
    // 17. update-only behaviour with threshold 0 on a miss
    scheme = SCH_THRESHOLD; threshold = 2'd0;
    op(1, 32'h0000_0010, 32'h99, 0, 0, rd, used, rq, upd, lat);
    check(used && upd && st_of(32'h0000_0010) == ST_M, "threshold 0, no sharers: update, M");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
