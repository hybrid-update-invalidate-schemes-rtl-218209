// Private first-level cache with a MOESI snooping controller and the hybrid
// update/invalidate write policy.
//
// Organisation (paper): 64 sets of 4 blocks, one cache level, every cache
// attached to main memory through a shared snooping bus, MOESI states, and
// a small counter per block for the Threshold scheme. The paper's simulator
// tracks addresses only; here each block holds one DATA_W-bit word so that
// updates carry real data. Replacement is round-robin per set, preferring
// an invalid way: the paper does not name a replacement policy.
//
// Processor side: one request at a time. A request is accepted when
// cpu_req_ready is high; cpu_resp_valid pulses one cycle after it completes.
// A load hit or a store hit in M or E completes without the bus, so its
// response comes two cycles after acceptance. Anything else asks the bus:
//   load miss                  -> read request (fill in E, or S if shared)
//   store to a block in O/S/I  -> invalidate or update, chosen by
//                                 write_policy; the writer ends in M after
//                                 an invalidate, in O after an update that
//                                 reached another sharer, else in M.
// A dirty (M or O) victim is handed to the bus with the request and is
// written back to memory within the same bus transaction.
//
// Snoop side: the bus drives an address (snp_*) for the whole transaction
// and this cache answers combinationally whether it holds the block, owns
// it, and with which data. In the commit cycle (cm.valid) the other caches
// apply the transaction: a read request moves M to O and E to S and adds
// one to the block's counter; an invalidate moves the block to I; an update
// stores the new data and moves the block to S. A local hit is held off for
// the one commit cycle, so that a snoop and a local write never meet on
// the same cycle.
module l1_cache
  import coh_pkg::*;
#(
  parameter int unsigned SETS  = 64,  // paper: 64 sets
  parameter int unsigned WAYS  = 4,   // paper: 4 blocks per set
  parameter int unsigned CNT_W = 2,   // counter width (assumed)
  parameter int unsigned SH_W  = 5,   // sharer count width (0..16)
  parameter logic [CORE_W-1:0] ID = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  scheme_e           scheme,
  input  logic [CNT_W-1:0]  threshold,
  input  logic [SH_W-1:0]   min_sharers,
  // processor side
  input  logic              cpu_req_valid,
  output logic              cpu_req_ready,
  input  logic              cpu_req_we,
  input  logic [ADDR_W-1:0] cpu_req_addr,
  input  logic [DATA_W-1:0] cpu_req_wdata,
  output logic              cpu_resp_valid,
  output logic [DATA_W-1:0] cpu_resp_rdata,
  output logic              cpu_resp_bus,     // the request needed the bus
  // bus request
  output bus_req_t          breq,
  output logic              breq_update,      // decision for a write request
  // snoop address phase
  input  logic              snp_valid,
  input  logic [ADDR_W-1:0] snp_addr,
  input  logic [SH_W-1:0]   snp_others,       // other caches holding the block
  output snoop_resp_t       snp_resp,
  // bus commit
  input  bus_commit_t       cm
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = ADDR_W - SET_W;

  // ---------------------------------------------------------------- arrays
  moesi_e           st_a  [SETS][WAYS];
  logic [TAG_W-1:0] tag_a [SETS][WAYS];
  logic [CNT_W-1:0] cnt_a [SETS][WAYS];
  logic [DATA_W-1:0] dat_a [SETS][WAYS];
  logic [WAY_W-1:0] rr_a  [SETS];

  // ---------------------------------------------------------------- request
  typedef enum logic [1:0] {C_IDLE, C_ACTIVE, C_RESP} cstate_e;
  cstate_e           cs_q;
  logic              we_q;
  logic [ADDR_W-1:0] addr_q;
  logic [DATA_W-1:0] wdata_q;
  logic              used_bus_q;
  logic [DATA_W-1:0] rdata_q;

  logic [SET_W-1:0] req_set;
  logic [TAG_W-1:0] req_tag;
  assign req_set = addr_q[SET_W-1:0];
  assign req_tag = addr_q[ADDR_W-1:SET_W];

  // local lookup
  logic             l_hit;
  logic [WAY_W-1:0] l_way;
  moesi_e           l_st;
  logic [CNT_W-1:0] l_cnt;
  logic [DATA_W-1:0] l_dat;
  // victim selection
  logic             v_found_inv;
  logic [WAY_W-1:0] v_way;

  always_comb begin
    l_hit = 1'b0;
    l_way = '0;
    v_found_inv = 1'b0;
    v_way = rr_a[req_set];
    for (int w = 0; w < WAYS; w++) begin
      if (st_a[req_set][w] != ST_I && tag_a[req_set][w] == req_tag && !l_hit) begin
        l_hit = 1'b1;
        l_way = WAY_W'(w);
      end
      if (st_a[req_set][w] == ST_I && !v_found_inv) begin
        v_found_inv = 1'b1;
        v_way = WAY_W'(w);
      end
    end
    l_st  = l_hit ? st_a[req_set][l_way] : ST_I;
    l_cnt = cnt_a[req_set][l_way];
    l_dat = dat_a[req_set][l_way];
  end

  // write policy of the writer
  logic             pol_need_bus, pol_update;
  logic [SH_W-1:0]  pol_sharers;
  assign pol_sharers = snp_others + SH_W'(l_hit);

  write_policy #(.CNT_W(CNT_W), .SH_W(SH_W)) u_policy (
    .scheme      (scheme),
    .threshold   (threshold),
    .min_sharers (min_sharers),
    .state       (l_st),
    .counter     (l_hit ? l_cnt : '0),
    .sharers     (pol_sharers),
    .need_bus    (pol_need_bus),
    .do_update   (pol_update)
  );
  assign breq_update = pol_update;

  // local completion without the bus
  logic local_ok;
  assign local_ok = (cs_q == C_ACTIVE) && !cm.valid &&
                    (we_q ? (l_st == ST_M || l_st == ST_E) : l_hit);

  logic my_commit;
  assign my_commit = (cs_q == C_ACTIVE) && cm.valid && (cm.src == ID);

  always_comb begin
    breq = '0;
    if (cs_q == C_ACTIVE && !local_ok) begin
      breq.valid = (we_q && pol_need_bus) || (!we_q && !l_hit);
      breq.kind  = we_q ? REQ_WRITE : REQ_READ;
      breq.addr  = addr_q;
      breq.wdata = wdata_q;
      if (!l_hit) begin
        breq.wb_valid = is_owner(st_a[req_set][v_way]);
        breq.wb_addr  = {tag_a[req_set][v_way], req_set};
        breq.wb_data  = dat_a[req_set][v_way];
      end
    end
  end

  // ---------------------------------------------------------------- snoop
  logic [SET_W-1:0] s_set;
  logic [TAG_W-1:0] s_tag;
  logic             s_hit;
  logic [WAY_W-1:0] s_way;
  assign s_set = snp_addr[SET_W-1:0];
  assign s_tag = snp_addr[ADDR_W-1:SET_W];

  always_comb begin
    s_hit = 1'b0;
    s_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (st_a[s_set][w] != ST_I && tag_a[s_set][w] == s_tag && !s_hit) begin
        s_hit = 1'b1;
        s_way = WAY_W'(w);
      end
    end
    snp_resp.hit   = snp_valid && s_hit;
    snp_resp.owner = snp_valid && s_hit && is_owner(st_a[s_set][s_way]);
    snp_resp.data  = dat_a[s_set][s_way];
  end

  // ---------------------------------------------------------------- counter
  logic             cn_fill, cn_snoop, cn_write;
  logic [CNT_W-1:0] cn_cur, cn_next;

  reuse_counter #(.CNT_W(CNT_W)) u_cnt (
    .cur        (cn_cur),
    .fill       (cn_fill),
    .snoop_read (cn_snoop),
    .write      (cn_write),
    .next       (cn_next)
  );

  // ---------------------------------------------------------------- single array write port
  logic              wr_en;
  logic [SET_W-1:0]  wr_set;
  logic [WAY_W-1:0]  wr_way;
  moesi_e            wr_st;
  logic [TAG_W-1:0]  wr_tag;
  logic [DATA_W-1:0] wr_dat;
  logic              wr_rr;   // advance the set's round-robin pointer

  always_comb begin
    wr_en = 1'b0; wr_set = req_set; wr_way = l_way; wr_st = l_st;
    wr_tag = req_tag; wr_dat = l_dat; wr_rr = 1'b0;
    cn_fill = 1'b0; cn_snoop = 1'b0; cn_write = 1'b0; cn_cur = l_cnt;

    if (local_ok && we_q) begin
      // silent store hit in M or E
      wr_en = 1'b1; wr_st = ST_M; wr_dat = wdata_q; cn_write = 1'b1;
    end else if (my_commit) begin
      wr_en = 1'b1;
      if (!l_hit) begin
        wr_way  = v_way;
        wr_rr   = !v_found_inv;
        cn_fill = 1'b1;
      end
      unique case (cm.cmd)
        BUS_READ: begin
          wr_st = cm.shared ? ST_S : ST_E;
          wr_dat = cm.data;
        end
        BUS_INVAL: begin
          wr_st = ST_M; wr_dat = wdata_q; cn_write = 1'b1;
        end
        BUS_UPD: begin
          wr_st = cm.shared ? ST_O : ST_M; wr_dat = wdata_q; cn_write = 1'b1;
        end
        default: wr_en = 1'b0;
      endcase
    end else if (cm.valid && cm.src != ID && s_hit) begin
      // snooped transaction of another cache (cm.addr == snp_addr)
      wr_set = s_set; wr_way = s_way; wr_tag = s_tag;
      wr_st  = st_a[s_set][s_way];
      wr_dat = dat_a[s_set][s_way];
      cn_cur = cnt_a[s_set][s_way];
      wr_en  = 1'b1;
      unique case (cm.cmd)
        BUS_READ: begin
          cn_snoop = 1'b1;
          if (wr_st == ST_M) wr_st = ST_O;
          else if (wr_st == ST_E) wr_st = ST_S;
        end
        BUS_INVAL: wr_st = ST_I;
        BUS_UPD: begin
          wr_st = ST_S; wr_dat = cm.data;
        end
        default: wr_en = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      tag_a[wr_set][wr_way] <= wr_tag;
      dat_a[wr_set][wr_way] <= wr_dat;
      cnt_a[wr_set][wr_way] <= cn_next;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_a[s] <= '0;
        for (int w = 0; w < WAYS; w++) st_a[s][w] <= ST_I;
      end
    end else if (wr_en) begin
      st_a[wr_set][wr_way] <= wr_st;
      if (wr_rr) rr_a[wr_set] <= (int'(wr_way) == WAYS - 1) ? '0 : wr_way + 1'b1;
    end
  end

  // ---------------------------------------------------------------- control
  assign cpu_req_ready  = (cs_q == C_IDLE);
  assign cpu_resp_valid = (cs_q == C_RESP);
  assign cpu_resp_rdata = rdata_q;
  assign cpu_resp_bus   = used_bus_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_q       <= C_IDLE;
      we_q       <= 1'b0;
      addr_q     <= '0;
      wdata_q    <= '0;
      used_bus_q <= 1'b0;
      rdata_q    <= '0;
    end else begin
      unique case (cs_q)
        C_IDLE: if (cpu_req_valid) begin
          cs_q    <= C_ACTIVE;
          we_q    <= cpu_req_we;
          addr_q  <= cpu_req_addr;
          wdata_q <= cpu_req_wdata;
        end
        C_ACTIVE: begin
          if (local_ok) begin
            cs_q       <= C_RESP;
            used_bus_q <= 1'b0;
            rdata_q    <= we_q ? wdata_q : l_dat;
          end else if (my_commit) begin
            cs_q       <= C_RESP;
            used_bus_q <= 1'b1;
            rdata_q    <= we_q ? wdata_q : cm.data;
          end
        end
        C_RESP:  cs_q <= C_IDLE;
        default: cs_q <= C_IDLE;
      endcase
    end
  end

  // The commit concerns the address that the snoop phase broadcast.
  a_commit_addr: assert property (@(posedge clk) disable iff (!rst_n)
    cm.valid |-> (snp_valid && cm.addr == snp_addr));
  // A commit addressed to this cache only arrives while it waits for the bus.
  a_commit_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    (cm.valid && cm.src == ID) |-> (cs_q == C_ACTIVE && breq.valid));

endmodule
