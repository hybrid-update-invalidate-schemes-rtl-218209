// Shared snooping bus between the private caches and main memory.
//
// The paper connects all first-level caches to main memory and keeps them
// coherent by snooping: read requests, invalidates and updates are seen by
// every cache. It does not describe the bus itself; the sequencing below is
// this design's. One transaction is in flight at a time:
//   IDLE   - the round-robin arbiter picks a requesting cache; its request
//            (bus_req_t) is latched.
//   SNOOP  - the address is broadcast; every other cache answers hit/owner.
//            The hit bits are counted (sharer_count) and the count is
//            returned to the requester, whose write policy answers with
//            update or invalidate; both are latched.
//   MEMWR  - only if the requester hands over a dirty victim: write it back.
//   MEMRD  - only for a read request that no cache owns (no M/O copy).
//   COMMIT - one cycle: the command (read, invalidate or update), address,
//            data and the "shared" flag are broadcast; all caches apply it.
// A read takes its data from the owning cache if there is one at commit
// time (a clean E copy may have been written silently in the meantime),
// otherwise from memory. Memory uses a request/acknowledge handshake: the
// bus holds mem_req and its fields until mem_ack is high for one cycle.
// A transaction takes the arbitration cycle, SNOOP and COMMIT, plus the
// acknowledge latency of every memory access it makes.
module snoop_bus
  import coh_pkg::*;
#(
  parameter int unsigned N    = 8,   // number of caches (paper: 2 to 16)
  parameter int unsigned SH_W = 5    // sharer count width
) (
  input  logic              clk,
  input  logic              rst_n,
  // requests from the caches
  input  bus_req_t          breq        [N],
  input  logic [N-1:0]      breq_update,
  // snoop address phase
  output logic              snp_valid,
  output logic [ADDR_W-1:0] snp_addr,
  output logic [SH_W-1:0]   snp_others,
  input  snoop_resp_t       snp_resp    [N],
  // commit broadcast
  output bus_commit_t       cm,
  output logic              wb_done,    // a victim write-back completed
  output logic [CORE_W-1:0] cur_src,    // cache owning the bus
  // main memory
  output logic              mem_req,
  output logic              mem_we,
  output logic [ADDR_W-1:0] mem_addr,
  output logic [DATA_W-1:0] mem_wdata,
  input  logic              mem_ack,
  input  logic [DATA_W-1:0] mem_rdata
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  typedef enum logic [2:0] {B_IDLE, B_SNOOP, B_MEMWR, B_MEMRD, B_COMMIT} bstate_e;
  bstate_e bs_q;

  bus_req_t          req_q;
  logic [IW-1:0]     src_q;
  logic              upd_q;
  logic              owner_q;
  logic [SH_W-1:0]   others_q;
  logic [DATA_W-1:0] memdata_q;

  // arbitration
  logic [N-1:0]  req_vec, grant;
  logic [IW-1:0] gid;
  logic          gvalid;

  always_comb
    for (int i = 0; i < N; i++) req_vec[i] = breq[i].valid;

  bus_arbiter #(.N(N)) u_arb (
    .clk, .rst_n,
    .req         (req_vec),
    .advance     (bs_q == B_IDLE),
    .grant       (grant),
    .grant_id    (gid),
    .grant_valid (gvalid)
  );

  // snoop responses of all caches but the requester
  logic [N-1:0]      hit_o, own_o;
  logic [DATA_W-1:0] own_data;
  logic [SH_W-1:0]   n_others;

  always_comb begin
    own_data = '0;
    for (int i = 0; i < N; i++) begin
      hit_o[i] = snp_resp[i].hit   && (i != int'(src_q));
      own_o[i] = snp_resp[i].owner && (i != int'(src_q));
      if (own_o[i]) own_data = snp_resp[i].data;
    end
  end

  sharer_count #(.N(N), .SH_W(SH_W)) u_count (.hit(hit_o), .count(n_others));

  assign snp_valid  = (bs_q != B_IDLE);
  assign snp_addr   = req_q.addr;
  assign snp_others = n_others;
  assign cur_src    = CORE_W'(src_q);

  always_comb begin
    cm        = '0;
    cm.src    = CORE_W'(src_q);
    cm.addr   = req_q.addr;
    cm.shared = (others_q != '0);
    if (bs_q == B_COMMIT) begin
      cm.valid = 1'b1;
      if (req_q.kind == REQ_READ) begin
        cm.cmd  = BUS_READ;
        cm.data = (|own_o) ? own_data : memdata_q;
      end else begin
        cm.cmd  = upd_q ? BUS_UPD : BUS_INVAL;
        cm.data = req_q.wdata;
      end
    end
  end

  always_comb begin
    mem_req   = (bs_q == B_MEMWR) || (bs_q == B_MEMRD);
    mem_we    = (bs_q == B_MEMWR);
    mem_addr  = (bs_q == B_MEMWR) ? req_q.wb_addr : req_q.addr;
    mem_wdata = req_q.wb_data;
  end

  assign wb_done = (bs_q == B_MEMWR) && mem_ack;

  logic need_mem_rd;
  assign need_mem_rd = (req_q.kind == REQ_READ) && !owner_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bs_q      <= B_IDLE;
      req_q     <= '0;
      src_q     <= '0;
      upd_q     <= 1'b0;
      owner_q   <= 1'b0;
      others_q  <= '0;
      memdata_q <= '0;
    end else begin
      unique case (bs_q)
        B_IDLE: if (gvalid) begin
          bs_q  <= B_SNOOP;
          src_q <= gid;
          req_q <= breq[gid];
        end
        B_SNOOP: begin
          upd_q    <= breq_update[src_q];
          owner_q  <= |own_o;
          others_q <= n_others;
          if (req_q.wb_valid)                            bs_q <= B_MEMWR;
          else if (req_q.kind == REQ_READ && !(|own_o))  bs_q <= B_MEMRD;
          else                                           bs_q <= B_COMMIT;
        end
        B_MEMWR: if (mem_ack) bs_q <= need_mem_rd ? B_MEMRD : B_COMMIT;
        B_MEMRD: if (mem_ack) begin
          memdata_q <= mem_rdata;
          bs_q      <= B_COMMIT;
        end
        B_COMMIT: bs_q <= B_IDLE;
        default:  bs_q <= B_IDLE;
      endcase
    end
  end

  // MOESI allows at most one owner of a block.
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
    snp_valid |-> $onehot0(own_o));
  // Memory acknowledges only a pending request.
  a_ack_needs_req: assert property (@(posedge clk) disable iff (!rst_n)
    mem_ack |-> mem_req);
  // The arbiter grants at most one cache, and only a valid request.
  a_grant_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(grant));
  a_latched_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (bs_q != B_IDLE) |-> req_q.valid);
  // The granted requester keeps its request until the commit.
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    (bs_q != B_IDLE) |-> breq[src_q].valid);

endmodule
