// Shared types for the hybrid update/invalidate coherence system.
//
// A block is in one of the five MOESI states. A write to a block held in
// O, S or I must tell the other caches; the hybrid write policy chooses
// per write whether that message is an invalidate (other copies go to I)
// or an update carrying the new data (other copies take it and go to S).
// The three hybrid schemes are selectable at run time. The state names and
// the scheme names follow the paper; the 3-bit state encoding, the bus
// command encoding and the numeric scheme codes are this design's own.
package coh_pkg;

  typedef enum logic [2:0] {
    ST_I = 3'd0,   // invalid
    ST_S = 3'd1,   // shared, clean, not the owner
    ST_E = 3'd2,   // exclusive, clean, sole copy
    ST_O = 3'd3,   // owned: dirty, other sharers may exist, answers requests
    ST_M = 3'd4    // modified: dirty, sole copy
  } moesi_e;

  // Hybrid scheme selection.
  typedef enum logic [1:0] {
    SCH_THRESHOLD = 2'd0,  // per-block counter compared with a threshold
    SCH_ADAPTED   = 2'd1,  // Adapted-MOESI: update only when the writer is in O
    SCH_SHARERS   = 2'd2   // update when the number of sharers reaches a minimum
  } scheme_e;

  // Transaction a cache asks the bus for.
  typedef enum logic [1:0] {
    REQ_READ  = 2'd0,  // read request (load miss)
    REQ_WRITE = 2'd1   // write to a block in O, S or I: invalidate or update
  } req_e;

  // What the bus broadcasts in its commit cycle.
  typedef enum logic [1:0] {
    BUS_IDLE  = 2'd0,
    BUS_READ  = 2'd1,
    BUS_INVAL = 2'd2,
    BUS_UPD   = 2'd3
  } bus_cmd_e;

  // Widths of a block address and of the data a block holds. The paper's
  // simulator tracks addresses only; it gives no address or block size.
  // Here a block holds one DATA_W-bit word and is addressed by a block
  // address of ADDR_W bits.
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned DATA_W = 32;
  // Core numbers: the paper simulates 2 to 16 caches (4-bit core id).
  localparam int unsigned CORE_W    = 4;

  // A cache's request for the bus. Besides the block it asks for, it names
  // the dirty victim (if any) that must be written back to memory first.
  typedef struct packed {
    logic              valid;
    req_e              kind;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
    logic              wb_valid;
    logic [ADDR_W-1:0] wb_addr;
    logic [DATA_W-1:0] wb_data;
  } bus_req_t;

  // A cache's answer to the address on the bus.
  typedef struct packed {
    logic              hit;    // holds the block in a valid state
    logic              owner;  // holds it in M or O and supplies the data
    logic [DATA_W-1:0] data;
  } snoop_resp_t;

  // The bus commit, seen by all caches in the same cycle.
  typedef struct packed {
    logic              valid;
    bus_cmd_e          cmd;
    logic [CORE_W-1:0] src;     // cache that issued the transaction
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] data;    // fill data (read) or new data (update)
    logic              shared;  // another cache holds the block
  } bus_commit_t;

  function automatic logic is_valid(moesi_e s);
    return s != ST_I;
  endfunction

  function automatic logic is_owner(moesi_e s);
    return (s == ST_M) || (s == ST_O);
  endfunction

endpackage
