// Hybrid write policy: update or invalidate?
//
// Evaluated when the local processor writes a block. A block in M or E is
// written silently, because no other cache can hold it. For a block in O, S
// or I the write must be announced on the bus, and this unit chooses the
// kind of announcement according to the selected scheme:
//   Threshold     - update when the block's counter is at or above THRESHOLD,
//                   otherwise invalidate.
//   Adapted-MOESI - update when the block is in O, invalidate in S or I.
//   Sharers       - update when the number of caches holding the block is
//                   at or above MIN_SHARERS, otherwise invalidate.
// These rules are the paper's. The paper does not say whether the writer
// itself counts as a sharer; here `sharers` is the number of caches holding
// a valid copy, the writer included, which the caller provides.
// Purely combinational; no clock.
module write_policy
  import coh_pkg::*;
#(
  parameter int unsigned CNT_W = 2,  // width of the per-block counter
  parameter int unsigned SH_W  = 4   // width of a sharer count (0..N_CORES)
) (
  input  scheme_e          scheme,
  input  logic [CNT_W-1:0] threshold,    // Threshold scheme
  input  logic [SH_W-1:0]  min_sharers,  // Number of Sharers scheme
  input  moesi_e           state,        // writer's state of the block
  input  logic [CNT_W-1:0] counter,      // writer's counter of the block
  input  logic [SH_W-1:0]  sharers,      // caches holding a valid copy
  output logic             need_bus,     // write must be announced
  output logic             do_update     // announce as update (else invalidate)
);

  always_comb begin
    need_bus  = (state == ST_O) || (state == ST_S) || (state == ST_I);
    do_update = 1'b0;
    if (need_bus) begin
      unique case (scheme)
        SCH_THRESHOLD: do_update = (counter >= threshold);
        SCH_ADAPTED:   do_update = (state == ST_O);
        SCH_SHARERS:   do_update = (sharers >= min_sharers);
        default:       do_update = 1'b0;
      endcase
    end
  end

endmodule
