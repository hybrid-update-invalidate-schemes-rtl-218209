// Next value of the per-block counter of the Threshold scheme.
//
// Every cache block carries a small counter. Following the paper's three
// rules, the counter is
//   - set to zero when the block enters the cache (fill),
//   - increased by one when this cache snoops a read request for a block
//     it holds validly (snoop_read),
//   - decreased by one after the block has been written locally (write).
// A fill together with a write (a write miss) leaves zero. The counter
// saturates at 0 and at its maximum; the paper gives neither a width nor
// what happens at the ends, so both are this design's choice.
// Purely combinational; the caller stores the result in the tag array.
module reuse_counter #(
  parameter int unsigned CNT_W = 2
) (
  input  logic [CNT_W-1:0] cur,
  input  logic             fill,
  input  logic             snoop_read,
  input  logic             write,
  output logic [CNT_W-1:0] next
);

  localparam logic [CNT_W-1:0] MAX = {CNT_W{1'b1}};

  logic [CNT_W-1:0] base;

  always_comb begin
    base = fill ? '0 : cur;
    next = base;
    if (snoop_read && !write) begin
      if (base != MAX) next = base + 1'b1;
    end else if (write && !snoop_read) begin
      if (base != '0) next = base - 1'b1;
    end
  end

endmodule
