// Sharer count for the Number of Sharers scheme.
//
// The paper notes that this scheme needs to know how many caches hold a
// block, which a directory would provide. On this snooping bus the count is
// formed from the snoop responses: every cache reports whether it holds the
// broadcast address validly, and this unit adds up those hit bits (a
// population count). Purely combinational.
module sharer_count #(
  parameter int unsigned N    = 8,
  parameter int unsigned SH_W = $clog2(N + 1)
) (
  input  logic [N-1:0]    hit,
  output logic [SH_W-1:0] count
);

  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count = count + SH_W'(hit[i]);
  end

endmodule
