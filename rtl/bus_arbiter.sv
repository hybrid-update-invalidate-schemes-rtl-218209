// Round-robin arbiter for the shared snooping bus.
//
// The paper's caches share one snooping bus but it does not say how the bus
// is granted; a round-robin arbiter is this design's choice, so that no
// core can be starved. When `advance` is high (the bus is free and takes a
// new transaction) the grant goes to the first requester after the one
// granted last, and the pointer moves past it. Grant is combinational from
// `req`; the pointer is updated on the rising clock edge.
module bus_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] grant_id,
  output logic                 grant_valid
);

  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] last_q;

  always_comb begin
    grant       = '0;
    grant_id    = '0;
    grant_valid = 1'b0;
    for (int k = 1; k <= N; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(last_q) + k) % N);
      if (!grant_valid && req[idx]) begin
        grant_valid = 1'b1;
        grant_id    = idx;
      end
    end
    if (grant_valid && advance) grant[grant_id] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      last_q <= IW'(N - 1);
    else if (advance && grant_valid) last_q <= grant_id;
  end

endmodule
