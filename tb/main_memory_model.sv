// Behavioural model of main memory for the testbenches (not synthesizable
// logic: it stands for the off-chip memory below the caches).
// Answers each request after a pseudo-random 0..MAX_LAT extra cycles with a
// one-cycle ack; read data travel with the ack. Locations never written
// read as init_value(addr), a fixed function the reference models share.
module main_memory_model
  import coh_pkg::*;
#(
  parameter int unsigned MAX_LAT = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mem_req,
  input  logic              mem_we,
  input  logic [ADDR_W-1:0] mem_addr,
  input  logic [DATA_W-1:0] mem_wdata,
  output logic              mem_ack,
  output logic [DATA_W-1:0] mem_rdata
);

  logic [DATA_W-1:0] store [logic [ADDR_W-1:0]];
  int unsigned wait_cnt;
  int unsigned n_reads, n_writes;

  function automatic logic [DATA_W-1:0] init_value(logic [ADDR_W-1:0] a);
    return a ^ 32'h5A5A_0000;
  endfunction

  function automatic logic [DATA_W-1:0] peek(logic [ADDR_W-1:0] a);
    return store.exists(a) ? store[a] : init_value(a);
  endfunction

  initial begin
    mem_ack = 1'b0; mem_rdata = '0; wait_cnt = 0; n_reads = 0; n_writes = 0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      mem_ack  <= 1'b0;
      wait_cnt <= 0;
    end else if (mem_ack) begin
      mem_ack <= 1'b0;
    end else if (mem_req) begin
      if (wait_cnt == 0) wait_cnt <= 1 + ($urandom % (MAX_LAT + 1));
      else if (wait_cnt == 1) begin
        wait_cnt <= 0;
        mem_ack  <= 1'b1;
        if (mem_we) begin
          store[mem_addr] = mem_wdata;
          n_writes++;
        end else begin
          mem_rdata <= peek(mem_addr);
          n_reads++;
        end
      end else wait_cnt <= wait_cnt - 1;
    end
  end

endmodule
