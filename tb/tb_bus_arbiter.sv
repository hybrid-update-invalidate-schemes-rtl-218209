// Test of bus_arbiter: random request patterns, random advance; the grant
// must be one-hot, go to a requester, and follow round-robin order from the
// last grant (checked against a reference pointer kept here).
module tb_bus_arbiter;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, grant;
  logic advance;
  logic [2:0] grant_id;
  logic grant_valid;
  int checks = 0, failures = 0;
  int last = N - 1;

  bus_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; advance = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int exp;
      @(negedge clk);
      req = N'($urandom) & N'($urandom);
      advance = ($urandom % 4) != 0;
      #1;
      exp = -1;
      for (int k = 1; k <= N; k++)
        if (exp < 0 && req[(last + k) % N]) exp = (last + k) % N;
      checks++;
      if (exp < 0) begin
        if (grant_valid || grant != 0) begin failures++; $display("grant without request"); end
      end else begin
        if (!grant_valid || int'(grant_id) != exp) begin
          failures++;
          if (failures < 10) $display("cyc %0d req=%b last=%0d got %0d exp %0d", cyc, req, last, grant_id, exp);
        end
        if (advance && grant != (N'(1) << exp)) begin failures++; $display("grant vector wrong"); end
        if (!advance && grant != 0) begin failures++; $display("grant while not advancing"); end
        if (advance) last = exp;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
