// Exhaustive test of reuse_counter for a 2-bit and a 3-bit counter:
// every current value and every combination of fill, snooped read and write.
module tb_reuse_counter;
  logic [1:0] cur2, next2;
  logic [2:0] cur3, next3;
  logic fill, snoop_read, write;
  int checks = 0, failures = 0;

  reuse_counter #(.CNT_W(2)) dut2 (.cur(cur2), .fill, .snoop_read, .write, .next(next2));
  reuse_counter #(.CNT_W(3)) dut3 (.cur(cur3), .fill, .snoop_read, .write, .next(next3));

  function automatic int model(int cur, int maxv, bit f, bit s, bit w);
    int v = f ? 0 : cur;
    v = v + (s ? 1 : 0) - (w ? 1 : 0);
    if (v < 0) v = 0;
    if (v > maxv) v = maxv;
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++)
      for (int e = 0; e < 8; e++) begin
        cur2 = 2'(c); cur3 = 3'(c);
        {fill, snoop_read, write} = 3'(e);
        #1;
        if (c < 4) begin
          checks++;
          if (int'(next2) != model(c, 3, fill, snoop_read, write)) begin
            failures++; $display("2-bit cur=%0d ev=%b got %0d", c, e[2:0], next2);
          end
        end
        checks++;
        if (int'(next3) != model(c, 7, fill, snoop_read, write)) begin
          failures++; $display("3-bit cur=%0d ev=%b got %0d", c, e[2:0], next3);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
