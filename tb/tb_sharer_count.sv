// Random and corner-case test of sharer_count with 16 inputs.
module tb_sharer_count;
  logic [15:0] hit;
  logic [4:0]  count;
  int checks = 0, failures = 0;

  sharer_count #(.N(16), .SH_W(5)) dut (.hit, .count);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2000; k++) begin
      int exp;
      exp = 0;
      if (k == 0) hit = '0;
      else if (k == 1) hit = '1;
      else hit = 16'($urandom);
      for (int i = 0; i < 16; i++) if (hit[i]) exp++;
      #1;
      checks++;
      if (int'(count) != exp) begin
        failures++;
        if (failures < 10) $display("hit=%h count=%0d exp=%0d", hit, count, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
