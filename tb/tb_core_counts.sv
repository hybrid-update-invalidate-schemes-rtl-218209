// Runs the system at the smallest and largest core counts of the evaluated
// range, 2 and 16 cores (the default build has 8), with random serial
// traffic checked against a flat memory image. At 16 cores the Number of
// Sharers scheme with a minimum of 9 must see more than 8 sharers of one
// block and produce both updates and invalidates.
module tb_core_counts;
  logic d2, d16;
  int c2, f2, u2, i2, s2, c16, f16, u16, i16, s16;
  int checks = 0, failures = 0;

  core_count_exerciser #(.N(2),  .OPS(4000)) u2c  (.done(d2),  .checks(c2),  .failures(f2),  .updates(u2),  .invals(i2),  .max_sharers(s2));
  core_count_exerciser #(.N(16), .OPS(8000)) u16c (.done(d16), .checks(c16), .failures(f16), .updates(u16), .invals(i16), .max_sharers(s16));

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (d2 && d16);
    $display("2 cores: %0d updates, %0d invalidates, up to %0d sharers", u2, i2, s2);
    $display("16 cores: %0d updates, %0d invalidates, up to %0d sharers", u16, i16, s16);
    checks = c2 + c16 + 3;
    failures = f2 + f16;
    if (s16 <= 8)  begin failures++; $display("16 cores never had more than 8 sharers"); end
    if (u16 == 0 || i16 == 0) begin failures++; $display("16 cores: an update or invalidate kind missing"); end
    if (u2 == 0 || i2 == 0)   begin failures++; $display("2 cores: an update or invalidate kind missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
