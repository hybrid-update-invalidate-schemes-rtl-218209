// Exhaustive test of write_policy: every scheme, state, counter value,
// threshold and a range of sharer counts, compared with the rules written
// out independently below.
module tb_write_policy;
  import coh_pkg::*;

  scheme_e    scheme;
  logic [1:0] threshold, counter;
  logic [4:0] min_sharers, sharers;
  moesi_e     state;
  logic       need_bus, do_update;
  int checks = 0, failures = 0;

  write_policy #(.CNT_W(2), .SH_W(5)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int sc = 0; sc < 3; sc++)
      for (int st = 0; st < 5; st++)
        for (int c = 0; c < 4; c++)
          for (int t = 0; t < 4; t++)
            for (int sh = 0; sh <= 16; sh++)
              for (int m = 1; m <= 8; m++) begin
                bit exp_need, exp_upd;
                scheme = scheme_e'(sc); state = moesi_e'(st);
                counter = 2'(c); threshold = 2'(t);
                sharers = 5'(sh); min_sharers = 5'(m);
                #1;
                exp_need = !(st == 2 || st == 4);   // E and M are silent
                exp_upd  = 0;
                if (exp_need) begin
                  if (sc == 0) exp_upd = (c >= t);
                  if (sc == 1) exp_upd = (st == 3);
                  if (sc == 2) exp_upd = (sh >= m);
                end
                checks++;
                if (need_bus !== exp_need || do_update !== exp_upd) begin
                  failures++;
                  if (failures < 10)
                    $display("mismatch sc=%0d st=%0d c=%0d t=%0d sh=%0d m=%0d: %b%b exp %b%b",
                             sc, st, c, t, sh, m, need_bus, do_update, exp_need, exp_upd);
                end
              end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
