// Test of traffic_stats: random processor and bus events for 4 cores over
// 3000 cycles, a clear in the middle, and every counter compared with
// counts kept here.
module tb_traffic_stats;
  import coh_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [N-1:0] cpu_fire, cpu_we;
  bus_commit_t cm;
  logic cm_valid;
  bus_cmd_e cm_cmd;
  logic [CORE_W-1:0] cm_src;
  assign cm_valid = cm.valid;
  assign cm_cmd = cm.cmd;
  assign cm_src = cm.src;
  logic wb_done;
  logic [CORE_W-1:0] wb_src;
  logic [31:0] n_reads [N], n_writes [N], n_read_reqs [N], n_invals [N], n_updates [N], n_wbacks [N];
  int e_r [N], e_w [N], e_rr [N], e_i [N], e_u [N], e_wb [N];
  int checks = 0, failures = 0;

  traffic_stats #(.N(N), .CNT_BITS(32)) dut (
    .clk, .rst_n, .clear, .cpu_fire, .cpu_we, .cm_valid, .cm_cmd, .cm_src, .wb_done, .wb_src,
    .n_reads, .n_writes, .n_read_reqs, .n_invals, .n_updates, .n_wbacks);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int i = 0; i < N; i++) begin
      checks += 6;
      if (n_reads[i] != 32'(e_r[i]))      begin failures++; $display("reads[%0d] %0d exp %0d", i, n_reads[i], e_r[i]); end
      if (n_writes[i] != 32'(e_w[i]))     begin failures++; $display("writes[%0d]", i); end
      if (n_read_reqs[i] != 32'(e_rr[i])) begin failures++; $display("read_reqs[%0d]", i); end
      if (n_invals[i] != 32'(e_i[i]))     begin failures++; $display("invals[%0d]", i); end
      if (n_updates[i] != 32'(e_u[i]))    begin failures++; $display("updates[%0d] %0d exp %0d", i, n_updates[i], e_u[i]); end
      if (n_wbacks[i] != 32'(e_wb[i]))    begin failures++; $display("wbacks[%0d]", i); end
    end
  endtask

  initial begin
    cpu_fire = '0; cpu_we = '0; cm = '0; wb_done = 0; wb_src = '0;
    for (int i = 0; i < N; i++) begin e_r[i]=0; e_w[i]=0; e_rr[i]=0; e_i[i]=0; e_u[i]=0; e_wb[i]=0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      clear = (cyc == 1500);
      cpu_fire = N'($urandom); cpu_we = N'($urandom);
      cm = '0;
      cm.valid = $urandom % 2;
      cm.cmd = bus_cmd_e'($urandom % 4);
      cm.src = CORE_W'($urandom % N);
      wb_done = $urandom % 2;
      wb_src = CORE_W'($urandom % N);
      if (clear) begin
        for (int i = 0; i < N; i++) begin e_r[i]=0; e_w[i]=0; e_rr[i]=0; e_i[i]=0; e_u[i]=0; e_wb[i]=0; end
      end else begin
        for (int i = 0; i < N; i++) begin
          if (cpu_fire[i] && !cpu_we[i]) e_r[i]++;
          if (cpu_fire[i] && cpu_we[i]) e_w[i]++;
        end
        if (cm.valid && cm.cmd == BUS_READ)  e_rr[cm.src]++;
        if (cm.valid && cm.cmd == BUS_INVAL) e_i[cm.src]++;
        if (cm.valid && cm.cmd == BUS_UPD)   e_u[cm.src]++;
        if (wb_done) e_wb[wb_src]++;
      end
      @(posedge clk); #1;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
