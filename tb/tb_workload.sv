// tb_workload: the same layer-like accelerator workload and core mix run
// through two controllers side by side: one with both bypass policies off
// (plain Accelerator Request Priority, no bypass) and one with HyDRA's
// deadline- and reuse-aware accelerator bypass and SHIP core bypass on.
// The LLC is reduced to 64 sets x 16 ways (64 KB), the L-RPT to 4K entries
// and the epoch to 20,000 cycles, so that the accelerator's layer (2.5K
// lines) and the cores' hot set (400 lines) contend for a 1K-line cache as
// a real layer and real applications contend for 8 MB.
// Two input sets are run on each: one with a loose deadline and one with a
// deadline close to what the no-bypass system needs.
// Checks: both systems finish every set before the deadline; with the loose
// deadline HyDRA bypasses a large share of the accelerator's accesses and
// the cores' hit rate after the first epoch is higher than without bypass;
// with the tight deadline HyDRA still meets it and bypasses less.
module tb_workload;
  import hydra_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] deadline = 0;
  logic go = 0;
  logic rdy_n, rdy_h, act_n, act_h;
  logic [31:0] met_n, met_h, miss_n, miss_h;
  hydra_stats_t st_n, st_h;
  int m_n, m_h, iss_n, iss_h, chl_n, chl_h, cal_n, cal_h;

  wl_harness nb (
    .clk, .rst_n, .acc_bypass_en(1'b0), .core_bypass_en(1'b0), .deadline, .go,
    .ready(rdy_n), .set_active(act_n), .sets_met(met_n), .sets_missed(miss_n), .stats(st_n),
    .m_total(m_n), .acc_issued(iss_n), .core_hits_late(chl_n), .core_acc_late(cal_n)
  );
  wl_harness hy (
    .clk, .rst_n, .acc_bypass_en(1'b1), .core_bypass_en(1'b1), .deadline, .go,
    .ready(rdy_h), .set_active(act_h), .sets_met(met_h), .sets_missed(miss_h), .stats(st_h),
    .m_total(m_h), .acc_issued(iss_h), .core_hits_late(chl_h), .core_acc_late(cal_h)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_set(input int d, output int t_n, output int t_h);
    int t0;
    bit dn, dh;
    deadline = 32'(d);
    repeat (50) @(negedge clk);
    go = 1; @(negedge clk); go = 0;
    repeat (3) @(negedge clk);
    t0 = int'($time / 10);
    dn = 0; dh = 0; t_n = 0; t_h = 0;
    while (!(dn && dh)) begin
      @(negedge clk);
      if (!dn && !act_n) begin dn = 1; t_n = int'($time / 10) - t0; end
      if (!dh && !act_h) begin dh = 1; t_h = int'($time / 10) - t0; end
    end
  endtask

  initial begin
    int tn, th, cn0, ch0, an0, ah0, bw0, br0;
    real hr_n, hr_h;
    repeat (5) @(negedge clk);
    rst_n = 1;
    while (!(rdy_n && rdy_h)) @(negedge clk);
    repeat (150_000) @(negedge clk);   // L-RPT load and core warm-up

    // ---- loose deadline
    cn0 = chl_n; ch0 = chl_h; an0 = cal_n; ah0 = cal_h;
    run_set(600_000, tn, th);
    hr_n = real'(chl_n - cn0) / real'(cal_n - an0 + 1);
    hr_h = real'(chl_h - ch0) / real'(cal_h - ah0 + 1);
    $display("loose: M=%0d  no-bypass %0d cycles, HyDRA %0d cycles", m_n, tn, th);
    $display("  core hit rate after epoch 1: no-bypass %.3f (%0d acc)  HyDRA %.3f (%0d acc)",
             hr_n, cal_n - an0, hr_h, cal_h - ah0);
    $display("  HyDRA accelerator bypass: writes %0d reads %0d of %0d; core SHIP bypass %0d",
             st_h.acc_wr_bypass, st_h.acc_rd_bypass, m_h, st_h.core_rd_bypass);
    check(met_n == 1 && met_h == 1, "loose deadline met by both");
    check(int'(st_h.acc_wr_bypass + st_h.acc_rd_bypass) > m_h / 4,
          "HyDRA bypasses a large share of accelerator accesses when far ahead");
    check(st_n.acc_wr_bypass + st_n.acc_rd_bypass + st_n.core_rd_bypass == 0,
          "no bypass with both policies off");
    check(hr_h > hr_n, "cores hit more often with HyDRA");

    // ---- tight deadline: 1.2x to 1.4x what the no-bypass system needed
    bw0 = int'(st_h.acc_wr_bypass); br0 = int'(st_h.acc_rd_bypass);
    run_set(tn * int'($urandom_range(120, 140)) / 100, tn, th);
    $display("tight (D=%0d): no-bypass %0d cycles, HyDRA %0d cycles, HyDRA bypassed %0d",
             deadline, tn, th, int'(st_h.acc_wr_bypass + st_h.acc_rd_bypass) - bw0 - br0);
    check(met_h == 2 && miss_h == 0, "HyDRA meets the tight deadline");
    check(int'(st_h.acc_wr_bypass + st_h.acc_rd_bypass) - bw0 - br0 < bw0 + br0,
          "HyDRA bypasses less under the tight deadline");
    check(iss_n == 2 * m_n && iss_h == 2 * m_h, "every access issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
