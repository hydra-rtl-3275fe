// tb_apm: runs the progress monitor through input sets with a small epoch
// (ET = 500 cycles). The accelerator's completions and outstanding count
// are driven here. Checks: epoch counting, the threshold update after each
// epoch boundary and its latency, MA_global = M*ET/D, RA bookkeeping,
// "bypass all" thresholds when the accelerator runs far ahead, "no bypass"
// when it falls behind, the reset to "no bypass" at a new set, and the
// met / missed deadline counters.
module tb_apm;
  import hydra_pkg::*;
  localparam int ET = 500;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] cfg_m_total = 2000, cfg_deadline = 20000;
  logic set_start = 0, core_access = 0, core_miss = 0, active, th_update;
  logic [1:0] acc_done = 0;
  logic [7:0] acc_outstanding = 0;
  reuse_th_t th;
  logic [31:0] ra, elapsed, sets_met, sets_missed, epochs, ma_i, ma_global, ma_hat;
  logic [2:0] margin_case;
  logic [15:0] ta [4];
  logic [15:0] tb;
  int cyc = 0, last_epoch_cyc = 0, n_updates = 0, n_all = 0, n_none = 0, completed = 0;

  apm #(.ET(ET)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] epochs_q = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    epochs_q <= epochs;
    if (rst_n && epochs != epochs_q) last_epoch_cyc <= cyc;
    if (rst_n && th_update) begin
      n_updates++;
      check(cyc - last_epoch_cyc <= 450, $sformatf("threshold update %0d cycles after the epoch", cyc - last_epoch_cyc));
      if (th.ri_th == -4'sd1 && th.rc_th == 4'sd4) n_all++;
      if (th == TH_NO_BYPASS) n_none++;
    end
  end

  // drive `n` cycles with one or two completions every `period` cycles
  task automatic run(int n, int period, int outst);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      acc_outstanding = 8'(outst);
      acc_done = (i % period == 0 && active) ? 2'($urandom_range(1, 2)) : 2'd0;
      core_access = ($urandom_range(0, 3) == 0);
      core_miss = core_access && ($urandom_range(0, 9) == 0);
      completed += int'(acc_done);
    end
    @(negedge clk); acc_done = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- set 1: far ahead of the deadline
    @(negedge clk); set_start = 1; @(negedge clk); set_start = 0;
    check(active && ra == 2000, "set start loads RA = M");
    check(th == TH_NO_BYPASS, "no bypass before the first evaluation");
    run(ET + 460, 2, 2);
    check(epochs == 1, $sformatf("epochs %0d", epochs));
    check(ma_global == 32'(2000 * ET / 20000), $sformatf("MA_global %0d", ma_global));
    check(th.ri_th == -4'sd1 && th.rc_th == 4'sd4, $sformatf("fast progress gives bypass all, got %0d/%0d", th.ri_th, th.rc_th));
    check(ra == 32'(2000 - completed), $sformatf("RA %0d exp %0d", ra, 2000 - completed));
    // finish the set well within the deadline
    while (active) run(10, 1, 1);
    check(sets_met == 1 && sets_missed == 0, "set 1 met its deadline");
    // ---- set 2: far behind (few completions, long latency)
    completed = 0;
    @(negedge clk); set_start = 1; @(negedge clk); set_start = 0;
    run(3 * ET, 25, 40);
    check(th == TH_NO_BYPASS, $sformatf("slow progress gives no bypass, got %0d/%0d", th.ri_th, th.rc_th));
    check(margin_case != 0, "margin estimation ran");
    // let the deadline pass, then finish
    run(20000, 50, 40);
    while (active) run(10, 1, 1);
    check(sets_missed == 1, $sformatf("set 2 missed its deadline (missed %0d)", sets_missed));
    // ---- set 3 resets thresholds
    @(negedge clk); set_start = 1; @(negedge clk); set_start = 0;
    check(th == TH_NO_BYPASS && ta[0] == 120 && tb == 100, "new set re-initialises the thresholds");
    check(n_updates >= 4 && n_all >= 1 && n_none >= 1, $sformatf("updates %0d all %0d none %0d", n_updates, n_all, n_none));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
