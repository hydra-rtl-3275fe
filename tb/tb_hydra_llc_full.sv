// tb_hydra_llc_full: the controller at its full default size (8 MB 16-way
// LLC, 512K-entry L-RPT, 4K-entry SHIP table, 200,000-cycle epochs), taken
// through one complete input set.
//
// After reset it checks that `ready` rises only once the longest reset
// sweep (the 2^19-entry L-RPT) is over. It then loads L-RPT entries for the
// accelerator's lines and runs one input set of 300 accesses under a loose
// deadline, spread over more than two epochs, with light core traffic
// beside it. Before the first epoch ends the thresholds are "no bypass", so
// the accelerator's lines are cached; the first epoch's progress estimate
// then lets the APM raise them, after which accelerator accesses to lines
// without predicted reuse bypass the LLC. Every read is compared with a
// golden copy of memory; the set must finish before its deadline.
module tb_hydra_llc_full;
  import hydra_pkg::*;
  localparam int unsigned IDX_W = 19, ACC_LINES = 256, M = 300;
  localparam addr_t ACC_BASE  = 40'h01_0000_0000;
  localparam addr_t CORE_BASE = 40'h02_0000_0000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        ready, lrpt_busy;
  logic [31:0] cfg_m_total = 0, cfg_deadline = 0;
  logic        cfg_acc_bypass_en = 1, cfg_core_bypass_en = 1, cfg_cold_once = 0;
  logic        set_start = 0, lrpt_clr = 0, lrpt_wr_en = 0;
  logic [IDX_W-1:0] lrpt_wr_idx = '0;
  lrpt_entry_t lrpt_wr_entry = '0;
  logic        acc_req_valid = 0, acc_req_ready, core_req_valid = 0, core_req_ready;
  llc_req_t    acc_req = '0, core_req = '0;
  logic        resp_valid, resp_ready = 1, wack_valid, wack_ready = 1;
  llc_resp_t   resp, wack;
  logic        mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t    mem_req;
  mem_resp_t   mem_resp;
  reuse_th_t   th;
  logic        set_active;
  logic [31:0] sets_met, sets_missed, epochs;
  hydra_stats_t stats;
  logic [31:0] apm_ma_i, apm_ma_g, apm_ma_hat, apm_ra;
  logic [2:0]  apm_case;
  logic [15:0] apm_ta [4];
  logic [15:0] apm_tb;
  int n_reads, n_writes, n_byp;

  hydra_llc dut (.*);

  mem_model #(.LAT(40)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp(mem_resp),
    .n_reads, .n_writes, .n_byp_writes(n_byp)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  line_t golden [addr_t];
  function automatic line_t gold(input addr_t a);
    return golden.exists(a) ? golden[a] : mem.init_line(a);
  endfunction
  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_W/32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  // one request at a time on a port; waits for its response or ack
  task automatic access(input bit accel, input bit w, input addr_t a, input logic [31:0] pc);
    line_t d, exp;
    llc_req_t r;
    bit got;
    d = rnd_line();
    exp = w ? d : gold(a);
    r = '0;
    r.write = w; r.src = accel ? SRC_W'(SRC_ACCEL) : SRC_W'($urandom_range(0, 7));
    r.id = 8'($urandom); r.pc = pc; r.addr = a; r.data = d;
    if (w) golden[a] = d;
    @(negedge clk);
    if (accel) begin acc_req = r; acc_req_valid = 1; end
    else       begin core_req = r; core_req_valid = 1; end
    @(posedge clk);
    while (!(accel ? acc_req_ready : core_req_ready)) @(posedge clk);
    @(negedge clk);
    acc_req_valid = 0; core_req_valid = 0;
    got = 0;
    while (!got) begin
      @(posedge clk);
      if (resp_valid && resp.src == r.src && resp.id == r.id) begin
        got = 1;
        check(resp.addr == a, "response address");
        if (!w) check(resp.data == exp, $sformatf("read data %h", a));
      end else if (wack_valid && accel && w && wack.id == r.id) begin
        got = 1;
        check(mem.peek(a) == d, "bypassed write reached memory");
      end
    end
  endtask

  int t_ready, t0, acc_before;
  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1;
    t0 = $time / 10;
    while (!ready) @(negedge clk);
    t_ready = $time / 10 - t0;
    $display("ready after %0d cycles", t_ready);
    check(t_ready >= (1 << IDX_W), "ready only after the full L-RPT sweep");
    // L-RPT: lines 0..127 have no predicted reuse (invalid entries), the
    // rest are in the hottest cluster with the shortest reuse interval
    for (int i = ACC_LINES / 2; i < ACC_LINES; i++) begin
      lrpt_wr_en = 1;
      lrpt_wr_idx = IDX_W'((ACC_BASE >> BLK_OFF) + addr_t'(i));
      lrpt_wr_entry = '{valid: 1'b1, rc: 2'd3, ri: 2'd0};
      @(negedge clk);
    end
    lrpt_wr_en = 0;

    cfg_m_total = M; cfg_deadline = 1_000_000;
    set_start = 1; @(negedge clk); set_start = 0;
    check(set_active, "input set started");
    check(th == TH_NO_BYPASS, "no bypass before the first epoch");
    for (int k = 0; k < M; k++) begin
      addr_t a;
      a = ACC_BASE + addr_t'($urandom_range(0, ACC_LINES - 1)) * 64;
      if (k == M / 2) begin
        acc_before = int'(stats.acc_wr_bypass + stats.acc_rd_bypass);
        check(epochs >= 1, "first epoch over by the middle of the set");
        check(th.rc_th > 0, "thresholds raised after the first epoch");
      end
      access(1'b1, $urandom_range(0, 3) == 0, a, 32'h8000);
      if ($urandom_range(0, 1) == 0)
        access(1'b0, $urandom_range(0, 7) == 0,
               CORE_BASE + addr_t'($urandom_range(0, 4095)) * 64, 32'h1000);
      repeat ($urandom_range(1300, 1700)) @(negedge clk);
    end
    repeat (100) @(negedge clk);
    $display("set: met=%0d missed=%0d epochs=%0d th=(%0d,%0d) ma_hat=%0d ma_i=%0d case=%0d",
             sets_met, sets_missed, epochs, int'(th.ri_th), int'(th.rc_th),
             apm_ma_hat, apm_ma_i, apm_case);
    $display("wr_bypass=%0d wr_cached=%0d rd_bypass=%0d acc_hit=%0d core=%0d",
             stats.acc_wr_bypass, stats.acc_wr_cached, stats.acc_rd_bypass,
             stats.acc_llc_hit, stats.core_access);
    check(!set_active && sets_met == 1 && sets_missed == 0, "set finished within its deadline");
    check(stats.acc_wr_cached + stats.acc_llc_hit > 0, "accelerator data cached early in the set");
    check(int'(stats.acc_wr_bypass + stats.acc_rd_bypass) > acc_before,
          "accelerator accesses bypassed late in the set");
    check(apm_ra == 0, "no accesses remaining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
