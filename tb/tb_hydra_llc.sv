// tb_hydra_llc: end-to-end test of the HyDRA controller at reduced sizes
// (32-set 4-way LLC, 1K-entry L-RPT, 2000-cycle epochs) in front of the
// behavioural memory.
//
// Traffic: the accelerator keeps up to four requests in flight, to distinct
// lines of its own 512-line region, 30 % writes; a line stays in flight
// until its response (reads, cached writes) or acknowledgement (bypassed
// writes) returns, as an accelerator that owns its buffers would. The core
// side streams reads over a region far larger than the LLC under a few PCs
// (lines that are never reused, which SHIP learns to bypass), mixed with a
// small hot region under other PCs, and some write-backs. Every read is
// compared with a golden copy of memory kept in the testbench.
//
// Three input sets are run: one with a loose deadline (it finishes early;
// the APM should raise the thresholds to "bypass all"), one with a deadline
// the accelerator cannot meet (thresholds fall to "no bypass"; the late
// epochs walk through margin cases 2, 3 and 4) and one in between.
// Each mechanism is counted and a failure is counted for any that never
// happened: write bypass (path 1), cached write (path 2), read-response
// bypass (path 3), fill (path 4), accelerator hit, invalidation of a cached
// copy, SHIP core bypass, ARP core wait, each margin case, the bypass-all
// and no-bypass threshold rows, a T_A/T_B update, a met and a missed set.
module tb_hydra_llc;
  import hydra_pkg::*;
  localparam int unsigned SETS = 32, WAYS = 4, IDX_W = 10, ET = 2000;
  localparam int unsigned ACC_LINES = 512, MAXOUT = 4;
  localparam addr_t ACC_BASE  = 40'h10_0000_0000 >> 4;
  localparam addr_t CORE_BASE = 40'h20_0000_0000 >> 4;

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

  hydra_llc #(
    .LLC_SETS(SETS), .LLC_WAYS(WAYS), .LRPT_IDX_W(IDX_W), .ET(ET)
  ) dut (.*);

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
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ golden
  line_t golden [addr_t];
  function automatic line_t gold(input addr_t a);
    return golden.exists(a) ? golden[a] : mem.init_line(a);
  endfunction
  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_W/32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  // ------------------------------------------------------- accelerator
  typedef struct { bit busy; bit write; addr_t addr; line_t exp; } acc_slot_t;
  acc_slot_t slot [256];
  bit        line_busy [ACC_LINES];
  int        acc_to_issue = 0, acc_issued = 0, acc_completed = 0;
  int        acc_gap = 0;
  logic [7:0] next_id = 0;

  task automatic acc_driver();
    forever begin
      @(negedge clk);
      if (acc_to_issue > 0 && acc_issued - acc_completed < MAXOUT && !slot[next_id].busy) begin
        int l;
        l = $urandom_range(0, ACC_LINES - 1);
        if (!line_busy[l]) begin
          addr_t a;
          bit    w;
          line_t d;
          a = ACC_BASE + addr_t'(l) * 64;
          w = $urandom_range(0, 99) < 30;
          d = rnd_line();
          acc_req = '0;
          acc_req.write = w; acc_req.src = SRC_W'(SRC_ACCEL); acc_req.id = next_id;
          acc_req.pc = 32'h8000; acc_req.addr = a; acc_req.data = d;
          slot[next_id] = '{busy: 1, write: w, addr: a, exp: w ? '0 : gold(a)};
          if (w) golden[a] = d;
          line_busy[l] = 1;
          acc_to_issue--;
          acc_issued++;
          next_id++;
          acc_req_valid = 1;
          @(posedge clk);
          while (!acc_req_ready) @(posedge clk);
          @(negedge clk);
          acc_req_valid = 0;
          // compute time between accesses
          repeat ($urandom_range(0, acc_gap)) @(negedge clk);
        end
      end
    end
  endtask

  // ---------------------------------------------------------------- core
  int core_run = 0, core_line = 0;
  bit core_wait = 0;
  addr_t core_addr;
  bit core_write;
  line_t core_exp;

  task automatic core_driver();
    forever begin
      @(negedge clk);
      if (core_run && !core_wait && $urandom_range(0, 1) == 0) begin
        addr_t a;
        bit    w;
        logic [31:0] pc;
        line_t d;
        if ($urandom_range(0, 3) == 0) begin
          a  = CORE_BASE + 40'h10_0000 + addr_t'($urandom_range(0, 23)) * 64;
          pc = 32'h2000 + 32'($urandom_range(0, 3)) * 4;
        end else begin
          a  = CORE_BASE + addr_t'(core_line) * 64;
          core_line = (core_line + 1) % 8192;
          pc = 32'h1000 + 32'($urandom_range(0, 3)) * 4;
        end
        w = $urandom_range(0, 9) == 0;
        d = rnd_line();
        core_req = '0;
        core_req.write = w; core_req.src = SRC_W'($urandom_range(0, NUM_CORES - 1));
        core_req.id = 8'($urandom); core_req.pc = pc; core_req.addr = a; core_req.data = d;
        core_addr = a; core_write = w; core_exp = w ? '0 : gold(a);
        if (w) golden[a] = d;
        core_wait = 1;
        core_req_valid = 1;
        @(posedge clk);
        while (!core_req_ready) @(posedge clk);
        @(negedge clk);
        core_req_valid = 0;
      end
    end
  endtask

  // ----------------------------------------------------------- responses
  int n_resp_acc = 0, n_resp_core = 0, n_wack = 0;
  always @(negedge clk) if (rst_n) begin
    resp_ready = $urandom_range(0, 9) != 0;
    wack_ready = $urandom_range(0, 9) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (resp_valid && resp_ready) begin
      if (is_accel(resp.src)) begin
        n_resp_acc++;
        check(slot[resp.id].busy, "accelerator response has a request");
        check(!resp.write == !slot[resp.id].write, "accelerator response kind");
        check(resp.addr == slot[resp.id].addr, "accelerator response address");
        if (!slot[resp.id].write) check(resp.data == slot[resp.id].exp, $sformatf(
          "accelerator read data %h", resp.addr));
        slot[resp.id].busy <= 0;
        line_busy[(resp.addr - ACC_BASE) >> 6] <= 0;
        acc_completed++;
      end else begin
        n_resp_core++;
        check(core_wait, "core response has a request");
        check(resp.addr == core_addr, "core response address");
        if (!core_write) check(resp.data == core_exp, $sformatf("core read data %h", resp.addr));
        core_wait <= 0;
      end
    end
    if (wack_valid && wack_ready) begin
      n_wack++;
      check(is_accel(wack.src), "write acknowledgement belongs to the accelerator");
      check(slot[wack.id].busy && slot[wack.id].write, "acknowledged write was issued");
      check(mem.peek(wack.addr) == golden[wack.addr], "bypassed write reached memory");
      slot[wack.id].busy <= 0;
      line_busy[(wack.addr - ACC_BASE) >> 6] <= 0;
      acc_completed++;
    end
  end

  // ------------------------------------------------- mechanism counters
  int case_seen [5];
  int row_seen [6];
  int ta_changed = 0, cold_th = 0;
  logic [31:0] last_epochs = 0;
  // sample the APM outputs at every epoch boundary: they then hold what
  // was worked out for the epoch that just ended
  always @(posedge clk) if (rst_n) begin
    last_epochs <= epochs;
    if (epochs != last_epochs) begin
      case (th.rc_th)
        4'sd4:  row_seen[0]++;
        4'sd3:  row_seen[1]++;
        4'sd2:  row_seen[2]++;
        4'sd1:  row_seen[3]++;
        4'sd0:  row_seen[4]++;
        default: row_seen[5]++;
      endcase
      if (apm_case >= 1 && apm_case <= 4) case_seen[apm_case]++;
      if (apm_ta[0] != 16'd120 || apm_tb != 16'd100) ta_changed++;
      if (th.rc_th == 0) cold_th++;
    end
  end

  // --------------------------------------------------------- input sets
  task automatic run_set(input int m, input int d, input int gap, input string name);
    int t0;
    @(negedge clk);
    cfg_m_total = 32'(m); cfg_deadline = 32'(d);
    set_start = 1;
    @(negedge clk);
    set_start = 0;
    t0 = $time / 10;
    acc_gap = gap;
    acc_to_issue = m;
    while (set_active) @(negedge clk);
    check(acc_to_issue == 0 && acc_issued == acc_completed, {name, ": all accesses completed"});
    $display("%s: M=%0d D=%0d took %0d cycles, met=%0d missed=%0d epochs=%0d th=(%0d,%0d)",
             name, m, d, $time / 10 - t0, sets_met, sets_missed, epochs, int'(th.ri_th), int'(th.rc_th));
  endtask

  initial begin
    int m0, mm0, e0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    while (!ready) @(negedge clk);
    // load the L-RPT: a third of the accelerator lines have no reuse, the
    // rest get random clusters
    for (int i = 0; i < ACC_LINES; i++) begin
      lrpt_entry_t e;
      e.valid = $urandom_range(0, 2) != 0;
      e.rc = 2'($urandom); e.ri = 2'($urandom);
      lrpt_wr_en = 1;
      lrpt_wr_idx = IDX_W'(((ACC_BASE >> 6) + addr_t'(i)));
      lrpt_wr_entry = e;
      @(negedge clk);
    end
    lrpt_wr_en = 0;
    check(!lrpt_busy, "L-RPT idle after loading");
    core_run = 1;
    fork acc_driver(); core_driver(); join_none

    m0 = sets_met; mm0 = sets_missed;
    run_set(400, 200_000, 70, "loose");
    check(sets_met == m0 + 1, "loose set met its deadline");
    run_set(1500, 39_000, 60, "tight");
    check(sets_missed == mm0 + 1, "tight set missed its deadline");
    cfg_cold_once = 1;
    run_set(1500, 60_000, 30, "middle");

    core_run = 0;
    while (core_wait) @(negedge clk);
    repeat (200) @(negedge clk);

    $display("paths: wr_bypass=%0d wr_cached=%0d rd_bypass=%0d acc_rd_miss=%0d acc_hit=%0d",
             stats.acc_wr_bypass, stats.acc_wr_cached, stats.acc_rd_bypass,
             stats.acc_rd_miss, stats.acc_llc_hit);
    $display("core: access=%0d miss=%0d ship_bypass=%0d  inv_hits=%0d arp_waits=%0d",
             stats.core_access, stats.core_miss, stats.core_rd_bypass, stats.inv_hits,
             stats.arp_core_waits);
    $display("margin cases 1..4: %0d %0d %0d %0d  rows: %p  T changed=%0d cold-row=%0d",
             case_seen[1], case_seen[2], case_seen[3], case_seen[4], row_seen, ta_changed, cold_th);
    $display("responses acc=%0d core=%0d wack=%0d  mem reads=%0d writes=%0d byp=%0d",
             n_resp_acc, n_resp_core, n_wack, n_reads, n_writes, n_byp);

    check(stats.acc_wr_bypass > 0, "path 1: accelerator write bypassed to memory");
    check(stats.acc_wr_cached > 0, "path 2: accelerator write cached");
    check(stats.acc_rd_bypass > 0, "path 3: read response bypassed");
    check(stats.acc_rd_miss > stats.acc_rd_bypass, "path 4: read response filled");
    check(stats.acc_llc_hit > 0, "accelerator LLC hit");
    check(stats.inv_hits > 0, "bypassed write invalidated a cached copy");
    check(stats.core_rd_bypass > 0, "SHIP bypassed a core read miss");
    check(stats.arp_core_waits > 0, "core request waited behind accelerator (ARP)");
    for (int c = 1; c <= 4; c++) check(case_seen[c] > 0, $sformatf("margin case %0d", c));
    check(row_seen[0] > 0, "threshold row: bypass all");
    check(row_seen[5] > 0, "threshold row: no bypass");
    check(row_seen[1] + row_seen[2] + row_seen[3] + row_seen[4] > 0, "an intermediate row");
    check(ta_changed > 0, "dynamic thresholds moved");
    check(n_byp == n_wack, "every bypassed write acknowledged");
    check(n_wack == int'(stats.acc_wr_bypass), "acknowledgements match path-1 count");
    check(n_resp_acc + n_wack == 400 + 1500 + 1500, "one completion per accelerator access");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
