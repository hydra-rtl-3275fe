// tb_margin_est: random epochs through the margin flow chart. The expected
// MA(i), MA_global, MA_past and branch number are worked out here with
// 64-bit integer arithmetic straight from the flow-chart formulas; the
// latency from start to done is also bounded.
module tb_margin_est;
  localparam int unsigned ET = 1000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [31:0] m_total, deadline, ra, rt, elapsed, core_acc, core_miss;
  logic [31:0] ma_i, ma_global, ma_past;
  logic [2:0]  margin_case;
  int cases_seen [5];

  margin_est #(.ET(ET)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned mx1(longint unsigned v);
    return v == 0 ? 1 : v;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      longint unsigned g, mh, ml, past, exp_ma;
      int exp_case, n;
      bit cond;
      m_total  = $urandom_range(1000, 100000);
      deadline = $urandom_range(20000, 400000);
      ra       = $urandom_range(0, m_total);
      elapsed  = $urandom_range(0, deadline + deadline/8);
      // force some epochs near the deadline to reach branches 3 and 4
      if (t % 4 == 3) elapsed = deadline - $urandom_range(0, deadline/20);
      rt       = elapsed < deadline ? deadline - elapsed : 0;
      core_acc = $urandom_range(1, 5000);
      core_miss = (t % 2) ? $urandom_range(core_acc/2, core_acc) : $urandom_range(0, core_acc/5);
      // reference
      g    = (longint'(m_total) * ET) / mx1(deadline);
      mh   = (longint'(deadline) * 5) / 100;
      ml   = (longint'(deadline) * 1) / 100;
      past = (longint'(m_total - ra) * ET) / mx1(elapsed);
      cond = (longint'(core_miss) * 100 > longint'(core_acc) * 30) && (past * 100 < g * 110);
      if (!cond)         begin exp_case = 1; exp_ma = (longint'(ra) * ET) / mx1(rt); end
      else if (rt > mh)  begin exp_case = 2; exp_ma = (longint'(ra) * ET) / mx1(rt - mh); end
      else if (rt > ml)  begin exp_case = 3; exp_ma = (longint'(ra) * ET) / mx1(ml); end
      else               begin exp_case = 4; exp_ma = (g * 110) / 100; end
      if (exp_ma > 64'hFFFF_FFFF) exp_ma = 64'hFFFF_FFFF;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      n = 1;
      while (!done) begin @(negedge clk); n++; end
      check(n <= 5*66 + 4, $sformatf("latency %0d", n));
      check(ma_global == 32'(g), $sformatf("MA_global %0d exp %0d", ma_global, g));
      check(ma_past == 32'(past), $sformatf("MA_past %0d exp %0d", ma_past, past));
      check(margin_case == 3'(exp_case), $sformatf("case %0d exp %0d", margin_case, exp_case));
      check(ma_i == 32'(exp_ma), $sformatf("MA(i) %0d exp %0d (case %0d)", ma_i, exp_ma, exp_case));
      cases_seen[exp_case]++;
    end
    for (int c = 1; c <= 4; c++) check(cases_seen[c] > 0, $sformatf("branch %0d never taken", c));
    $display("branches: %0d %0d %0d %0d", cases_seen[1], cases_seen[2], cases_seen[3], cases_seen[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
