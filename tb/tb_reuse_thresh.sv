// tb_reuse_thresh: random epoch statistics and dynamic thresholds; the
// expected MA_hat = ET * completed / latency and the row of the
// reuse-threshold table are computed here. Every row must be reached.
module tb_reuse_thresh;
  import hydra_pkg::*;
  localparam int unsigned ET = 2000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [31:0] acc_cnt, ma_i, ma_hat;
  logic [47:0] lat_sum;
  logic [15:0] ta [4];
  logic [15:0] tb;
  reuse_th_t th;
  int rows [6];

  reuse_thresh #(.ET(ET)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ri_tab [6] = '{-1, 0, 1, 2, 3, 3};
    int rc_tab [6] = '{ 4, 3, 2, 1, 0, -1};
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(th == TH_NO_BYPASS, "reset thresholds");
    for (int t = 0; t < 1500; t++) begin
      longint hat;
      real    ratio;
      int     row, n, base;
      base  = $urandom_range(100, 200);
      ta[0] = 16'(base); ta[1] = ta[0] + 16'($urandom_range(1, 40));
      ta[2] = ta[1] + 16'($urandom_range(1, 40)); ta[3] = ta[2] + 16'($urandom_range(1, 40));
      tb    = 16'($urandom_range(0, base - 1));
      acc_cnt = $urandom_range(0, 3000);
      lat_sum = 48'($urandom_range(0, 7) == 0 ? 0 : $urandom_range(1000, 40000));
      hat = (lat_sum == 0) ? 0 : (longint'(acc_cnt) * ET) / longint'(lat_sum);
      // aim MA(i) at a random row: MA(i) ~ 100 * MA_hat / p
      begin
        int p, tgt;
        tgt = $urandom_range(0, 5);
        case (tgt)
          0: p = ta[3] + $urandom_range(1, 50);
          1: p = $urandom_range(ta[2] + 1, ta[3]);
          2: p = $urandom_range(ta[1] + 1, ta[2]);
          3: p = $urandom_range(ta[0] + 1, ta[1]);
          4: p = $urandom_range(tb + 1, ta[0]);
          default: p = $urandom_range(1, tb + 1);
        endcase
        ma_i = (hat == 0) ? $urandom_range(1, 4000) : 32'((hat * 100) / p + 1);
      end
      if      (hat * 100 > longint'(ta[3]) * ma_i) row = 0;
      else if (hat * 100 > longint'(ta[2]) * ma_i) row = 1;
      else if (hat * 100 > longint'(ta[1]) * ma_i) row = 2;
      else if (hat * 100 > longint'(ta[0]) * ma_i) row = 3;
      else if (hat * 100 > longint'(tb)    * ma_i) row = 4;
      else                                         row = 5;
      rows[row]++;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      n = 1;
      while (!done) begin @(negedge clk); n++; end
      check(n <= 70, $sformatf("latency %0d", n));
      check(ma_hat == 32'(hat), $sformatf("MA_hat %0d exp %0d", ma_hat, hat));
      check(th.ri_th == 4'(ri_tab[row]) && th.rc_th == 4'(rc_tab[row]),
            $sformatf("row %0d: got RI_Th %0d RC_Th %0d", row, th.ri_th, th.rc_th));
    end
    for (int r = 0; r < 6; r++) check(rows[r] > 0, $sformatf("row %0d never reached", r));
    $display("rows: %p", rows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
