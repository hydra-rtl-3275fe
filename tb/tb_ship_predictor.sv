// tb_ship_predictor: random training (hits and dead evictions) and
// predictions against a reference table of saturating counters, plus the
// initial sweep length and the counter limits.
module tb_ship_predictor;
  localparam int SIG_W = 12, CTR_W = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, busy;
  logic [31:0] pred_pc = '0;
  logic [SIG_W-1:0] pred_sig, hit_sig = '0, evict_sig = '0;
  logic pred_bypass, hit_en = 0, evict_en = 0;
  int ref_ctr [2**SIG_W];
  int n_byp = 0;

  ship_predictor dut (.*);
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

  function automatic logic [SIG_W-1:0] ref_sig(logic [31:0] pc);
    return pc[13:2] ^ pc[25:14];
  endfunction

  initial begin
    int n;
    repeat (2) @(posedge clk);
    rst_n = 1;
    n = 0;
    while (busy) begin @(posedge clk); n++; end
    check(n >= 4094 && n <= 4098, $sformatf("init sweep %0d cycles", n));
    foreach (ref_ctr[i]) ref_ctr[i] = 4;
    @(negedge clk);
    for (int t = 0; t < 20000; t++) begin
      int s;
      // concentrate on a few signatures so counters reach both limits
      s = $urandom_range(0, 15);
      pred_pc = {$urandom} ;
      pred_pc[13:2] = pred_pc[25:14] ^ 12'(s * 7);
      hit_en = ($urandom_range(0, 2) == 0);
      evict_en = ($urandom_range(0, 1) == 0);
      hit_sig = 12'($urandom_range(0, 15) * 7);
      evict_sig = 12'($urandom_range(0, 15) * 7);
      #1;
      check(pred_sig == ref_sig(pred_pc), "signature hash");
      @(negedge clk);
      check(pred_bypass == (ref_ctr[ref_sig(pred_pc)] == 0),
            $sformatf("prediction for sig %0d ctr %0d", ref_sig(pred_pc), ref_ctr[ref_sig(pred_pc)]));
      if (pred_bypass) n_byp++;
      if (!(hit_en && evict_en && hit_sig == evict_sig)) begin
        if (hit_en && ref_ctr[hit_sig] < 7) ref_ctr[hit_sig]++;
        if (evict_en && ref_ctr[evict_sig] > 0) ref_ctr[evict_sig]--;
      end
    end
    check(n_byp > 0, "no bypass prediction ever made");
    $display("bypass predictions: %0d", n_byp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
