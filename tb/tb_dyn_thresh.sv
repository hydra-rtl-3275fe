// tb_dyn_thresh: drives MA(i)/MA_global ratios across every band of the
// dynamic bypass threshold algorithm and compares T_A1..T_A4 and T_B with
// a reference that walks the algorithm's if-chain as written (k from 5
// down to 1), in integer percent.
module tb_dyn_thresh;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, reinit = 0, update = 0;
  logic [31:0] ma_i, ma_global;
  logic [15:0] ta [4];
  logic [15:0] tb;
  int rta [4], rtb;
  int band_seen [8];

  dyn_thresh dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ref_reset();
    rta = '{120, 140, 160, 180}; rtb = 100;
  endtask

  // returns band: 1..6 = decrease by k, 0 = hold, 7 = increase
  function automatic int ref_band(longint r, longint g);
    int b;
    b = 0;
    if (r * 100 <= (100 - 6*5) * g) b = 6;
    else begin
      for (int k = 5; k >= 1; k--)
        if ((100 - (k+1)*5) * g < r * 100 && r * 100 <= (100 - k*5) * g) b = k;
      if ((100 - 5) * g < r * 100 && r * 100 <= (100 + 5) * g) b = 0;
      if (r * 100 > (100 + 5) * g) b = 7;
    end
    return b;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_reset();
    @(negedge clk);
    for (int j = 0; j < 4; j++) check(ta[j] == 16'(rta[j]), "reset value");
    for (int t = 0; t < 3000; t++) begin
      int b;
      if (t % 50 == 0) begin
        reinit = 1; @(negedge clk); reinit = 0; ref_reset();
      end
      ma_global = $urandom_range(100, 100000);
      ma_i      = 32'((longint'(ma_global) * $urandom_range(50, 130)) / 100 + $urandom_range(0, 2));
      b = ref_band(ma_i, ma_global);
      band_seen[b]++;
      update = 1; @(negedge clk); update = 0;
      for (int j = 0; j < 4; j++) begin
        if (b >= 1 && b <= 6) rta[j] = (rta[j] - b*20 > 100) ? rta[j] - b*20 : 100;
        else if (b == 7)      rta[j] = rta[j] + 20;
      end
      if (b >= 1 && b <= 6) rtb = (rtb - b*10 > 0) ? rtb - b*10 : 0;
      for (int j = 0; j < 4; j++)
        check(ta[j] == 16'(rta[j]), $sformatf("T_A%0d %0d exp %0d (band %0d)", j+1, ta[j], rta[j], b));
      check(tb == 16'(rtb), $sformatf("T_B %0d exp %0d (band %0d)", tb, rtb, b));
    end
    for (int b = 0; b < 8; b++) check(band_seen[b] > 0, $sformatf("band %0d never driven", b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
