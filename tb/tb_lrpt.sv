// tb_lrpt: checks the L-RPT clear sweep, loading, the one-cycle lookup on
// both ports and the indexing by address bits above the 64 B offset,
// against a reference array. Uses a 1K-entry table.
module tb_lrpt;
  import hydra_pkg::*;
  localparam int IDX_W = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clr_start = 0, busy, wr_en = 0;
  logic [IDX_W-1:0] wr_idx = '0;
  lrpt_entry_t wr_entry = '0, a_entry, b_entry;
  addr_t a_addr = '0, b_addr = '0;
  lrpt_entry_t ref_tbl [2**IDX_W];

  lrpt #(.IDX_W(IDX_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (2) @(posedge clk);
    rst_n = 1;
    n = 0;
    while (busy) begin @(posedge clk); n++; end
    check(n >= 2**IDX_W - 2 && n <= 2**IDX_W + 2, $sformatf("clear took %0d cycles", n));
    // all invalid after the sweep
    for (int i = 0; i < 2**IDX_W; i += 37) begin
      a_addr = addr_t'(i) << BLK_OFF;
      @(posedge clk); #1;
      check(!a_entry.valid, "entry valid after clear");
    end
    // load random entries
    for (int i = 0; i < 2**IDX_W; i++) begin
      ref_tbl[i] = lrpt_entry_t'($urandom);
      @(negedge clk);
      wr_en = 1; wr_idx = IDX_W'(i); wr_entry = ref_tbl[i];
    end
    @(negedge clk);
    wr_en = 0;
    // random lookups; high address bits and the offset must not matter
    for (int k = 0; k < 500; k++) begin
      int ia, ib;
      ia = $urandom_range(0, 2**IDX_W-1); ib = $urandom_range(0, 2**IDX_W-1);
      a_addr = {$urandom, $urandom} & {ADDR_W{1'b1}};
      a_addr[BLK_OFF +: IDX_W] = IDX_W'(ia);
      b_addr = {$urandom, $urandom} & {ADDR_W{1'b1}};
      b_addr[BLK_OFF +: IDX_W] = IDX_W'(ib);
      @(posedge clk); #1;
      check(a_entry == ref_tbl[ia], $sformatf("port A idx %0d got %b exp %b", ia, a_entry, ref_tbl[ia]));
      check(b_entry == ref_tbl[ib], $sformatf("port B idx %0d got %b exp %b", ib, b_entry, ref_tbl[ib]));
    end
    // one-cycle latency: the entry changes exactly one edge after the address
    a_addr = addr_t'(5) << BLK_OFF; @(posedge clk); #1;
    a_addr = addr_t'(6) << BLK_OFF; #1;
    check(a_entry == ref_tbl[5], "output changed before the clock edge");
    @(posedge clk); #1;
    check(a_entry == ref_tbl[6], "lookup not ready after one cycle");
    // clear again
    @(negedge clk); clr_start = 1; @(negedge clk); clr_start = 0;
    check(busy, "busy after clr_start");
    while (busy) @(posedge clk);
    for (int i = 0; i < 2**IDX_W; i += 13) begin
      a_addr = addr_t'(i) << BLK_OFF;
      @(posedge clk); #1;
      check(!a_entry.valid, "entry valid after second clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
