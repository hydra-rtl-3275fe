// tb_llc_cache: a 16-set, 4-way cache in front of the behavioural memory.
// Directed checks: miss then hit with the 9-cycle hit latency, bypassed
// read responses that leave the line uncached, invalidation, dirty
// write-back on eviction, SHIP training pulses. Then random reads and
// writes with random bypass verdicts, every read compared with a golden
// copy of memory kept here.
module tb_llc_cache;
  import hydra_pkg::*;
  localparam int SETS = 16, WAYS = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, busy;
  logic inv_valid = 0, inv_ready, req_valid = 0, req_ready, resp_valid, resp_ready = 1;
  addr_t inv_addr = '0;
  llc_req_t req = '0;
  llc_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  addr_t rsp_lk_addr;
  logic [31:0] rsp_lk_pc;
  logic acc_rsp_bypass = 0, core_rsp_bypass = 0;
  logic [11:0] core_sig;
  logic ship_hit_en, ship_evict_en;
  logic [11:0] ship_hit_sig, ship_evict_sig;
  logic st_core_access, st_core_miss, st_acc_access, st_acc_miss;
  logic st_rsp_bypass_acc, st_rsp_bypass_core, st_inv_hit;
  int n_reads, n_writes, n_byp;
  int n_hit_pulse = 0, n_evict_pulse = 0, n_wb = 0, n_rb = 0;
  line_t golden [addr_t];

  llc_cache #(.SETS(SETS), .WAYS(WAYS)) dut (.*);
  mem_model #(.LAT(20)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(1'b1), .resp(mem_resp),
    .n_reads, .n_writes, .n_byp_writes(n_byp)
  );
  assign core_sig = rsp_lk_pc[11:0];
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

  always @(posedge clk) begin
    if (ship_hit_en) n_hit_pulse++;
    if (ship_evict_en) n_evict_pulse++;
    if (mem_req_valid && mem_req_ready && mem_req.write) n_wb++;
    if (st_rsp_bypass_acc || st_rsp_bypass_core) n_rb++;
  end

  function automatic addr_t la(int set, int tag);
    return addr_t'((tag * SETS + set) * 64);
  endfunction

  function automatic line_t gold(addr_t a);
    return golden.exists(a) ? golden[a] : mem.init_line(a);
  endfunction

  // one request, wait for its response; returns latency from accept
  task automatic access(input bit wr, input logic [3:0] src, input addr_t a,
                        input bit byp, output int lat);
    line_t d;
    d = {16{$urandom}};
    @(negedge clk);
    req = '0; req.write = wr; req.src = src; req.addr = a; req.data = d;
    req.pc = 32'h400 + 32'(a[15:6]) * 4; req.id = 8'($urandom);
    acc_rsp_bypass = byp; core_rsp_bypass = byp;
    req_valid = 1;
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    check(resp.id == req.id && resp.src == src && resp.write == wr, "response header");
    if (wr) golden[a] = d;
    else check(resp.data == gold(a), $sformatf("read data at %h", a));
  endtask

  task automatic invalidate(input addr_t a);
    @(negedge clk); inv_addr = a; inv_valid = 1;
    @(posedge clk); while (!inv_ready) @(posedge clk);
    @(negedge clk); inv_valid = 0;
  endtask

  initial begin
    int lat, r0, w0, hp, ep;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (busy) @(posedge clk);
    // miss then hit
    r0 = n_reads;
    access(0, 4'd1, la(3, 1), 0, lat);
    check(n_reads == r0 + 1, "read miss goes to memory");
    hp = n_hit_pulse;
    access(0, 4'd1, la(3, 1), 0, lat);
    check(n_reads == r0 + 1, "second read hits");
    check(lat == 9, $sformatf("hit latency %0d, expected 9", lat));
    @(negedge clk);
    check(n_hit_pulse == hp + 1, "first reuse of a core line trains SHIP");
    // bypassed read response: not filled
    r0 = n_reads;
    access(0, SRC_ACCEL, la(5, 2), 1, lat);
    access(0, SRC_ACCEL, la(5, 2), 0, lat);
    check(n_reads == r0 + 2, "bypassed response was not filled");
    access(0, SRC_ACCEL, la(5, 2), 1, lat);
    check(n_reads == r0 + 2, "accelerator read hit ignores the bypass verdict");
    // invalidation
    invalidate(la(5, 2));
    access(0, SRC_ACCEL, la(5, 2), 0, lat);
    check(n_reads == r0 + 3, "invalidated line misses");
    // dirty write-back: write a line, then fill the set with other lines
    access(1, 4'd2, la(7, 1), 0, lat);
    w0 = n_writes; ep = n_evict_pulse;
    for (int t = 2; t < 2 + WAYS; t++) access(0, 4'd2, la(7, t), 0, lat);
    check(n_writes == w0 + 1, "dirty victim written back once");
    check(mem.peek(la(7, 1)) == golden[la(7, 1)], "write-back data");
    for (int t = 6; t < 6 + WAYS; t++) access(0, 4'd2, la(7, t), 0, lat);
    check(n_evict_pulse > ep, "dead core line eviction trains SHIP");
    // random traffic over 3 x SETS x WAYS lines
    for (int k = 0; k < 3000; k++) begin
      addr_t a;
      a = la($urandom_range(0, SETS-1), $urandom_range(0, 3*WAYS));
      access($urandom_range(0, 2) == 0, ($urandom_range(0, 1) ? SRC_ACCEL : 4'($urandom_range(0, 7))),
             a, $urandom_range(0, 3) == 0, lat);
      // an invalidation drops the cached copy (in the controller the
      // bypassed write that caused it carries the new data to memory)
      if ($urandom_range(0, 30) == 0) begin
        invalidate(a);
        golden[a] = mem.peek(a);
      end
    end
    // everything written must be readable
    foreach (golden[a]) begin
      access(0, 4'd0, a, 0, lat);
    end
    check(n_rb > 100 && n_wb > 100, $sformatf("random phase bypasses %0d write-backs %0d", n_rb, n_wb));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
