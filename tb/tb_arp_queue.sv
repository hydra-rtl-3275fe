// tb_arp_queue: random traffic into the accelerator and core queues with a
// randomly stalling consumer. Checks per-class FIFO order, that a core
// request never leaves while an accelerator request is queued, and that
// nothing is lost.
module tb_arp_queue;
  import hydra_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic acc_valid = 0, acc_ready, core_valid = 0, core_ready, out_valid, out_ready = 0;
  llc_req_t acc_req = '0, core_req = '0, out_req;
  logic [4:0] acc_count, core_count;
  llc_req_t acc_q [$], core_q [$];
  int n_acc = 0, n_core = 0, n_pri = 0;
  logic acc_ready_q = 0, core_ready_q = 0;

  arp_queue #(.DEPTH(16)) dut (.*);
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

  // driver (values change after the edge)
  always @(negedge clk) if (rst_n) begin
    if (!acc_valid || acc_ready_q) begin
      acc_valid = ($urandom_range(0, 3) == 0);
      acc_req = '0; acc_req.src = SRC_ACCEL; acc_req.id = 8'($urandom); acc_req.addr = addr_t'($urandom);
    end
    if (!core_valid || core_ready_q) begin
      core_valid = ($urandom_range(0, 1) == 0);
      core_req = '0; core_req.src = 4'($urandom_range(0, 7)); core_req.id = 8'($urandom);
      core_req.addr = addr_t'($urandom);
    end
    out_ready = ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) begin
    acc_ready_q  <= acc_valid && acc_ready;
    core_ready_q <= core_valid && core_ready;
    if (rst_n) begin
      if (acc_valid && acc_ready) acc_q.push_back(acc_req);
      if (core_valid && core_ready) core_q.push_back(core_req);
      if (out_valid && out_ready) begin
        if (is_accel(out_req.src)) begin
          check(acc_q.size() > 0 && out_req == acc_q[0], "accelerator order");
          if (acc_q.size() > 0) void'(acc_q.pop_front());
          n_acc++;
          if (core_count != 0) n_pri++;
        end else begin
          check(acc_count == 0, "core served while accelerator waits");
          check(core_q.size() > 0 && out_req == core_q[0], "core order");
          if (core_q.size() > 0) void'(core_q.pop_front());
          n_core++;
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (20000) @(posedge clk);
    check(n_acc > 1000 && n_core > 1000, $sformatf("throughput acc %0d core %0d", n_acc, n_core));
    check(n_pri > 100, $sformatf("priority case seen %0d times", n_pri));
    $display("acc %0d core %0d acc-over-core %0d", n_acc, n_core, n_pri);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
