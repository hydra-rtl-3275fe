// arp_queue: the LLC request queue, served in Accelerator Request Priority
// (ARP) order. Accelerator requests that are not bypassed and core reads
// and writebacks wait in two FIFOs; whenever the LLC can take a request,
// the head of the accelerator FIFO wins over the head of the core FIFO
// (static priority at each LLC access, as in the ARP policy the paper
// adopts). Splitting the queue in two FIFOs and their depth are this
// implementation's choices. Valid/ready on every side; the output is
// combinational from the FIFO heads.
module arp_queue
  import hydra_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     acc_valid,
  output logic     acc_ready,
  input  llc_req_t acc_req,
  input  logic     core_valid,
  output logic     core_ready,
  input  llc_req_t core_req,
  output logic     out_valid,
  input  logic     out_ready,
  output llc_req_t out_req,
  output logic [$clog2(DEPTH):0] acc_count,
  output logic [$clog2(DEPTH):0] core_count
);
  logic     a_v, c_v, a_pop, c_pop;
  llc_req_t a_d, c_d;

  sync_fifo #(.T(llc_req_t), .DEPTH(DEPTH)) u_acc (
    .clk, .rst_n, .wr_valid(acc_valid), .wr_ready(acc_ready), .wr_data(acc_req),
    .rd_valid(a_v), .rd_ready(a_pop), .rd_data(a_d), .count(acc_count)
  );
  sync_fifo #(.T(llc_req_t), .DEPTH(DEPTH)) u_core (
    .clk, .rst_n, .wr_valid(core_valid), .wr_ready(core_ready), .wr_data(core_req),
    .rd_valid(c_v), .rd_ready(c_pop), .rd_data(c_d), .count(core_count)
  );

  assign out_valid = a_v || c_v;
  assign out_req   = a_v ? a_d : c_d;
  assign a_pop     = out_ready && a_v;
  assign c_pop     = out_ready && !a_v && c_v;

  // ARP: a core request is never granted while an accelerator request waits.
  assert property (@(posedge clk) disable iff (!rst_n) c_pop |-> !a_v)
    else $error("arp_queue: core granted over a waiting accelerator request");
endmodule
