// wl_harness: one controller with its memory and a deterministic workload,
// for comparing policies side by side. Not part of the design.
//
// The accelerator side models one network layer per input set:
//   weights   W_LINES lines, each read W_REUSE times (hottest cluster,
//             shortest reuse interval)
//   inputs    I_LINES lines, each read twice (cluster RC 1, RI 2)
//   outputs   O_LINES lines, written once (no reuse: invalid L-RPT entry)
// issued in passes so that reuse of a line is spread over the layer, with up
// to four accesses in flight and a fixed compute gap after each issue.
// The core side stands for a mix of reuse-friendly applications (a hot set
// of CORE_HOT lines, reused) and streaming ones (lines never reused), one
// request at a time. Every address sequence is a fixed function of the
// access number, so two harnesses that differ only in policy see the same
// traffic. Results are exposed as counters.
module wl_harness
  import hydra_pkg::*;
#(
  parameter int unsigned SETS     = 64,
  parameter int unsigned ET       = 20_000,
  parameter int unsigned W_LINES  = 512,
  parameter int unsigned W_REUSE  = 4,
  parameter int unsigned I_LINES  = 1024,
  parameter int unsigned O_LINES  = 1024,
  parameter int unsigned CORE_HOT = 400,
  parameter int unsigned GAP      = 30
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        acc_bypass_en,
  input  logic        core_bypass_en,
  input  logic [31:0] deadline,
  input  logic        go,            // start one input set (pulse)
  output logic        ready,
  output logic        set_active,
  output logic [31:0] sets_met,
  output logic [31:0] sets_missed,
  output hydra_stats_t stats,
  output int          m_total,
  output int          acc_issued,
  output int          core_hits_late, // core hits after the first epoch of the set
  output int          core_acc_late
);
  localparam int unsigned IDX_W = 12;
  localparam addr_t W_BASE = 40'h00_1000_0000, I_BASE = 40'h00_2000_0000;
  localparam addr_t O_BASE = 40'h00_3000_0000, C_BASE = 40'h00_4000_0000;
  localparam int unsigned M = W_LINES * W_REUSE + I_LINES * 2 + O_LINES;

  logic        lrpt_wr_en;
  logic [IDX_W-1:0] lrpt_wr_idx;
  lrpt_entry_t lrpt_wr_entry;
  logic        lrpt_busy, set_start;
  logic        acc_req_valid, acc_req_ready, core_req_valid, core_req_ready;
  llc_req_t    acc_req, core_req;
  logic        resp_valid, wack_valid;
  llc_resp_t   resp, wack;
  logic        mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t    mem_req;
  mem_resp_t   mem_resp;
  reuse_th_t   th;
  logic [31:0] epochs, apm_ma_i, apm_ma_g, apm_ma_hat, apm_ra;
  logic [2:0]  apm_case;
  logic [15:0] apm_ta [4];
  logic [15:0] apm_tb;
  int n_reads, n_writes, n_byp;

  hydra_llc #(.LLC_SETS(SETS), .LRPT_IDX_W(IDX_W), .ET(ET)) dut (
    .clk, .rst_n, .ready,
    .cfg_m_total(32'(M)), .cfg_deadline(deadline),
    .cfg_acc_bypass_en(acc_bypass_en), .cfg_core_bypass_en(core_bypass_en), .cfg_cold_once(1'b0),
    .set_start, .lrpt_clr(1'b0), .lrpt_wr_en, .lrpt_wr_idx, .lrpt_wr_entry, .lrpt_busy,
    .acc_req_valid, .acc_req_ready, .acc_req, .core_req_valid, .core_req_ready, .core_req,
    .resp_valid, .resp_ready(1'b1), .resp, .wack_valid, .wack_ready(1'b1), .wack,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_ready, .mem_resp,
    .th, .set_active, .sets_met, .sets_missed, .epochs, .stats,
    .apm_ma_i, .apm_ma_g, .apm_ma_hat, .apm_case, .apm_ta, .apm_tb, .apm_ra
  );

  mem_model #(.LAT(60)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp(mem_resp),
    .n_reads, .n_writes, .n_byp_writes(n_byp)
  );

  assign m_total = M;

  // ------------------------------------------------ accelerator sequence
  // pass p of W_REUSE: all weights once, then the inputs of that pass
  // (each input line in two consecutive passes), then outputs of the pass
  function automatic void acc_access(input int k, output addr_t a, output bit w);
    int per_pass, p, r, ipp, opp;
    ipp = int'(I_LINES * 2 / W_REUSE);
    opp = int'(O_LINES / W_REUSE);
    per_pass = int'(W_LINES) + ipp + opp;
    p = k / per_pass;
    r = k % per_pass;
    w = 0;
    if (r < int'(W_LINES)) begin
      a = W_BASE + addr_t'(r) * 64;
    end else if (r < int'(W_LINES) + ipp) begin
      int j;
      j = r - int'(W_LINES);
      // lines p*ipp/2 .. cover two passes each
      a = I_BASE + addr_t'(((p * ipp / 2) + (j % (ipp / 2)) + (j / (ipp / 2)) * (ipp / 2)) % int'(I_LINES)) * 64;
    end else begin
      a = O_BASE + addr_t'(p * opp + (r - int'(W_LINES) - ipp)) * 64;
      w = 1;
    end
  endfunction

  // ------------------------------------------------------ core sequence
  function automatic void core_access(input int k, output addr_t a, output logic [31:0] pc);
    int h;
    h = (k * 1103515245 + 12345) & 32'h7fff_ffff;
    if (k % 2 == 0) begin
      a = C_BASE + addr_t'(h % int'(CORE_HOT)) * 64;
      pc = 32'h1000 + 32'((h >> 8) % 4) * 4;
    end else begin
      a = C_BASE + 40'h100_0000 + addr_t'(k) * 64;
      pc = 32'h2000 + 32'((h >> 8) % 4) * 4;
    end
  endfunction

  // ---------------------------------------------------------- driving
  int  acc_next = 0, acc_done_n = 0, core_next = 0, gap_cnt = 0;
  bit  core_busy = 0, late = 0;
  logic [31:0] set_epochs0 = 0;
  int  inflight = 0;
  logic [7:0] id_n = 0;

  initial begin
    lrpt_wr_en = 0; lrpt_wr_idx = '0; lrpt_wr_entry = '0; set_start = 0;
    acc_req_valid = 0; acc_req = '0; core_req_valid = 0; core_req = '0;
    acc_issued = 0; core_hits_late = 0; core_acc_late = 0;
    @(posedge rst_n);
    @(negedge clk);
    while (!ready) @(negedge clk);
    // L-RPT contents, as offline training would produce for this layer
    for (int i = 0; i < int'(W_LINES + I_LINES); i++) begin
      addr_t a;
      lrpt_entry_t e;
      if (i < int'(W_LINES)) begin a = W_BASE + addr_t'(i) * 64; e = '{valid: 1, rc: 2'd3, ri: 2'd0}; end
      else begin a = I_BASE + addr_t'(i - int'(W_LINES)) * 64; e = '{valid: 1, rc: 2'd1, ri: 2'd2}; end
      lrpt_wr_en = 1; lrpt_wr_idx = a[BLK_OFF +: IDX_W]; lrpt_wr_entry = e;
      @(negedge clk);
    end
    lrpt_wr_en = 0;
  end

  always @(negedge clk) if (rst_n && go) begin
    set_start <= 1;
    acc_next <= 0;
    set_epochs0 <= epochs;
  end else begin
    set_start <= 0;
  end

  // accelerator issue
  always @(negedge clk) if (rst_n) begin
    if (acc_req_valid && acc_req_ready_s) begin
      acc_req_valid <= 0;
      gap_cnt <= int'(GAP);
    end else if (!acc_req_valid && set_active && acc_next < int'(M) && inflight < 4
                 && gap_cnt == 0 && !set_start) begin
      addr_t a;
      bit w;
      acc_access(acc_next, a, w);
      acc_req <= '{write: w, src: SRC_W'(SRC_ACCEL), id: id_n, pc: 32'h8000, addr: a,
                   data: {16{32'(acc_next)}}};
      acc_req_valid <= 1;
      acc_next <= acc_next + 1;
      acc_issued <= acc_issued + 1;
      id_n <= id_n + 1;
    end else if (gap_cnt > 0) begin
      gap_cnt <= gap_cnt - 1;
    end
  end
  logic acc_req_ready_s;
  always @(posedge clk) acc_req_ready_s <= acc_req_valid && acc_req_ready;

  always @(posedge clk) if (rst_n) begin
    inflight <= inflight + int'(acc_req_valid && acc_req_ready)
              - int'(resp_valid && is_accel(resp.src)) - int'(wack_valid);
    late <= set_active && epochs != set_epochs0;
  end

  // core issue, one request at a time
  logic core_req_ready_s;
  always @(posedge clk) core_req_ready_s <= core_req_valid && core_req_ready;
  always @(negedge clk) if (rst_n) begin
    if (core_req_valid && core_req_ready_s) begin
      core_req_valid <= 0;
    end else if (!core_req_valid && !core_busy && ready && !lrpt_wr_en) begin
      addr_t a;
      logic [31:0] pc;
      core_access(core_next, a, pc);
      core_req <= '{write: 1'b0, src: SRC_W'(core_next % 8), id: 8'(core_next), pc: pc, addr: a,
                    data: '0};
      core_req_valid <= 1;
      core_busy <= 1;
      core_next <= core_next + 1;
    end
    if (resp_valid && !is_accel(resp.src)) core_busy <= 0;
  end

  // core hit accounting after the first epoch of a set
  logic [31:0] ca_q, cm_q;
  always @(posedge clk) if (rst_n) begin
    ca_q <= stats.core_access;
    cm_q <= stats.core_miss;
    if (late) begin
      core_acc_late  <= core_acc_late  + int'(stats.core_access - ca_q);
      core_hits_late <= core_hits_late + int'(stats.core_access - ca_q) - int'(stats.core_miss - cm_q);
    end
  end
endmodule
