// hydra_llc: HyDRA shared last-level-cache controller (top level).
//
// The LLC is shared by eight cores and one ML accelerator. HyDRA decides,
// access by access, whether accelerator data is worth caching, trading the
// accelerator's reuse (predicted offline and stored in the L-RPT) against
// its progress towards a per-input-set deadline (measured by the APM).
// Core read misses are filtered by a SHIP-style predictor.
//
// Paths (numbered as in the paper's controller diagram):
//   1  accelerator write, bypass: L-RPT port A + bypass decision say
//      bypass -> any cached copy is invalidated first, then the write goes
//      straight to memory through the bypass FIFO. Invalidating first keeps
//      a write-back of an older dirty copy from landing in memory after
//      the bypassed data. Its acknowledgement returns on the `wack` channel.
//   2  accelerator write, cached: into the ARP request queue.
//   3  accelerator read miss, bypass: when the memory data returns, L-RPT
//      port B + bypass decision say bypass -> data to the accelerator, no
//      fill. Core read misses likewise bypass when SHIP predicts no reuse.
//   4  accelerator read miss, cached: line filled into the LLC.
// Accelerator reads and all core reads and writebacks enter the request
// queue, which serves accelerator requests first (ARP).
//
// Interfaces: requests are valid/ready llc_req_t (the accelerator port and
// one core port that stands for the core-side interconnect); LLC responses
// (hits, fills and bypassed read data) leave on `resp`, acknowledgements of
// bypassed writes on `wack`. The memory side is one valid/ready request
// channel and one response channel; memory replies to reads and to writes
// marked `byp`, not to LLC writebacks. Configuration (M, D, policy enables,
// the per-layer Cold special-case flag) and the L-RPT load port come from
// the host. Timing: a write request spends one cycle in the L-RPT lookup
// stage; an LLC hit answers DATA_LAT cycles after it leaves the queue.
// The accelerator front register, the single core port, the FIFO depths
// and the split response channels are this implementation's choices.
// `wack` reuses the response struct; its data field carries nothing and is
// tied to zero, which is why synthesis reports those output bits constant.
module hydra_llc
  import hydra_pkg::*;
#(
  parameter int unsigned LLC_SETS        = 8192,    // 8 MB / (16 x 64 B)
  parameter int unsigned LLC_WAYS        = 16,
  parameter int unsigned TAG_LAT         = 3,
  parameter int unsigned DATA_LAT        = 9,
  parameter int unsigned LRPT_IDX_W      = 19,      // 512K entries
  parameter int unsigned SHIP_SIG_W      = 12,      // 4K entries
  parameter int unsigned SHIP_CTR_W      = 3,
  parameter int unsigned QUEUE_DEPTH     = 16,
  parameter int unsigned ET              = 200_000,
  parameter int unsigned ALPHA_PCT       = 10,
  parameter int unsigned BETA_PCT        = 5,
  parameter int unsigned MR_TH_PCT       = 30,
  parameter int unsigned MARGIN_HIGH_PCT = 5,
  parameter int unsigned MARGIN_LOW_PCT  = 1,
  parameter int unsigned DELTA_A_PCT     = 20,
  parameter int unsigned DELTA_B_PCT     = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  ready,          // reset sweeps finished
  // host configuration
  input  logic [31:0]           cfg_m_total,
  input  logic [31:0]           cfg_deadline,
  input  logic                  cfg_acc_bypass_en,
  input  logic                  cfg_core_bypass_en,
  input  logic                  cfg_cold_once,
  input  logic                  set_start,
  // L-RPT load
  input  logic                  lrpt_clr,
  input  logic                  lrpt_wr_en,
  input  logic [LRPT_IDX_W-1:0] lrpt_wr_idx,
  input  lrpt_entry_t           lrpt_wr_entry,
  output logic                  lrpt_busy,
  // accelerator requests
  input  logic                  acc_req_valid,
  output logic                  acc_req_ready,
  input  llc_req_t              acc_req,
  // core requests
  input  logic                  core_req_valid,
  output logic                  core_req_ready,
  input  llc_req_t              core_req,
  // responses
  output logic                  resp_valid,
  input  logic                  resp_ready,
  output llc_resp_t             resp,
  output logic                  wack_valid,
  input  logic                  wack_ready,
  output llc_resp_t             wack,
  // memory side
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output mem_req_t              mem_req,
  input  logic                  mem_resp_valid,
  output logic                  mem_resp_ready,
  input  mem_resp_t             mem_resp,
  // observation
  output reuse_th_t             th,
  output logic                  set_active,
  output logic [31:0]           sets_met,
  output logic [31:0]           sets_missed,
  output logic [31:0]           epochs,
  output hydra_stats_t          stats,
  output logic [31:0]           apm_ma_i,       // MA(i) of the current epoch
  output logic [31:0]           apm_ma_g,       // MA_global
  output logic [31:0]           apm_ma_hat,     // predicted accesses this epoch
  output logic [2:0]            apm_case,       // margin flow-chart outcome 1..4
  output logic [15:0]           apm_ta [4],     // T_A1..T_A4 in percent
  output logic [15:0]           apm_tb,         // T_B in percent
  output logic [31:0]           apm_ra          // remaining accesses of the set
);
  // ---------------------------------------------------------------- APM
  logic [1:0]  acc_done;
  logic [7:0]  acc_out;
  logic        st_core_access, st_core_miss, st_acc_access, st_acc_miss;
  logic        unused_th_update;
  logic [31:0] apm_el;

  apm #(
    .ET(ET), .ALPHA_PCT(ALPHA_PCT), .BETA_PCT(BETA_PCT), .MR_TH_PCT(MR_TH_PCT),
    .MARGIN_HIGH_PCT(MARGIN_HIGH_PCT), .MARGIN_LOW_PCT(MARGIN_LOW_PCT),
    .DELTA_A_PCT(DELTA_A_PCT), .DELTA_B_PCT(DELTA_B_PCT)
  ) u_apm (
    .clk, .rst_n, .cfg_m_total, .cfg_deadline, .set_start,
    .acc_done, .acc_outstanding(acc_out),
    .core_access(st_core_access), .core_miss(st_core_miss),
    .active(set_active), .th, .th_update(unused_th_update),
    .ra(apm_ra), .elapsed(apm_el), .sets_met, .sets_missed, .epochs,
    .ma_i(apm_ma_i), .ma_global(apm_ma_g), .ma_hat(apm_ma_hat),
    .margin_case(apm_case), .ta(apm_ta), .tb(apm_tb)
  );

  logic acc_byp_en;
  assign acc_byp_en = cfg_acc_bypass_en && set_active;

  // ---------------------------------------------------------------- L-RPT
  lrpt_entry_t a_entry, b_entry;
  addr_t       a_addr, b_addr;

  lrpt #(.IDX_W(LRPT_IDX_W)) u_lrpt (
    .clk, .rst_n, .clr_start(lrpt_clr), .busy(lrpt_busy),
    .wr_en(lrpt_wr_en), .wr_idx(lrpt_wr_idx), .wr_entry(lrpt_wr_entry),
    .a_addr, .a_entry, .b_addr, .b_entry
  );

  // ------------------------------------------ write-request bypass stage
  // One front register holds each accelerator request for its L-RPT lookup.
  llc_req_t h_req;
  logic     h_valid, h_bypass, h_inv_done, h_leave;
  logic     q_acc_valid, q_acc_ready;
  logic     inv_valid, inv_ready;
  logic     bf_wr_valid, bf_wr_ready;
  logic     byp_wr;

  assign a_addr = h_valid ? h_req.addr : acc_req.addr;

  bypass_decision u_dec_req (
    .enable(acc_byp_en), .entry(a_entry), .th, .cold_once(cfg_cold_once), .bypass(h_bypass)
  );

  assign byp_wr      = h_valid && h_req.write && h_bypass;
  assign q_acc_valid = h_valid && !byp_wr;
  assign inv_valid   = byp_wr && !h_inv_done;
  assign bf_wr_valid = byp_wr && h_inv_done;
  assign h_leave     = q_acc_valid ? q_acc_ready : bf_wr_valid && bf_wr_ready;
  assign acc_req_ready = !h_valid || h_leave;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_valid <= 1'b0; h_req <= '0; h_inv_done <= 1'b0;
    end else begin
      if (acc_req_ready) begin
        h_valid     <= acc_req_valid;
        h_req       <= acc_req;
        h_inv_done  <= 1'b0;
      end else if (inv_valid && inv_ready) begin
        h_inv_done  <= 1'b1;
      end
    end
  end

  // bypass write FIFO towards memory
  mem_req_t bf_in, bf_out;
  logic     bf_rd_valid, bf_rd_ready;
  logic [$clog2(QUEUE_DEPTH):0] unused_bf_count;
  always_comb begin
    bf_in       = '0;
    bf_in.write = 1'b1;
    bf_in.byp   = 1'b1;
    bf_in.src   = h_req.src;
    bf_in.id    = h_req.id;
    bf_in.addr  = h_req.addr;
    bf_in.data  = h_req.data;
  end
  sync_fifo #(.T(mem_req_t), .DEPTH(QUEUE_DEPTH)) u_bypass_fifo (
    .clk, .rst_n, .wr_valid(bf_wr_valid), .wr_ready(bf_wr_ready), .wr_data(bf_in),
    .rd_valid(bf_rd_valid), .rd_ready(bf_rd_ready), .rd_data(bf_out), .count(unused_bf_count)
  );

  // ---------------------------------------------------------------- queue
  logic     q_out_valid, q_out_ready;
  llc_req_t q_out;
  logic [$clog2(QUEUE_DEPTH):0] q_acc_cnt, q_core_cnt;

  arp_queue #(.DEPTH(QUEUE_DEPTH)) u_queue (
    .clk, .rst_n,
    .acc_valid(q_acc_valid), .acc_ready(q_acc_ready), .acc_req(h_req),
    .core_valid(core_req_valid), .core_ready(core_req_ready), .core_req,
    .out_valid(q_out_valid), .out_ready(q_out_ready), .out_req(q_out),
    .acc_count(q_acc_cnt), .core_count(q_core_cnt)
  );

  // ---------------------------------------------------------------- SHIP
  logic [PC_W-1:0]       lk_pc;
  logic [SHIP_SIG_W-1:0] ship_sig, hit_sig, ev_sig;
  logic                  ship_pred, ship_busy, hit_en, ev_en;

  ship_predictor #(.SIG_W(SHIP_SIG_W), .CTR_W(SHIP_CTR_W), .PC_W(PC_W)) u_ship (
    .clk, .rst_n, .busy(ship_busy),
    .pred_pc(lk_pc), .pred_sig(ship_sig), .pred_bypass(ship_pred),
    .hit_en, .hit_sig, .evict_en(ev_en), .evict_sig(ev_sig)
  );

  // ---------------------------------------------------------------- LLC
  logic      acc_rsp_bypass, core_rsp_bypass, llc_busy;
  logic      llc_mem_valid, llc_mem_ready, llc_mresp_valid;
  mem_req_t  llc_mem_req;
  logic      st_rb_acc, st_rb_core, st_inv_hit;

  bypass_decision u_dec_rsp (
    .enable(acc_byp_en), .entry(b_entry), .th, .cold_once(cfg_cold_once), .bypass(acc_rsp_bypass)
  );
  assign core_rsp_bypass = cfg_core_bypass_en && ship_pred;

  llc_cache #(
    .SETS(LLC_SETS), .WAYS(LLC_WAYS), .TAG_LAT(TAG_LAT), .DATA_LAT(DATA_LAT), .SIG_W(SHIP_SIG_W)
  ) u_llc (
    .clk, .rst_n, .busy(llc_busy),
    .inv_valid, .inv_ready, .inv_addr(h_req.addr),
    .req_valid(q_out_valid), .req_ready(q_out_ready), .req(q_out),
    .resp_valid, .resp_ready, .resp,
    .mem_req_valid(llc_mem_valid), .mem_req_ready(llc_mem_ready), .mem_req(llc_mem_req),
    .mem_resp_valid(llc_mresp_valid), .mem_resp,
    .rsp_lk_addr(b_addr), .rsp_lk_pc(lk_pc),
    .acc_rsp_bypass, .core_rsp_bypass, .core_sig(ship_sig),
    .ship_hit_en(hit_en), .ship_hit_sig(hit_sig), .ship_evict_en(ev_en), .ship_evict_sig(ev_sig),
    .st_core_access, .st_core_miss, .st_acc_access, .st_acc_miss,
    .st_rsp_bypass_acc(st_rb_acc), .st_rsp_bypass_core(st_rb_core), .st_inv_hit
  );

  assign ready = !llc_busy && !ship_busy && !lrpt_busy;

  // ------------------------------------------------------- memory side
  // The blocking LLC has priority; bypassed writes use the idle slots.
  assign mem_req_valid = llc_mem_valid || bf_rd_valid;
  assign mem_req       = llc_mem_valid ? llc_mem_req : bf_out;
  assign llc_mem_ready = mem_req_ready;
  assign bf_rd_ready   = mem_req_ready && !llc_mem_valid;

  assign wack_valid      = mem_resp_valid && mem_resp.byp;
  assign llc_mresp_valid = mem_resp_valid && !mem_resp.byp;
  assign mem_resp_ready  = mem_resp.byp ? wack_ready : 1'b1;
  always_comb begin
    wack       = '0;
    wack.write = 1'b1;
    wack.src   = mem_resp.src;
    wack.id    = mem_resp.id;
    wack.addr  = mem_resp.addr;
  end

  // ------------------------------------------- progress bookkeeping
  logic acc_in, acc_resp_done, acc_wack_done;
  assign acc_in        = acc_req_valid && acc_req_ready;
  assign acc_resp_done = resp_valid && resp_ready && is_accel(resp.src);
  assign acc_wack_done = wack_valid && wack_ready && is_accel(wack.src);
  assign acc_done      = 2'(acc_resp_done) + 2'(acc_wack_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_out <= '0;
      stats   <= '0;
    end else begin
      acc_out <= acc_out + 8'(acc_in) - 8'(acc_done);
      if (h_valid && h_req.write && h_leave) begin
        if (byp_wr) stats.acc_wr_bypass <= stats.acc_wr_bypass + 1'b1;
        else        stats.acc_wr_cached <= stats.acc_wr_cached + 1'b1;
      end
      if (st_rb_acc)  stats.acc_rd_bypass  <= stats.acc_rd_bypass + 1'b1;
      if (st_rb_core) stats.core_rd_bypass <= stats.core_rd_bypass + 1'b1;
      if (st_acc_access && !st_acc_miss) stats.acc_llc_hit <= stats.acc_llc_hit + 1'b1;
      if (st_core_access) stats.core_access <= stats.core_access + 1'b1;
      if (st_core_miss)   stats.core_miss   <= stats.core_miss + 1'b1;
      if (st_inv_hit)     stats.inv_hits    <= stats.inv_hits + 1'b1;
      if (q_core_cnt != '0 && q_acc_cnt != '0)
        stats.arp_core_waits <= stats.arp_core_waits + 1'b1;
      if (llc_mem_valid && llc_mem_ready && !llc_mem_req.write && is_accel(llc_mem_req.src))
        stats.acc_rd_miss <= stats.acc_rd_miss + 1'b1;
    end
  end
endmodule
