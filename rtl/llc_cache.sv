// llc_cache: the shared last-level cache with its service state machine.
// Default geometry 8 MB, 16 ways, 64 B lines (8192 sets), as in the system
// the paper evaluates. Each line keeps valid, dirty, an owner bit (core or
// accelerator), a reused bit and the SHIP signature that inserted it; the
// last two train the core bypass predictor.
//
// One request is served at a time (a blocking cache). Sources, in priority
// order: invalidations of lines whose accelerator write was sent on the
// bypass path (the paper invalidates the cached copy before the next
// request), then the head of the ARP request queue.
//   hit, read : data returned, DATA_LAT cycles after the lookup starts
//               (tag and data arrays accessed in parallel). An accelerator
//               read that hits is always served by the cache.
//   hit, write: line updated and marked dirty, acknowledged.
//   miss, read: line read from memory. When it returns, the response-side
//               bypass verdict is sampled (L-RPT + bypass decision for the
//               accelerator, SHIP for cores, both supplied from outside
//               through rsp_lk_addr / rsp_lk_pc one cycle earlier). Bypass:
//               data goes straight to the requester, nothing is filled.
//               Otherwise the line is filled and then returned.
//   miss, write: allocate (write-allocate), line marked dirty.
// Victim: an invalid way if any, otherwise a per-set round-robin pointer.
// Dirty victims are written back to memory (memory sends no reply for
// these). Reset clears one set per cycle (SETS cycles, `busy` high).
// `mem_req.byp` is always 0 here: bypassed writes reach memory through the
// top level's bypass path, never through the cache.
// The blocking organisation, round-robin replacement, write-allocate and
// the latencies counted from the start of the lookup are this
// implementation's choices; the geometry and the 3/9-cycle tag/data
// latencies are the evaluated system's.
module llc_cache
  import hydra_pkg::*;
#(
  parameter int unsigned SETS     = 8192,
  parameter int unsigned WAYS     = 16,
  parameter int unsigned TAG_LAT  = 3,
  parameter int unsigned DATA_LAT = 9,
  parameter int unsigned SIG_W    = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             busy,
  // invalidation of a bypassed accelerator write
  input  logic             inv_valid,
  output logic             inv_ready,
  input  addr_t            inv_addr,
  // request from the ARP queue
  input  logic             req_valid,
  output logic             req_ready,
  input  llc_req_t         req,
  // response towards the requester
  output logic             resp_valid,
  input  logic             resp_ready,
  output llc_resp_t        resp,
  // memory side (fills and writebacks)
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output mem_req_t         mem_req,
  input  logic             mem_resp_valid,
  input  mem_resp_t        mem_resp,
  // response-side bypass verdicts for the current miss
  output addr_t            rsp_lk_addr,
  output logic [PC_W-1:0]  rsp_lk_pc,
  input  logic             acc_rsp_bypass,
  input  logic             core_rsp_bypass,
  input  logic [SIG_W-1:0] core_sig,
  // SHIP training and statistics (one-cycle pulses)
  output logic             ship_hit_en,
  output logic [SIG_W-1:0] ship_hit_sig,
  output logic             ship_evict_en,
  output logic [SIG_W-1:0] ship_evict_sig,
  output logic             st_core_access,
  output logic             st_core_miss,
  output logic             st_acc_access,
  output logic             st_acc_miss,
  output logic             st_rsp_bypass_acc,
  output logic             st_rsp_bypass_core,
  output logic             st_inv_hit
);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = ADDR_W - BLK_OFF - SET_W;
  localparam int unsigned LAT_W = 8;

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic             accel;
    logic             reused;
    logic [SIG_W-1:0] sig;
    logic [TAG_W-1:0] tag;
  } meta_t;

  meta_t            meta [SETS][WAYS];
  line_t            data [SETS*WAYS];
  logic [WAY_W-1:0] rr   [SETS];

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_INV, S_LOOK, S_HIT, S_MREQ, S_MWAIT, S_DECIDE,
    S_WB, S_FILL, S_RESP
  } state_t;
  state_t state;

  llc_req_t         cur;
  logic [SET_W-1:0] init_set;
  logic [LAT_W-1:0] lat;
  line_t            fill_data;
  logic [WAY_W-1:0] hit_way, vic_way, way_q;
  logic             hit, has_inv;
  meta_t            vic;

  logic [SET_W-1:0] cur_set;
  logic [TAG_W-1:0] cur_tag;
  assign cur_set = cur.addr[BLK_OFF +: SET_W];
  assign cur_tag = cur.addr[BLK_OFF+SET_W +: TAG_W];

  // tag compare and victim choice on the current set
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    has_inv = 1'b0;
    vic_way = rr[cur_set];
    for (int w = WAYS-1; w >= 0; w--) begin
      if (meta[cur_set][w].valid && meta[cur_set][w].tag == cur_tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (!meta[cur_set][w].valid) begin
        has_inv = 1'b1;
        vic_way = WAY_W'(w);
      end
    end
  end
  assign vic = meta[cur_set][way_q];

  assign busy        = state == S_INIT;
  assign inv_ready   = state == S_IDLE && inv_valid;
  assign req_ready   = state == S_IDLE && !inv_valid && req_valid;
  assign rsp_lk_addr = cur.addr;
  assign rsp_lk_pc   = cur.pc;

  assign mem_req_valid = state == S_MREQ || state == S_WB;
  always_comb begin
    mem_req = '0;
    if (state == S_WB) begin
      mem_req.write = 1'b1;
      mem_req.addr  = {vic.tag, cur_set, BLK_OFF'(0)};
      mem_req.data  = data[{cur_set, way_q}];
      mem_req.src   = vic.accel ? SRC_ACCEL : '0;
    end else begin
      mem_req.write = 1'b0;
      mem_req.addr  = {cur.addr[ADDR_W-1:BLK_OFF], BLK_OFF'(0)};
      mem_req.src   = cur.src;
      mem_req.id    = cur.id;
    end
  end

  logic cur_acc;
  assign cur_acc = is_accel(cur.src);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT; init_set <= '0; cur <= '0; lat <= '0; way_q <= '0;
      resp_valid <= 1'b0; resp <= '0; fill_data <= '0;
      ship_hit_en <= 1'b0; ship_hit_sig <= '0; ship_evict_en <= 1'b0; ship_evict_sig <= '0;
      st_core_access <= 1'b0; st_core_miss <= 1'b0; st_acc_access <= 1'b0; st_acc_miss <= 1'b0;
      st_rsp_bypass_acc <= 1'b0; st_rsp_bypass_core <= 1'b0; st_inv_hit <= 1'b0;
    end else begin
      ship_hit_en <= 1'b0; ship_evict_en <= 1'b0;
      st_core_access <= 1'b0; st_core_miss <= 1'b0; st_acc_access <= 1'b0; st_acc_miss <= 1'b0;
      st_rsp_bypass_acc <= 1'b0; st_rsp_bypass_core <= 1'b0; st_inv_hit <= 1'b0;
      unique case (state)
        S_INIT: begin
          for (int w = 0; w < WAYS; w++) meta[init_set][w].valid <= 1'b0;
          rr[init_set] <= '0;
          init_set <= init_set + 1'b1;
          if (init_set == SET_W'(SETS-1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (inv_valid) begin
            cur      <= '0;
            cur.addr <= inv_addr;
            state    <= S_INV;
          end else if (req_valid) begin
            cur   <= req;
            lat   <= LAT_W'(1);
            state <= S_LOOK;
          end
        end
        S_INV: begin
          if (hit) begin
            meta[cur_set][hit_way].valid <= 1'b0;
            st_inv_hit <= 1'b1;
          end
          state <= S_IDLE;
        end
        S_LOOK: begin
          lat <= lat + 1'b1;
          if (lat == LAT_W'(TAG_LAT)) begin
            st_core_access <= !cur_acc;
            st_acc_access  <= cur_acc;
            if (hit) begin
              way_q <= hit_way;
              state <= S_HIT;
            end else begin
              st_core_miss <= !cur_acc;
              st_acc_miss  <= cur_acc;
              way_q        <= vic_way;
              state        <= cur.write ? S_DECIDE : S_MREQ;
            end
          end
        end
        S_HIT: begin
          lat <= lat + 1'b1;
          if (lat == LAT_W'(DATA_LAT - 1)) begin
            resp.write <= cur.write;
            resp.src   <= cur.src;
            resp.id    <= cur.id;
            resp.addr  <= cur.addr;
            resp.data  <= data[{cur_set, way_q}];
            if (cur.write) begin
              data[{cur_set, way_q}]       <= cur.data;
              meta[cur_set][way_q].dirty   <= 1'b1;
            end
            if (!cur_acc && !meta[cur_set][way_q].accel && !meta[cur_set][way_q].reused) begin
              ship_hit_en  <= 1'b1;
              ship_hit_sig <= meta[cur_set][way_q].sig;
            end
            meta[cur_set][way_q].reused <= 1'b1;
            resp_valid <= 1'b1;
            state      <= S_RESP;
          end
        end
        S_MREQ: if (mem_req_ready) state <= S_MWAIT;
        S_MWAIT: if (mem_resp_valid && !mem_resp.write) begin
          fill_data <= mem_resp.data;
          state     <= S_DECIDE;
        end
        S_DECIDE: begin
          // Reads: the verdicts for cur.addr / cur.pc are valid here.
          if (!cur.write && (cur_acc ? acc_rsp_bypass : core_rsp_bypass)) begin
            st_rsp_bypass_acc  <= cur_acc;
            st_rsp_bypass_core <= !cur_acc;
            resp.write <= 1'b0;
            resp.src   <= cur.src;
            resp.id    <= cur.id;
            resp.addr  <= cur.addr;
            resp.data  <= fill_data;
            resp_valid <= 1'b1;
            state      <= S_RESP;
          end else begin
            if (vic.valid && !vic.accel && !vic.reused) begin
              ship_evict_en  <= 1'b1;
              ship_evict_sig <= vic.sig;
            end
            state <= (vic.valid && vic.dirty) ? S_WB : S_FILL;
          end
        end
        S_WB: if (mem_req_ready) state <= S_FILL;
        S_FILL: begin
          meta[cur_set][way_q] <= '{valid: 1'b1, dirty: cur.write, accel: cur_acc,
                                    reused: 1'b0, sig: cur_acc ? '0 : core_sig, tag: cur_tag};
          data[{cur_set, way_q}] <= cur.write ? cur.data : fill_data;
          if (!has_inv) rr[cur_set] <= rr[cur_set] + 1'b1;
          resp.write <= cur.write;
          resp.src   <= cur.src;
          resp.id    <= cur.id;
          resp.addr  <= cur.addr;
          resp.data  <= cur.write ? '0 : fill_data;
          resp_valid <= 1'b1;
          state      <= S_RESP;
        end
        S_RESP: if (resp_ready) begin
          resp_valid <= 1'b0;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A memory reply is only accepted while a fill is awaited.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (mem_resp_valid && !mem_resp.write) |-> state == S_MWAIT)
    else $error("llc_cache: unexpected memory reply");
endmodule
