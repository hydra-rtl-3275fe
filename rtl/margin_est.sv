// margin_est: Margin Requirement Estimation step of the Accelerator
// Progress Monitor.
// At the start of epoch i it receives the checkpointed counters and
// computes, with one shared bit-serial divider:
//   MA_global = M * ET / D                (accesses needed per epoch)
//   margin_high = D * MARGIN_HIGH_PCT/100, margin_low = D * MARGIN_LOW_PCT/100
//   MA_past   = (M - RA) * ET / (D - RT)  (accesses done per epoch so far)
// and then the per-epoch requirement MA(i) following the margin flow chart:
//   if !(MR > MR_Th and MA_past < (1+alpha) MA_global): MA = RA*ET/RT      (1)
//   else if RT > margin_high:  MA = RA*ET/(RT - margin_high)               (2)
//   else if RT > margin_low:   MA = RA*ET/margin_low                        (3)
//   else                       MA = (1+2 beta) * MA_global                  (4)
// MR > MR_Th is evaluated without division as 100*misses > MR_TH_PCT*accesses.
// Times are in clock cycles (the deadline D is given in cycles rather than
// seconds); divisors are clamped to at least 1. Fractions are integer
// percentages. `start` pulses once; `done` pulses when ma_i is valid, about
// 5 x 65 cycles later. Everything except the flow chart and the formulas
// (the divider, the widths, the clamping) is this implementation's choice.
module margin_est #(
  parameter int unsigned ET              = 200_000, // epoch length in cycles
  parameter int unsigned ALPHA_PCT       = 10,      // alpha = 0.1
  parameter int unsigned BETA_PCT        = 5,       // beta = 0.05
  parameter int unsigned MR_TH_PCT       = 30,      // MR_Th = 0.3
  parameter int unsigned MARGIN_HIGH_PCT = 5,       // margin_high = 5 % of D
  parameter int unsigned MARGIN_LOW_PCT  = 1        // margin_low  = 1 % of D
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] m_total,     // M: accesses per input set
  input  logic [31:0] deadline,    // D in cycles
  input  logic [31:0] ra,          // remaining accesses RA(i)
  input  logic [31:0] rt,          // remaining time RT(i), cycles
  input  logic [31:0] elapsed,     // D - RT(i), cycles since the set began
  input  logic [31:0] core_acc,    // core LLC accesses in epoch i-1
  input  logic [31:0] core_miss,   // core LLC misses in epoch i-1
  output logic        done,
  output logic [31:0] ma_i,
  output logic [31:0] ma_global,
  output logic [31:0] ma_past,
  output logic [2:0]  margin_case  // 1..4 as numbered in the flow chart
);
  typedef enum logic [2:0] {S_IDLE, S_GLOB, S_MH, S_ML, S_PAST, S_MA} state_t;
  state_t state;

  logic        div_start, div_busy, div_done;
  logic [63:0] div_a, div_b, div_q;
  logic [31:0] mh, ml;

  seq_div #(.N(64)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  function automatic logic [63:0] max1(input logic [63:0] v);
    return (v == '0) ? 64'd1 : v;
  endfunction

  always_comb begin
    div_start = 1'b0;
    div_a     = '0;
    div_b     = 64'd1;
    unique case (state)
      S_IDLE: begin
        div_start = start;
        div_a     = 64'(m_total) * 64'(ET);
        div_b     = max1(64'(deadline));
      end
      S_GLOB: begin
        div_start = div_done;
        div_a     = 64'(deadline) * 64'(MARGIN_HIGH_PCT);
        div_b     = 64'd100;
      end
      S_MH: begin
        div_start = div_done;
        div_a     = 64'(deadline) * 64'(MARGIN_LOW_PCT);
        div_b     = 64'd100;
      end
      S_ML: begin
        div_start = div_done;
        div_a     = 64'(m_total - ra) * 64'(ET);
        div_b     = max1(64'(elapsed));
      end
      S_PAST: begin
        // ma_past is registered in this cycle; the case choice uses the
        // divider output directly.
        div_start = div_done;
        if (!need_margin_now(div_q[31:0])) begin
          div_a = 64'(ra) * 64'(ET);
          div_b = max1(64'(rt));
        end else if (rt > mh) begin
          div_a = 64'(ra) * 64'(ET);
          div_b = max1(64'(rt - mh));
        end else if (rt > ml) begin
          div_a = 64'(ra) * 64'(ET);
          div_b = max1(64'(ml));
        end else begin
          div_a = 64'(ma_global) * 64'(100 + 2*BETA_PCT);
          div_b = 64'd100;
        end
      end
      default: ;
    endcase
  end

  // Margin condition (the diamond of the flow chart) for a given MA_past.
  function automatic logic need_margin_now(input logic [31:0] past);
    return (64'(core_miss) * 64'd100 > 64'(core_acc) * 64'(MR_TH_PCT)) &&
           (64'(past) * 64'd100 < 64'(ma_global) * 64'(100 + ALPHA_PCT));
  endfunction

  function automatic logic [31:0] sat32(input logic [63:0] v);
    return (v[63:32] != '0) ? 32'hFFFF_FFFF : v[31:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      ma_i <= '0; ma_global <= '0; ma_past <= '0; mh <= '0; ml <= '0;
      margin_case <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) state <= S_GLOB;
        S_GLOB: if (div_done) begin ma_global <= sat32(div_q); state <= S_MH; end
        S_MH:   if (div_done) begin mh <= sat32(div_q); state <= S_ML; end
        S_ML:   if (div_done) begin ml <= sat32(div_q); state <= S_PAST; end
        S_PAST: if (div_done) begin
          ma_past <= sat32(div_q);
          if (!need_margin_now(sat32(div_q))) margin_case <= 3'd1;
          else if (rt > mh)                   margin_case <= 3'd2;
          else if (rt > ml)                   margin_case <= 3'd3;
          else                                margin_case <= 3'd4;
          state <= S_MA;
        end
        S_MA:   if (div_done) begin ma_i <= sat32(div_q); done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
