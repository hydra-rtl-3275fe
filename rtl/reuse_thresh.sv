// reuse_thresh: Reuse Threshold Estimation step of the Accelerator Progress
// Monitor. From the last epoch's accelerator statistics it predicts the
// accesses the accelerator can complete in this epoch,
//   MA_hat = ET / AMAL = ET * completed / latency_sum,
// and compares MA_hat with T x MA(i) for the dynamic bypass thresholds,
// picking the reuse thresholds of the first row that holds (the table of
// the paper's reuse-threshold figure):
//   MA_hat > T_A4 MA(i): RI_Th = -1, RC_Th = 4   (bypass all)
//   MA_hat > T_A3 MA(i): RI_Th =  0, RC_Th = 3
//   MA_hat > T_A2 MA(i): RI_Th =  1, RC_Th = 2
//   MA_hat > T_A1 MA(i): RI_Th =  2, RC_Th = 1
//   MA_hat > T_B  MA(i): RI_Th =  3, RC_Th = 0   (special cases only)
//   otherwise          : RI_Th =  3, RC_Th = -1  (no bypass)
// Comparisons are 100*MA_hat > T_pct*MA(i). AMAL is passed as the pair
// (completed accesses, summed latency) so that a single division gives
// MA_hat; an epoch with no latency recorded gives MA_hat = 0 (no bypass).
// `start` pulses once; `done` pulses with `th` valid about 65 cycles later.
module reuse_thresh
  import hydra_pkg::*;
#(
  parameter int unsigned ET = 200_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] acc_cnt,     // accelerator accesses completed in epoch i-1
  input  logic [47:0] lat_sum,     // their summed latency in cycles
  input  logic [31:0] ma_i,
  input  logic [15:0] ta [4],
  input  logic [15:0] tb,
  output logic        done,
  output logic [31:0] ma_hat,
  output reuse_th_t   th
);
  logic        div_start, div_busy, div_done;
  logic [63:0] div_q;
  logic        waiting;

  seq_div #(.N(64)) u_div (
    .clk, .rst_n, .start(div_start),
    .dividend(64'(acc_cnt) * 64'(ET)), .divisor((lat_sum == '0) ? 64'd1 : 64'(lat_sum)),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );
  assign div_start = start && !waiting;

  function automatic reuse_th_t select_th(input logic [31:0] hat);
    logic [47:0] l;
    l = 48'(hat) * 48'd100;
    if      (l > 48'(ta[3]) * 48'(ma_i)) return '{ri_th: -4'sd1, rc_th: 4'sd4};
    else if (l > 48'(ta[2]) * 48'(ma_i)) return '{ri_th:  4'sd0, rc_th: 4'sd3};
    else if (l > 48'(ta[1]) * 48'(ma_i)) return '{ri_th:  4'sd1, rc_th: 4'sd2};
    else if (l > 48'(ta[0]) * 48'(ma_i)) return '{ri_th:  4'sd2, rc_th: 4'sd1};
    else if (l > 48'(tb)    * 48'(ma_i)) return '{ri_th:  4'sd3, rc_th: 4'sd0};
    else                                 return TH_NO_BYPASS;
  endfunction

  logic [31:0] hat_now;
  assign hat_now = (lat_sum == '0) ? 32'd0 :
                   (div_q[63:32] != '0) ? 32'hFFFF_FFFF : div_q[31:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting <= 1'b0; done <= 1'b0; ma_hat <= '0; th <= TH_NO_BYPASS;
    end else begin
      done <= 1'b0;
      if (start && !waiting) waiting <= 1'b1;
      else if (waiting && div_done) begin
        waiting <= 1'b0;
        done    <= 1'b1;
        ma_hat  <= hat_now;
        th      <= select_th(hat_now);
      end
    end
  end
endmodule
