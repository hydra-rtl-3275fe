// dyn_thresh: Dynamic Bypass Threshold Estimation (Algorithm 1 of the
// paper). Holds the five dynamic bypass thresholds T_A1..T_A4 and T_B as
// integer percentages (e.g. 120 means 1.2). On `update` it compares the
// epoch requirement MA(i) with MA_global in bands of width beta:
//   MA(i) <= (1-6b) MA_global            : T_Aj -= 6 dA (floor 1.0), T_B -= 6 dB
//   (1-(k+1)b) < MA(i)/MA_global <= (1-kb), k = 5..1
//                                        : T_Aj -= k dA (floor 1.0), T_B -= k dB
//   (1-b) < MA(i)/MA_global <= (1+b)     : unchanged
//   MA(i) > (1+b) MA_global              : T_Aj += dA, T_B unchanged
// Every band test is an exact integer cross-multiplication
// 100*MA(i) <=> (100 -/+ k*BETA_PCT)*MA_global. The thresholds take effect
// the cycle after `update`. `reinit` (start of an input set) loads the
// initial values.
// Choices of this implementation: the initial values (the paper gives none),
// a floor of 0 for T_B (the paper gives no floor for it) and saturation of
// T_Aj at 16 bits.
module dyn_thresh #(
  parameter int unsigned BETA_PCT    = 5,    // beta    = 0.05
  parameter int unsigned DELTA_A_PCT = 20,   // delta_A = 0.2
  parameter int unsigned DELTA_B_PCT = 10,   // delta_B = 0.1
  parameter int unsigned TA1_INIT    = 120,
  parameter int unsigned TA2_INIT    = 140,
  parameter int unsigned TA3_INIT    = 160,
  parameter int unsigned TA4_INIT    = 180,
  parameter int unsigned TB_INIT     = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reinit,
  input  logic        update,
  input  logic [31:0] ma_i,
  input  logic [31:0] ma_global,
  output logic [15:0] ta [4],      // ta[0] = T_A1 ... ta[3] = T_A4
  output logic [15:0] tb
);
  localparam logic [15:0] TA_INIT [4] = '{16'(TA1_INIT), 16'(TA2_INIT),
                                          16'(TA3_INIT), 16'(TA4_INIT)};

  // Band classification: dec = k in 1..6 decreases by k steps; inc raises.
  logic [2:0]  dec;
  logic        inc;
  logic [47:0] lhs;

  assign lhs = 48'(ma_i) * 48'd100;

  function automatic logic [47:0] band(input int unsigned pct);
    return 48'(ma_global) * 48'(pct);
  endfunction

  always_comb begin
    dec = 3'd0;
    inc = 1'b0;
    if (lhs <= band(100 - 6*BETA_PCT)) dec = 3'd6;
    else begin
      for (int k = 5; k >= 1; k--) begin
        if (lhs >  band(100 - (k+1)*BETA_PCT) &&
            lhs <= band(100 - k*BETA_PCT)) dec = 3'(k);
      end
      if (lhs > band(100 + BETA_PCT)) inc = 1'b1;
    end
  end

  function automatic logic [15:0] ta_next(input logic [15:0] t, input logic [2:0] k,
                                          input logic up);
    logic [16:0] s;
    if (up) begin
      s = 17'(t) + 17'(DELTA_A_PCT);
      return s[16] ? 16'hFFFF : s[15:0];
    end
    s = 17'(32'(k) * DELTA_A_PCT);
    return (17'(t) >= s + 17'd100) ? t - s[15:0] : 16'd100;   // max(T - k dA, 1)
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < 4; j++) ta[j] <= TA_INIT[j];
      tb <= 16'(TB_INIT);
    end else if (reinit) begin
      for (int j = 0; j < 4; j++) ta[j] <= TA_INIT[j];
      tb <= 16'(TB_INIT);
    end else if (update) begin
      for (int j = 0; j < 4; j++) ta[j] <= ta_next(ta[j], dec, inc);
      if (dec != 3'd0)
        tb <= (32'(tb) >= 32'(dec) * DELTA_B_PCT) ? tb - 16'(32'(dec) * DELTA_B_PCT) : 16'd0;
    end
  end
endmodule
