// ship_predictor: Core Bypass Decision, a SHIP-style reuse predictor for
// the cores' LLC accesses.
// A Signature History Counter Table (SHCT) of 2**SIG_W saturating counters
// of CTR_W bits (4K entries of 3 bits in the paper's configuration) is
// indexed by a signature hashed from the PC of the core access. The LLC
// trains it: a hit on a core line increments the counter of the signature
// that inserted the line (first reuse only), and the eviction of a core line
// that was never reused decrements it. A core read response whose signature
// counter is zero is predicted dead and bypasses the LLC.
// The paper names SHIP and gives the table size and counter width; the
// signature hash (PC[13:2] xor PC[25:14]), the training points, the reset
// value (the counter midpoint, set by a sweep of 2**SIG_W cycles after
// reset, `busy` high meanwhile) and the one-cycle prediction latency are
// this implementation's choices. Training requests that collide on one
// cycle are applied in the order hit, then eviction; a simultaneous hit
// and eviction of the same signature nets to no change.
module ship_predictor #(
  parameter int unsigned SIG_W = 12,   // 4K entries
  parameter int unsigned CTR_W = 3,    // 3-bit saturating counters
  parameter int unsigned PC_W  = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             busy,
  // prediction
  input  logic [PC_W-1:0]  pred_pc,
  output logic [SIG_W-1:0] pred_sig,   // combinational signature of pred_pc
  output logic             pred_bypass,// registered: valid one cycle later
  // training
  input  logic             hit_en,
  input  logic [SIG_W-1:0] hit_sig,
  input  logic             evict_en,
  input  logic [SIG_W-1:0] evict_sig
);
  localparam logic [CTR_W-1:0] CTR_MAX  = '1;
  localparam logic [CTR_W-1:0] CTR_INIT = CTR_W'(1 << (CTR_W-1));

  logic [CTR_W-1:0] shct [2**SIG_W];
  logic [SIG_W-1:0] init_idx;
  logic             init;

  function automatic logic [SIG_W-1:0] sig_of(input logic [PC_W-1:0] pc);
    return pc[2 +: SIG_W] ^ pc[2+SIG_W +: SIG_W];
  endfunction

  assign pred_sig = sig_of(pred_pc);
  assign busy     = init;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init <= 1'b1; init_idx <= '0;
    end else if (init) begin
      init_idx <= init_idx + 1'b1;
      if (init_idx == '1) init <= 1'b0;
    end
  end

  logic same;
  assign same = hit_en && evict_en && (hit_sig == evict_sig);

  always_ff @(posedge clk) begin
    pred_bypass <= !init && (shct[pred_sig] == '0);
    if (init) shct[init_idx] <= CTR_INIT;
    else if (!same) begin
      if (hit_en && shct[hit_sig] != CTR_MAX)   shct[hit_sig]   <= shct[hit_sig] + 1'b1;
      if (evict_en && shct[evict_sig] != '0)    shct[evict_sig] <= shct[evict_sig] - 1'b1;
    end
  end
endmodule
