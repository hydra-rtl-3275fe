// lrpt: LERN Reuse Predictor Table (L-RPT).
// A tagless, direct-mapped table of 2**IDX_W entries of 5 bits each
// (valid, 2-bit RC cluster, 2-bit RI cluster), indexed by the low bits of
// the block address (address >> 6). The paper gives the organisation, the
// size (512K entries, 320 KB) and the single-cycle lookup; the host loads
// the offline-trained clustering of each layer before the layer runs.
// An invalid entry means "No Reuse".
//
// Ports: two lookup ports, A for accelerator write requests and B for
// accelerator read responses (the two L-RPT boxes of the controller
// diagram), each returning the entry one clock after the address; one load
// port. `clr_start` sweeps one entry per clock clearing the valid bits
// (2**IDX_W cycles, `busy` high meanwhile); reset starts the same sweep.
// Loads are ignored while busy. Having two read ports, the sweep clear and
// its timing are choices of this implementation.
module lrpt
  import hydra_pkg::*;
#(
  parameter int unsigned IDX_W = 19     // 512K entries
) (
  input  logic              clk,
  input  logic              rst_n,
  // load / clear
  input  logic              clr_start,
  output logic              busy,
  input  logic              wr_en,
  input  logic [IDX_W-1:0]  wr_idx,
  input  lrpt_entry_t       wr_entry,
  // lookup port A (write requests)
  input  addr_t             a_addr,
  output lrpt_entry_t       a_entry,
  // lookup port B (read responses)
  input  addr_t             b_addr,
  output lrpt_entry_t       b_entry
);
  lrpt_entry_t      tbl [2**IDX_W];
  logic [IDX_W-1:0] clr_idx;
  logic             clearing;

  assign busy = clearing;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_idx  <= '0;
    end else if (clearing) begin
      clr_idx <= clr_idx + 1'b1;
      if (clr_idx == '1) clearing <= 1'b0;
    end else if (clr_start) begin
      clearing <= 1'b1;
      clr_idx  <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (clearing)   tbl[clr_idx] <= '0;
    else if (wr_en) tbl[wr_idx]  <= wr_entry;
    a_entry <= tbl[a_addr[BLK_OFF +: IDX_W]];
    b_entry <= tbl[b_addr[BLK_OFF +: IDX_W]];
  end
endmodule
