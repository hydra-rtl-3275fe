// bypass_decision: deadline- and reuse-aware bypass decision for one
// accelerator access (a write request or a read response).
// Combinational. Following the paper, the access bypasses the LLC when
//   * its L-RPT entry is invalid (the "No Reuse" cluster), or
//   * RI_cluster > RI_Th, or
//   * RC_cluster < RC_Th,
// and, as the paper's special case, when RC_Th = 0 (progress critical but
// above T_B) accesses in the Cold RC cluster are bypassed only if the layer
// is flagged `cold_once`: the host sets this flag when the offline Cold
// cluster centre says such lines are reused at most once more. Carrying
// that fact as one per-layer flag is this implementation's choice.
// `enable` low (accelerator idle or policy off) forces no bypass.
module bypass_decision
  import hydra_pkg::*;
(
  input  logic        enable,
  input  lrpt_entry_t entry,
  input  reuse_th_t   th,
  input  logic        cold_once,
  output logic        bypass
);
  logic signed [3:0] rc_s, ri_s;
  logic              by_ri, by_rc, by_special;

  assign rc_s       = {2'b00, entry.rc};
  assign ri_s       = {2'b00, entry.ri};
  assign by_ri      = ri_s > th.ri_th;
  assign by_rc      = rc_s < th.rc_th;
  assign by_special = (th.rc_th == 4'sd0) && (entry.rc == 2'd0) && cold_once;

  always_comb begin
    if (!enable)           bypass = 1'b0;
    else if (!entry.valid) bypass = 1'b1;
    else                   bypass = by_ri || by_rc || by_special;
  end
endmodule
