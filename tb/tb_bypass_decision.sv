// tb_bypass_decision: exhaustive check of the bypass decision against the
// six threshold rows of the reuse-threshold table, written here as the
// set of (RC, RI) clusters each row keeps in the LLC.
module tb_bypass_decision;
  import hydra_pkg::*;
  int checks = 0, failures = 0;
  logic        enable, cold_once, bypass;
  lrpt_entry_t entry;
  reuse_th_t   th;

  bypass_decision dut (.enable, .entry, .th, .cold_once, .bypass);

  // rows: RI_Th, RC_Th as printed in the table
  int ri_tab [6] = '{-1, 0, 1, 2, 3, 3};
  int rc_tab [6] = '{ 4, 3, 2, 1, 0, -1};

  function automatic bit kept(int row, int rc, int ri, bit cold);
    case (row)
      0: return 0;                              // bypass all
      1: return rc == 3 && ri == 0;
      2: return rc >= 2 && ri <= 1;
      3: return rc >= 1 && ri <= 2;
      4: return !(cold && rc == 0);             // special cases only
      default: return 1;                        // no bypass
    endcase
  endfunction

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int row = 0; row < 6; row++)
      for (int e = 0; e < 32; e++)
        for (int c = 0; c < 2; c++)
          for (int en = 0; en < 2; en++) begin
            bit exp;
            enable = en[0]; cold_once = c[0]; entry = 5'(e);
            th.ri_th = 4'(ri_tab[row]); th.rc_th = 4'(rc_tab[row]);
            #1;
            if (!en[0])            exp = 0;
            else if (!entry.valid) exp = 1;
            else                   exp = !kept(row, entry.rc, entry.ri, c[0]);
            checks++;
            if (bypass !== exp) begin
              failures++;
              $display("row %0d entry %b cold %0d en %0d: got %0d exp %0d", row, entry, c, en, bypass, exp);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
