// hart_conf_qualifier: the per-hart Confidential-mode qualifier of CoVE.
//
// Each hart holds one bit of state, the Confidential qualifier (C). It is set
// by TEECALL and cleared by TEERET. Both are context switches carried out by
// the M-mode TSM-driver (an ECALL into M-mode followed by an MRET), so this
// block accepts them only while the hart runs in M-mode; a request from any
// other privilege is ignored and flagged on call_err for one cycle.
//
// The block also decodes (V, privilege, C) into the hart's operating mode and
// its address-translation regime, following the CoVE mode table: U/HS use a
// single stage (or bare) translation plus PMP plus the Memory Tracking Table
// (MTT), VU/VS and their confidential versions use two-stage translation plus
// PMP plus MTT, and M-mode runs bare without MTT enforcement. The V=0 modes
// with C=1 have no row in that table; HS with C=1 is where the TSM runs, and
// both are decoded as single-stage with MTT enforcement (a choice of this
// design).
//
// Interface: teecall/teeret are single-cycle pulses; conf changes on the
// next clock edge. mode, xlat and mtt_en are combinational from the current
// priv/v inputs and the registered qualifier. Reset clears the qualifier.
module hart_conf_qualifier
  import cove_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  priv_e priv,      // current nominal privilege
  input  logic  v,         // current virtualisation mode
  input  logic  teecall,   // enter Confidential-mode (from M-mode only)
  input  logic  teeret,    // leave Confidential-mode (from M-mode only)
  output logic  conf,      // Confidential qualifier
  output mode_e mode,
  output xlat_e xlat,
  output logic  mtt_en,    // MTT check applies to this hart's accesses
  output logic  call_err   // TEECALL/TEERET attempted outside M-mode
);

  logic in_m;
  assign in_m = (priv == PRIV_M);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conf     <= 1'b0;
      call_err <= 1'b0;
    end else begin
      call_err <= (teecall || teeret) && !in_m;
      if (in_m) begin
        if (teecall)     conf <= 1'b1;
        else if (teeret) conf <= 1'b0;
      end
    end
  end

  always_comb begin
    mode   = MODE_BAD;
    xlat   = XLAT_BARE;
    mtt_en = 1'b1;
    case (priv)
      PRIV_M: begin
        mode   = MODE_M;
        xlat   = XLAT_BARE;
        mtt_en = 1'b0;
      end
      PRIV_S: begin
        if (v) begin
          mode = conf ? MODE_CVS : MODE_VS;
          xlat = XLAT_TWO;
        end else begin
          mode = conf ? MODE_CHS : MODE_HS;
          xlat = XLAT_SINGLE;
        end
      end
      PRIV_U: begin
        if (v) begin
          mode = conf ? MODE_CVU : MODE_VU;
          xlat = XLAT_TWO;
        end else begin
          mode = conf ? MODE_CU : MODE_U;
          xlat = XLAT_SINGLE;
        end
      end
      default: begin
        mode = MODE_BAD;
        xlat = XLAT_BARE;
      end
    endcase
  end

endmodule
