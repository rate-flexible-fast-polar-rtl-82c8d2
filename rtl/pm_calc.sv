// pm_calc: path-metric update of one path for the special nodes.
//
// The paper's PM calculation (its Fig. 6) holds a Rate-1, a Rep and an SPC
// unit for each value of the estimated bit and one Rate-0 unit shared by
// both, with a multiplexer per bit value. This module is that structure for
// one path. The PM grows by |alpha| each time a bit is decided against the
// sign of its LLR (LLR-based path metric of Fast-SSCL-SPC decoding):
//   Rate-0  (op R0)     : pm0 = pm + sum_{alpha_k < 0} |alpha_k|
//   Rep     (op REP)    : pm0 = pm + sum_{alpha_k < 0} |alpha_k|   (all 0)
//                         pm1 = pm + sum_{alpha_k > 0} |alpha_k|   (all 1)
//   Rate-1  (op R1_EST) : pm0 = pm (keep hard decision)
//                         pm1 = pm + |alpha_j| (flip bit j)
//   SPC init(op SPC_SORT, first step): pm0 = pm + parity * |alpha_min|
//   SPC     (op SPC_EST): pm0 = pm
//                         pm1 = pm + |alpha_j| + |alpha_min| if parity = 0
//                               pm + |alpha_j| - |alpha_min| if parity = 1
// Here bit 0/1 means "hypothesis 0/1" of the Rep information bit, or
// "keep/flip" of the hard decision of bit j in Rate-1/SPC nodes. The Rate-1
// and SPC rules are taken from the Fast-SSCL-SPC algorithm the paper builds
// on, not spelt out in the paper itself. Sums are over the T = 2^t LLRs of
// the node; additions saturate at 2^QPM - 1. Combinational.
module pm_calc
  import rf_pkg::*;
#(
  parameter int unsigned NPE = 64
) (
  input  op_e             op,
  input  logic [STW-1:0]  t,
  input  pm_t             pm_in,
  input  llr_t            alpha [NPE],
  input  logic [MAGW-1:0] mag_sel,   // |alpha_j| of the bit being estimated
  input  logic [MAGW-1:0] mag_min,   // least reliable |alpha| of the node
  input  logic            parity,    // current parity of an SPC path
  output pm_t             pm0,
  output pm_t             pm1
);

  logic [QPM:0] sum_neg, sum_pos;
  pm_t          r0_pm, rep0_pm, rep1_pm, r1_flip_pm, spc_init_pm, spc_flip_pm;

  always_comb begin
    sum_neg = '0;
    sum_pos = '0;
    for (int k = 0; k < NPE; k++)
      if (k < (32'd1 << t)) begin
        if (alpha[k].s) sum_neg = sum_neg + (QPM+1)'(alpha[k].m);
        else            sum_pos = sum_pos + (QPM+1)'(alpha[k].m);
      end

    r0_pm       = pm_add(pm_in, sum_neg);
    rep0_pm     = r0_pm;
    rep1_pm     = pm_add(pm_in, sum_pos);
    r1_flip_pm  = pm_add(pm_in, (QPM+1)'(mag_sel));
    spc_init_pm = parity ? pm_add(pm_in, (QPM+1)'(mag_min)) : pm_in;
    if (parity) begin
      // the flip repairs the parity: the least reliable bit no longer flips
      spc_flip_pm = pm_add(pm_in, (QPM+1)'(mag_sel));
      spc_flip_pm = (spc_flip_pm >= pm_t'(mag_min)) ? spc_flip_pm - pm_t'(mag_min) : '0;
    end else begin
      spc_flip_pm = pm_add(pm_in, (QPM+1)'(mag_sel) + (QPM+1)'(mag_min));
    end

    unique case (op)
      OP_R0:       begin pm0 = r0_pm;       pm1 = r0_pm;       end
      OP_REP:      begin pm0 = rep0_pm;     pm1 = rep1_pm;     end
      OP_R1_EST:   begin pm0 = pm_in;       pm1 = r1_flip_pm;  end
      OP_SPC_SORT: begin pm0 = spc_init_pm; pm1 = spc_init_pm; end
      OP_SPC_EST:  begin pm0 = pm_in;       pm1 = spc_flip_pm; end
      default:     begin pm0 = pm_in;       pm1 = pm_in;       end
    endcase
  end

endmodule
