// olsc_mcu: one lane of the metrics computation unit (MCU).
//
// Combinational. From the decision LLR `lam` of bit u_i of a path and the
// path's metric `pm`, it forms the metrics of the two extensions of the path:
// the extension that agrees with the hard decision of lam keeps pm, the other
// one adds |lam| (the LLR-domain path metric used by hardware list decoders).
// lam = 0 counts as a hard decision of 0. Sums saturate at the metric maximum.
// Lower metric means a more likely path. The paper names the MCU only; the
// metric rule is the customary one. The design has one lane per stage-1 PU
// copy, i.e. per list path, because several paths can finish a bit in the
// same cycle.
module olsc_mcu
  import olsc_pkg::*;
(
  input  llr_t lam,
  input  pm_t  pm,
  output pm_t  pm0,
  output pm_t  pm1,
  output logic hard
);
  logic [LLR_W-2:0] mag;
  always_comb begin
    mag  = llr_abs(lam);
    hard = lam[LLR_W-1];
    pm0  = hard ? pm_add(pm, mag) : pm;
    pm1  = hard ? pm : pm_add(pm, mag);
  end
endmodule
