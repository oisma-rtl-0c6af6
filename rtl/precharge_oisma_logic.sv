// precharge_oisma_logic: the per-column "pre-charge / OISMA" logic that sets
// the bitline BL before the bitcell is sensed.
//
// The paper's column circuit lets the input bit IN (passed when S is high) or
// the read enable R (passed when Sb is high) select between pre-charging BL to
// the high level V_PCH and pre-discharging it to the low level V_PCL; with
// neither passed BL is left floating. The mapping below reproduces every row
// of the paper's control table:
//   node = (S & IN) | (Sb & R)
//   BL   = node ? Charge : (S ? Discharge : Floating)
// so a read pre-charges BL (R = 1), an AND pre-charges it only when IN = 1 and
// pre-discharges it when IN = 0, a write drives it from IN, and the second
// phase (S = 0, R = 0) leaves it floating for sensing. The equations are this
// design's fit to the table, not a transcription of transistors.
// Combinational; one instance per column. The module takes the whole shared
// control word, of which it uses S, Sb and R; lint reports WE and Pre_en as
// unused here.
module precharge_oisma_logic
  import oisma_pkg::*;
(
  input  ctrl_t     ctrl,
  input  logic      in_bit,
  output bl_drive_e bl
);
  logic node;
  assign node = (ctrl.s & in_bit) | (ctrl.sb & ctrl.r);

  always_comb begin
    if (node)        bl = BL_CHARGE;
    else if (ctrl.s) bl = BL_DISCHARGE;
    else             bl = BL_FLOAT;
  end
endmodule
