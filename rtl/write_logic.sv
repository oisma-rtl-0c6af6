// write_logic: the per-column driver of the complementary bitline BLb.
//
// In the paper BLb has a pull-down (M9) and, for writes, an extra pull-up
// (M8); two multiplexers selected by the write enable WE choose what controls
// them. With WE = 0 the pull-up is held off (its select input is VDD) and the
// pull-down follows Pre_en, so BLb is pre-discharged in the first phase of a
// read or AND and floats in the second. With WE = 1 both follow IN, so BLb is
// discharged when IN = 1 and charged when IN = 0: BL and BLb are driven in
// opposite directions and the bitcell on the active wordline is programmed to
// IN. The resulting drive states are those of the paper's control table; the
// pull-up being on when its select is 0 is what that table implies.
// Combinational; one instance per column. It takes the whole shared control
// word and uses WE and Pre_en; lint reports S, Sb and R as unused here.
module write_logic
  import oisma_pkg::*;
(
  input  ctrl_t     ctrl,
  input  logic      in_bit,
  output bl_drive_e blb
);
  logic pu_sel_n, pd_sel;   // outputs of the two multiplexers
  assign pu_sel_n = ctrl.we ? in_bit : 1'b1;        // 0: VDD, 1: IN
  assign pd_sel   = ctrl.we ? in_bit : ctrl.pre_en; // 0: Pre_en, 1: IN

  always_comb begin
    if (!pu_sel_n)   blb = BL_CHARGE;
    else if (pd_sel) blb = BL_DISCHARGE;
    else             blb = BL_FLOAT;
  end
endmodule
