// trigger_dac: behavioural model of the analog pulse driver of one
// half-drawer trigger signal.
//
// The drawer FPGA's pixel count of a half-drawer leaves the drawer as an
// analog pulse whose height is 33 mV per pixel above threshold (paper), sent
// differentially over the Cat.6a cable to the Drawer Interface Box. This is an
// analog output stage, so it is given here as a behavioural model: the pulse
// height is an integer number of millivolts and follows the count without
// delay (cable and driver delay are not modelled; the paper routes all
// trigger signals isochronously, so a common delay changes nothing).
//
// Interface: count (0..8) in, height_mv out. Combinational.
module trigger_dac
  import hess_pkg::*;
#(
  parameter int unsigned STEP_MV = MV_PER_PIXEL
) (
  input  half_count_t count,
  output mv_t         height_mv
);

  assign height_mv = mv_t'(count) * mv_t'(STEP_MV);

endmodule
