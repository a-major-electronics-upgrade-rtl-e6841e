// analog_trigger_board: behavioural model of the DIB analog trigger board
// ("38 supercluster trigger circuits").
//
// The 120 half-drawer trigger pulses (height 33 mV per pixel above
// threshold) are routed isochronously to 38 overlapping sectors of 64 pixels.
// Each sector forms the analog sum of its half-drawer pulses; a comparator
// per sector compares the sum with one common threshold, set to correspond to
// N pixels fired. The 38 comparator outputs are ORed into the camera trigger.
// With 33 mV per pixel, a threshold of (N - 1/2) * 33 mV fires on N pixels
// in a sector and never on N-1.
//
// The real board is analog. This model works on integer millivolts, with an
// ideal (noise-free, zero-delay) sum and comparator: sector_trig[s] is 1 when
// the sum of sector s is strictly above threshold_mv. The sector geometry is
// hess_pkg::SECTOR_MAP (the paper gives the sector size, count and overlap;
// the exact placement is this design's reconstruction, see hess_pkg).
//
// Interface: half_mv[120] in, threshold_mv in, sector_trig[38] and
// camera_trigger out. Combinational.
module analog_trigger_board
  import hess_pkg::*;
#(
  parameter sector_list_t MEMBERS = SECTOR_LIST
) (
  input  mv_t                  half_mv [N_HALF],
  input  mv_t                  threshold_mv,
  output logic [N_SECTORS-1:0] sector_trig,
  output logic                 camera_trigger
);

  typedef logic [19:0] sum_t;     // 8 inputs of 16 bits need 19 bits

  always_comb begin
    for (int s = 0; s < int'(N_SECTORS); s++) begin
      automatic sum_t sum = '0;
      for (int k = 0; k < int'(SECTOR_MAX_HALF); k++)
        if (MEMBERS[s][k] != NO_MEMBER) sum += sum_t'(half_mv[MEMBERS[s][k][6:0]]);
      sector_trig[s] = (sum > sum_t'(threshold_mv));
    end
  end

  assign camera_trigger = |sector_trig;

endmodule
