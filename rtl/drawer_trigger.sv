// drawer_trigger: pixel trigger logic of one drawer FPGA.
//
// Each of the 16 pixels of a drawer has a comparator on its analog board
// whose output goes straight into the drawer FPGA. The FPGA samples these
// outputs at 800 MHz and, every sample, counts the pixels above threshold in
// the left half (pixels 0..7) and in the right half (pixels 8..15). The two
// counts drive the two analog trigger pulses that the drawer sends to the
// Drawer Interface Box (see trigger_dac). Sampling at 800 MHz quantises the
// pixel timing to 1.25 ns, the jitter figure the paper quotes.
//
// Interface: comp_async[15:0] from the comparators (asynchronous), a 16-bit
// pixel enable mask from slow control, count_left/count_right (0..8).
// Timing: SYNC_STAGES synchroniser flops, then one register for the counts,
// so a comparator edge reaches the counts SYNC_STAGES+1 cycles later.
//
// The paper gives the sampling rate and the left/right counting. The
// two-flop synchroniser, the pixel-to-half assignment and the per-pixel
// enable mask (so that a noisy pixel can be left out) are choices of this
// design.
module drawer_trigger
  import hess_pkg::*;
#(
  parameter int unsigned NPIX        = PIX_PER_DRAWER,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic              clk,          // 800 MHz sampling clock
  input  logic              rst_n,
  input  logic [NPIX-1:0]   comp_async,   // pixel comparator outputs
  input  logic [NPIX-1:0]   pix_enable,   // 1 = pixel takes part in the trigger
  output half_count_t       count_left,
  output half_count_t       count_right
);

  logic [NPIX-1:0] sync_q [SYNC_STAGES];
  logic [NPIX-1:0] pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(SYNC_STAGES); i++) sync_q[i] <= '0;
    end else begin
      sync_q[0] <= comp_async;
      for (int i = 1; i < int'(SYNC_STAGES); i++) sync_q[i] <= sync_q[i-1];
    end
  end

  assign pix = sync_q[SYNC_STAGES-1] & pix_enable;

  function automatic half_count_t popcount_half(logic [NPIX/2-1:0] v);
    half_count_t n = '0;
    for (int i = 0; i < int'(NPIX/2); i++) n += half_count_t'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_left  <= '0;
      count_right <= '0;
    end else begin
      count_left  <= popcount_half(pix[NPIX/2-1:0]);
      count_right <= popcount_half(pix[NPIX-1:NPIX/2]);
    end
  end

endmodule
