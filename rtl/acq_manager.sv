// acq_manager: acquisition management and trigger control of the Drawer
// Interface Box.
//
// A camera trigger from the analog trigger board stops the sampling of the
// NECTAR analogue memories in all drawers, which are then read out. The
// paper gives a minimum safe interval of about 5.5 us between two events,
// set by the way the FPGA reads the chips; this interval is the camera dead
// time. This block accepts a trigger only when the camera is enabled and not
// busy, then sends a one-cycle readout_start to all drawers and holds busy
// for MIN_INTERVAL cycles (5.5 us at 800 MHz = 4400 cycles) and for as long
// as any drawer still reports drawer_busy. Triggers arriving while busy are
// lost and counted, so the dead-time fraction can be measured.
//
// Interface: camera_trigger (asynchronous level, taken on its rising edge
// after a two-flop synchroniser), enable, drawer_busy; readout_start,
// busy, accepted and lost counters.
// Timing: readout_start rises 3 cycles after the trigger edge (two
// synchroniser flops and one edge-detect flop); busy rises with it and falls
// MIN_INTERVAL cycles later at the earliest. A new trigger can be accepted
// in the cycle after busy falls.
//
// The 5.5 us interval and the stop-on-trigger behaviour follow the paper; the
// synchroniser, the single clock, the drawer_busy extension and the counters
// are choices of this design.
module acq_manager
  import hess_pkg::*;
#(
  parameter int unsigned MIN_INTERVAL = 4400,   // 5.5 us * 800 MHz
  parameter int unsigned CNT_W        = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,          // run control: acquisition on
  input  logic             camera_trigger,  // from the analog trigger board
  input  logic             drawer_busy,     // some drawer still reading out
  output logic             readout_start,   // stop sampling and read out (1 cycle)
  output logic             busy,
  output logic [CNT_W-1:0] accepted,
  output logic [CNT_W-1:0] lost
);

  localparam int unsigned TW = $clog2(MIN_INTERVAL + 1);

  logic [2:0]    trg_q;
  logic          trg_edge;
  logic [TW-1:0] timer;
  logic          take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trg_q <= '0;
    else        trg_q <= {trg_q[1:0], camera_trigger};
  end

  assign trg_edge = trg_q[1] & ~trg_q[2];
  assign take     = trg_edge & enable & ~busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer         <= '0;
      busy          <= 1'b0;
      readout_start <= 1'b0;
      accepted      <= '0;
      lost          <= '0;
    end else begin
      readout_start <= take;
      if (take) begin
        busy     <= 1'b1;
        timer    <= TW'(MIN_INTERVAL - 1);
        accepted <= accepted + 1'b1;
      end else if (busy) begin
        if (timer != '0) timer <= timer - 1'b1;
        else if (!drawer_busy) busy <= 1'b0;
        if (trg_edge && enable) lost <= lost + 1'b1;
      end
    end
  end

  // A readout is only ever started when the camera was idle.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    take |-> !busy);

endmodule
