// power_distribution_box: control logic of the 64-channel drawer power switch.
//
// The power distribution box switches the 24 V rail to each drawer and
// constantly monitors the current each drawer draws. This block holds the
// on/off state of the 64 channels, set by slow control, and gates all of
// them with the drawer power enable from the DIB interlock: when the
// interlock drops the enable, every channel goes off at once, and the
// channels come back in their programmed state when it returns. A stream of
// current readings (channel number and value, from the monitoring ADC) is
// stored in a 64-entry current table that slow control can read at any time.
//
// Interface: cfg_we/cfg_ch/cfg_on write one channel's state; mon_valid/
// mon_ch/mon_current deliver readings; rd_ch selects a table entry,
// rd_current returns it one cycle later. ch_on[63:0] drive the switches.
// Timing: ch_on follows enable and configuration one cycle later.
//
// From the paper: 64 channels, switching, per-drawer current monitoring and
// the DIB "Drawer Power Enable". The slow-control register interface, the
// 12-bit reading width and the readout port are this design's choices; the
// paper does not say what the box does with the readings, so no automatic
// over-current trip is built.
module power_distribution_box
  import hess_pkg::*;
#(
  parameter int unsigned NCH   = PDB_CHANNELS,
  parameter int unsigned CUR_W = 12,
  localparam int unsigned CH_W = $clog2(NCH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             drawer_power_enable,
  input  logic             cfg_we,
  input  logic [CH_W-1:0]  cfg_ch,
  input  logic             cfg_on,
  input  logic             mon_valid,
  input  logic [CH_W-1:0]  mon_ch,
  input  logic [CUR_W-1:0] mon_current,
  input  logic [CH_W-1:0]  rd_ch,
  output logic [CUR_W-1:0] rd_current,
  output logic [NCH-1:0]   ch_on
);

  logic [NCH-1:0]   ch_cfg;
  logic [CUR_W-1:0] cur_table [NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch_cfg <= '0;
      ch_on  <= '0;
    end else begin
      if (cfg_we) ch_cfg[cfg_ch] <= cfg_on;
      ch_on <= drawer_power_enable ? ch_cfg : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (mon_valid) cur_table[mon_ch] <= mon_current;
    rd_current <= cur_table[rd_ch];
  end

endmodule
