// hess1u_camera: trigger, readout-control and safety logic of an upgraded
// H.E.S.S. I camera (60 drawers of 16 pixels, one Drawer Interface Box,
// one power distribution box).
//
// Signal path: the 16 pixel comparators of every drawer are sampled at
// 800 MHz by the drawer FPGA (drawer_trigger), which counts the pixels above
// threshold in each drawer half. Each count leaves the drawer as an analog
// pulse of 33 mV per pixel (trigger_dac, behavioural). In the DIB the 120
// pulses are summed over 38 overlapping 64-pixel sectors, each sum is
// compared with the common threshold and the comparators are ORed into the
// camera trigger (analog_trigger_board, behavioural). The acquisition
// manager (acq_manager) turns an accepted trigger into a readout command to
// all drawers and keeps the camera busy for the minimum 5.5 us between events
// and until every drawer has sent its event. Each drawer then stops its
// NECTAR analogue memories and reads a 16-cell region of interest
// (drawer_readout). Independently, the DIB interlock (security_interlock)
// watches the camera sensors and can cut the drawer power, which the power
// distribution box (power_distribution_box) applies to its 64 channels.
//
// Ports: everything that leaves the logic described here is a port: the pixel
// comparators, the NECTAR chips (one set of ports per drawer), the event
// streams towards the drawer computers, the sensors and contacts, the slow
// control requests and the power switch outputs.
// Clock: one clock, the 800 MHz trigger sampling clock, drives all logic in
// this model (a single clock domain is this design's simplification).
module hess1u_camera
  import hess_pkg::*;
#(
  parameter int unsigned MIN_INTERVAL = 4400,   // 5.5 us at 800 MHz
  parameter int unsigned ROI_LEN      = 16,
  parameter int unsigned ROI_OFFSET   = 40,
  localparam int unsigned NPIX        = PIX_PER_DRAWER,
  localparam int unsigned CELL_W      = 10,     // 1024-cell analogue memory
  localparam int unsigned ADC_W       = 12,
  localparam int unsigned WORD_W      = $clog2(NPIX) + $clog2(ROI_LEN) + 2 * ADC_W,
  localparam int unsigned CH_W        = $clog2(PDB_CHANNELS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // drawer front end
  input  logic [NPIX-1:0]         comp_async   [N_DRAWERS],
  input  logic [NPIX-1:0]         pix_enable   [N_DRAWERS],
  // trigger
  input  mv_t                     threshold_mv,
  output logic [N_SECTORS-1:0]    sector_trig,
  output logic                    camera_trigger,
  // acquisition
  input  logic                    acq_enable,
  output logic                    readout_start,
  output logic                    busy,
  output logic [31:0]             triggers_accepted,
  output logic [31:0]             triggers_lost,
  // NECTAR chips, per drawer
  output logic                    nec_stop     [N_DRAWERS],
  input  logic [CELL_W-1:0]       stop_cell    [N_DRAWERS],
  output logic [CELL_W-1:0]       nec_addr     [N_DRAWERS],
  output logic                    nec_read     [N_DRAWERS],
  input  logic [NPIX-1:0]         nec_valid    [N_DRAWERS],
  input  logic [ADC_W-1:0]        nec_hg       [N_DRAWERS][NPIX],
  input  logic [ADC_W-1:0]        nec_lg       [N_DRAWERS][NPIX],
  // event streams, per drawer
  output logic                    ev_valid     [N_DRAWERS],
  input  logic                    ev_ready     [N_DRAWERS],
  output logic [WORD_W-1:0]       ev_data      [N_DRAWERS],
  output logic                    ev_last      [N_DRAWERS],
  // interlock sensors, contacts and slow control
  input  logic                    smoke,
  input  logic                    ventilation_ok,
  input  logic                    pressure_ok,
  input  logic                    ambient_light_high,
  input  logic                    front_lid_closed,
  input  logic                    back_lid_open,
  input  logic                    local_mode,
  input  logic                    power_request,
  input  logic                    lid_open_request,
  input  logic                    fault_clear,
  output logic                    remote_lid_open,
  output logic                    fault,
  output logic [4:0]              fault_cause,
  // power distribution box
  input  logic                    pdb_cfg_we,
  input  logic [CH_W-1:0]         pdb_cfg_ch,
  input  logic                    pdb_cfg_on,
  input  logic                    pdb_mon_valid,
  input  logic [CH_W-1:0]         pdb_mon_ch,
  input  logic [11:0]             pdb_mon_current,
  input  logic [CH_W-1:0]         pdb_rd_ch,
  output logic [11:0]             pdb_rd_current,
  output logic [PDB_CHANNELS-1:0] drawer_power_on
);

  half_count_t hcount [N_HALF];
  mv_t         half_mv [N_HALF];
  logic [N_DRAWERS-1:0] rd_busy;
  logic        drawer_power_enable;

  for (genvar d = 0; d < int'(N_DRAWERS); d++) begin : g_drawer
    drawer_trigger u_trig (
      .clk, .rst_n,
      .comp_async  (comp_async[d]),
      .pix_enable  (pix_enable[d]),
      .count_left  (hcount[2*d]),
      .count_right (hcount[2*d+1])
    );

    trigger_dac u_dac_l (.count(hcount[2*d]),   .height_mv(half_mv[2*d]));
    trigger_dac u_dac_r (.count(hcount[2*d+1]), .height_mv(half_mv[2*d+1]));

    drawer_readout #(.ROI_LEN(ROI_LEN), .ROI_OFFSET(ROI_OFFSET)) u_readout (
      .clk, .rst_n,
      .readout_start,
      .busy      (rd_busy[d]),
      .nec_stop  (nec_stop[d]),
      .stop_cell (stop_cell[d]),
      .nec_addr  (nec_addr[d]),
      .nec_read  (nec_read[d]),
      .nec_valid (nec_valid[d]),
      .nec_hg    (nec_hg[d]),
      .nec_lg    (nec_lg[d]),
      .ev_valid  (ev_valid[d]),
      .ev_ready  (ev_ready[d]),
      .ev_data   (ev_data[d]),
      .ev_last   (ev_last[d])
    );
  end

  analog_trigger_board u_atb (
    .half_mv,
    .threshold_mv,
    .sector_trig,
    .camera_trigger
  );

  acq_manager #(.MIN_INTERVAL(MIN_INTERVAL)) u_acq (
    .clk, .rst_n,
    .enable         (acq_enable),
    .camera_trigger,
    .drawer_busy    (|rd_busy),
    .readout_start,
    .busy,
    .accepted       (triggers_accepted),
    .lost           (triggers_lost)
  );

  security_interlock u_ilk (
    .clk, .rst_n,
    .smoke, .ventilation_ok, .pressure_ok, .ambient_light_high,
    .front_lid_closed, .back_lid_open, .local_mode,
    .power_request, .lid_open_request, .fault_clear,
    .drawer_power_enable,
    .remote_lid_open,
    .fault,
    .fault_cause
  );

  power_distribution_box u_pdb (
    .clk, .rst_n,
    .drawer_power_enable,
    .cfg_we      (pdb_cfg_we),
    .cfg_ch      (pdb_cfg_ch),
    .cfg_on      (pdb_cfg_on),
    .mon_valid   (pdb_mon_valid),
    .mon_ch      (pdb_mon_ch),
    .mon_current (pdb_mon_current),
    .rd_ch       (pdb_rd_ch),
    .rd_current  (pdb_rd_current),
    .ch_on       (drawer_power_on)
  );

endmodule
