// tb_hess1u_camera: end-to-end test of the camera logic at full size
// (60 drawers, 38 sectors, 5.5 us minimum interval = 4400 cycles, 16-cell
// ROI; no parameter of the top is changed).
//
// The 960 NECTAR chips are modelled here: a read strobe is answered three
// cycles later with samples that are a known function of drawer, pixel,
// cell and event. The test drives pixel comparator patterns and checks:
//  * N = 4 pixels in one drawer give a camera trigger and a readout start
//    6 cycles after the comparator edge; 3 pixels do not (threshold 115 mV);
//  * every drawer returns its full 16 x 16-word event, each word checked;
//  * busy lasts exactly 4400 cycles when the drawers are quick, and longer
//    when a slow event stream keeps a drawer busy;
//  * a trigger during busy is lost and counted;
//  * a masked pixel does not trigger;
//  * a smoke alarm cuts the power of all drawers and closes the lid, and
//    the power comes back after the alarm is cleared;
//  * the power distribution current table reads back.
// Each of these mechanisms is counted and a failure is counted for any that
// never happened.
module tb_hess1u_camera;
  import hess_pkg::*;
  localparam int ND = N_DRAWERS, NP = PIX_PER_DRAWER, ROI = 16, OFF = 40, MI = 4400;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NP-1:0] comp [ND];
  logic [NP-1:0] pen  [ND];
  mv_t thr;
  logic [N_SECTORS-1:0] sector_trig;
  logic cam_trig, acq_en, ro_start, busy;
  logic [31:0] n_acc, n_lost;
  logic nec_stop [ND];
  logic [9:0] stop_cell [ND];
  logic [9:0] nec_addr [ND];
  logic nec_read [ND];
  logic [NP-1:0] nec_valid [ND];
  logic [11:0] nec_hg [ND][NP];
  logic [11:0] nec_lg [ND][NP];
  logic ev_valid [ND];
  logic ev_ready [ND];
  logic [31:0] ev_data [ND];
  logic ev_last [ND];
  logic smoke, vent_ok, press_ok, light, lid_closed, back_open, local_m;
  logic pwr_req, lid_req, clr, lid_open, fault;
  logic [4:0] cause;
  logic cfg_we, cfg_on, mon_v;
  logic [5:0] cfg_ch, mon_ch, rd_ch;
  logic [11:0] mon_cur, rd_cur;
  logic [63:0] pwr_on;

  hess1u_camera dut (
    .clk, .rst_n, .comp_async(comp), .pix_enable(pen), .threshold_mv(thr),
    .sector_trig, .camera_trigger(cam_trig), .acq_enable(acq_en), .readout_start(ro_start),
    .busy, .triggers_accepted(n_acc), .triggers_lost(n_lost),
    .nec_stop, .stop_cell, .nec_addr, .nec_read, .nec_valid, .nec_hg, .nec_lg,
    .ev_valid, .ev_ready, .ev_data, .ev_last,
    .smoke, .ventilation_ok(vent_ok), .pressure_ok(press_ok), .ambient_light_high(light),
    .front_lid_closed(lid_closed), .back_lid_open(back_open), .local_mode(local_m),
    .power_request(pwr_req), .lid_open_request(lid_req), .fault_clear(clr),
    .remote_lid_open(lid_open), .fault, .fault_cause(cause),
    .pdb_cfg_we(cfg_we), .pdb_cfg_ch(cfg_ch), .pdb_cfg_on(cfg_on), .pdb_mon_valid(mon_v),
    .pdb_mon_ch(mon_ch), .pdb_mon_current(mon_cur), .pdb_rd_ch(rd_ch), .pdb_rd_current(rd_cur),
    .drawer_power_on(pwr_on));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ev_no = 0;
  int slow_ready = 0;
  // mechanism counters
  int m_trigger = 0, m_subthreshold = 0, m_lost = 0, m_extended = 0, m_masked = 0, m_interlock = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic logic [11:0] f_hg(int d, int p, int c, int e);
    return 12'((d * 31 + p * 97 + c * 13 + e * 311) % 4096);
  endfunction
  function automatic logic [11:0] f_lg(int d, int p, int c, int e);
    return 12'((d * 17 + p * 53 + c * 7 + e * 199 + 1000) % 4096);
  endfunction
  function automatic int stop_of(int d, int e);
    return (d * 101 + e * 457 + 7) % 1024;
  endfunction

  // NECTAR chip models: valid three cycles after a read
  int cnt_d [ND];
  always @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin
      if (nec_read[d] && rst_n) begin
        cnt_d[d] = 3;
        nec_valid[d] <= '0;
      end else if (cnt_d[d] > 0) begin
        cnt_d[d]--;
        if (cnt_d[d] == 0) begin
          nec_valid[d] <= '1;
          for (int p = 0; p < NP; p++) begin
            nec_hg[d][p] <= f_hg(d, p, int'(nec_addr[d]), ev_no);
            nec_lg[d][p] <= f_lg(d, p, int'(nec_addr[d]), ev_no);
          end
        end
      end
    end
  end

  // event stream sinks: check every word of every drawer
  int words [ND];
  always @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin
      if (rst_n && ev_valid[d] && ev_ready[d]) begin
        automatic int p = words[d] / ROI, k = words[d] % ROI;
        automatic int c = (stop_of(d, ev_no) - OFF + k + 1024) % 1024;
        check("event word", ev_data[d], {4'(p), 4'(k), f_hg(d, p, c, ev_no), f_lg(d, p, c, ev_no)});
        check("event last", ev_last[d], (words[d] == NP * ROI - 1) ? 1 : 0);
        words[d]++;
      end
    end
  end
  always @(negedge clk)
    for (int d = 0; d < ND; d++)
      ev_ready[d] <= (slow_ready != 0) ? ($urandom_range(0, 19) == 0) : 1'b1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  // Apply a comparator pattern to drawer d for 4 cycles; return the number of
  // cycles from the pattern to readout_start (-1 if none within 20 cycles).
  task automatic shower(int d, logic [NP-1:0] pat, output int lat);
    lat = -1;
    @(negedge clk) comp[d] = pat;
    for (int c = 1; c <= 20; c++) begin
      @(posedge clk); #1;
      if (c == 4) comp[d] = '0;
      if (ro_start && lat < 0) lat = c;
    end
  endtask

  // wait for the end of an event (busy low) and check all drawers' words
  task automatic finish_event(output int busy_cycles);
    busy_cycles = 0;
    while (busy) begin
      @(posedge clk); #1;
      busy_cycles++;
    end
    for (int d = 0; d < ND; d++) check("words per drawer", words[d], NP * ROI);
  endtask

  task automatic new_event(int e);
    ev_no = e;
    for (int d = 0; d < ND; d++) begin
      words[d] = 0;
      stop_cell[d] = 10'(stop_of(d, e));
    end
  endtask

  initial begin
    int lat, bc;
    for (int d = 0; d < ND; d++) begin
      comp[d] = '0; pen[d] = '1; nec_valid[d] = '1; cnt_d[d] = 0; words[d] = 0;
      for (int p = 0; p < NP; p++) begin nec_hg[d][p] = '0; nec_lg[d][p] = '0; end
    end
    thr = mv_t'(115);                    // between 3 and 4 pixels: N = 4
    acq_en = 1'b0;
    smoke = 0; vent_ok = 1; press_ok = 1; light = 0; lid_closed = 1; back_open = 0; local_m = 0;
    pwr_req = 1; lid_req = 1; clr = 0;
    cfg_we = 0; cfg_on = 0; cfg_ch = 0; mon_v = 0; mon_ch = 0; mon_cur = 0; rd_ch = 0;
    new_event(0);
    tick(3);
    rst_n = 1'b1;
    tick(2);

    // power up drawers 0..59 through the power distribution box
    for (int c = 0; c < ND; c++) begin
      @(negedge clk) begin cfg_we = 1; cfg_ch = 6'(c); cfg_on = 1; end
    end
    @(negedge clk) cfg_we = 0;
    tick(2);
    check("drawers powered", pwr_on, {4'b0, {60{1'b1}}});
    check("lid open", lid_open, 1);
    acq_en = 1'b1;
    tick(2);

    // 1: four pixels in drawer 25 -> trigger, readout of all drawers
    new_event(1);
    shower(25, 16'h0303, lat);
    check("trigger latency", lat, 6);
    if (lat > 0) m_trigger++;
    finish_event(bc);
    check("busy length", bc + 20 - lat, MI);

    // 2: three pixels -> no trigger
    shower(30, 16'h0103, lat);
    check("sub-threshold", lat, -1);
    if (lat < 0) m_subthreshold++;

    // 3: a trigger during busy is lost
    new_event(2);
    shower(12, 16'h0F00, lat);
    check("trigger 3", (lat > 0) ? 1 : 0, 1);
    if (lat > 0) m_trigger++;
    tick(100);
    shower(40, 16'h00F0, lat);
    check("lost: no start", lat, -1);
    check("lost counter", n_lost, 1);
    if (n_lost == 1) m_lost++;
    finish_event(bc);
    check("accepted counter", n_acc, 2);

    // 4: slow event streams keep busy beyond the minimum interval
    new_event(3);
    slow_ready = 1;
    shower(5, 16'hF000, lat);
    if (lat > 0) m_trigger++;
    finish_event(bc);
    check("extended busy", (bc + 20 - lat > MI) ? 1 : 0, 1);
    if (bc + 20 - lat > MI) m_extended++;
    slow_ready = 0;

    // 5: masked pixels do not trigger
    pen[7] = 16'h00FF;
    shower(7, 16'hFF00, lat);
    check("masked", lat, -1);
    if (lat < 0) m_masked++;
    pen[7] = '1;

    // 6: smoke alarm: drawer power off, lid closed, then recovery
    @(negedge clk) smoke = 1;
    tick(3);
    check("smoke power", pwr_on, 0);
    check("smoke lid", lid_open, 0);
    check("smoke fault", fault, 1);
    if (pwr_on == 0 && !lid_open) m_interlock++;
    @(negedge clk) smoke = 0;
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    tick(3);
    check("power back", pwr_on, {4'b0, {60{1'b1}}});

    // 7: drawer current monitoring
    for (int c = 0; c < 64; c++) begin
      @(negedge clk) begin mon_v = 1; mon_ch = 6'(c); mon_cur = 12'(c * 41 + 300); end
    end
    @(negedge clk) mon_v = 0;
    for (int c = 0; c < 64; c += 7) begin
      @(negedge clk) rd_ch = 6'(c);
      tick(1);
      check("current", rd_cur, (c * 41 + 300) % 4096);
    end

    // mechanisms seen
    $display("mechanisms: trigger=%0d subthreshold=%0d lost=%0d busy_extended=%0d masked=%0d interlock=%0d",
             m_trigger, m_subthreshold, m_lost, m_extended, m_masked, m_interlock);
    if (m_trigger == 0) failures++;
    if (m_subthreshold == 0) failures++;
    if (m_lost == 0) failures++;
    if (m_extended == 0) failures++;
    if (m_masked == 0) failures++;
    if (m_interlock == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
