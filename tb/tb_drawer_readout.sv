// tb_drawer_readout: self-checking test of the NECTAR readout controller.
// The 16 chips are modelled here: after a read strobe each chip raises
// nec_valid a random 2..7 cycles later with high- and low-gain samples that
// are a known function of chip, cl and event number. For several events
// with random stop cells (including ones that wrap round the 1024-cl
// memory) the test checks the ROI cl addresses, that reads happen only
// while sampling is stopped, every word of the event (pixel, cl, both
// gains) under random back-pressure, ev_last, and busy.
module tb_drawer_readout;
  localparam int NPIX = 16, ROI = 16, OFF = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, stop, rd;
  logic [9:0] stop_cell, addr;
  logic [NPIX-1:0] valid;
  logic [11:0] hg [NPIX];
  logic [11:0] lg [NPIX];
  logic ev_valid, ev_ready, ev_last;
  logic [31:0] ev_data;
  int checks = 0, failures = 0;
  int ev_no = 0;

  drawer_readout #(.ROI_OFFSET(OFF)) dut (.clk, .rst_n, .readout_start(start), .busy,
    .nec_stop(stop), .stop_cell, .nec_addr(addr), .nec_read(rd), .nec_valid(valid),
    .nec_hg(hg), .nec_lg(lg), .ev_valid, .ev_ready, .ev_data, .ev_last);

  always #5 clk = ~clk;

  function automatic logic [11:0] f_hg(int p, int cl, int ev);
    return 12'((p * 97 + cl * 13 + ev * 311) % 4096);
  endfunction
  function automatic logic [11:0] f_lg(int p, int cl, int ev);
    return 12'((p * 53 + cl * 7 + ev * 199 + 1000) % 4096);
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // chip models
  int wait_left [NPIX];
  int addr_seen [$];
  always @(posedge clk) begin
    if (rd && rst_n) begin
      addr_seen.push_back(int'(addr));
      if (!stop) begin failures++; $display("FAIL read while sampling"); end
    end
    for (int p = 0; p < NPIX; p++) begin
      if (rd) begin
        valid[p] <= 1'b0;
        wait_left[p] = $urandom_range(2, 7);
      end else if (wait_left[p] > 0) begin
        wait_left[p]--;
        if (wait_left[p] == 0) begin
          valid[p] <= 1'b1;
          hg[p] <= f_hg(p, int'(addr), ev_no);
          lg[p] <= f_lg(p, int'(addr), ev_no);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; ev_ready = 0; stop_cell = 0;
    for (int p = 0; p < NPIX; p++) begin valid[p] = 1; hg[p] = 0; lg[p] = 0; wait_left[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int e = 0; e < 6; e++) begin
      automatic int sc = (e == 0) ? 5 : (e == 1) ? 1023 : $urandom_range(0, 1023);
      automatic int start_cell = (sc - OFF + 1024) % 1024;
      automatic int words = 0;
      ev_no = e;
      addr_seen.delete();
      @(negedge clk) begin start = 1; stop_cell = 10'(sc); end
      @(negedge clk) start = 0;
      #1 check("busy", busy, 1);
      check("stopped", stop, 1);
      while (words < NPIX * ROI) begin
        @(negedge clk) ev_ready = $urandom_range(0, 1);
        @(posedge clk);
        if (ev_valid && ev_ready) begin
          automatic int p = words / ROI, k = words % ROI;
          automatic int cl = (start_cell + k) % 1024;
          check($sformatf("ev%0d word %0d", e, words), ev_data,
                {4'(p), 4'(k), f_hg(p, cl, e), f_lg(p, cl, e)});
          check("last", ev_last, (words == NPIX * ROI - 1) ? 1 : 0);
          check("resumed", stop, 0);
          words++;
        end
      end
      @(posedge clk); #1;
      check("idle", busy, 0);
      check("reads", addr_seen.size(), ROI);
      for (int k = 0; k < addr_seen.size(); k++)
        check($sformatf("ev%0d addr %0d", e, k), addr_seen[k], (start_cell + k) % 1024);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
