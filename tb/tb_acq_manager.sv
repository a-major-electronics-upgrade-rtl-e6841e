// tb_acq_manager: self-checking test of the acquisition manager.
// With MIN_INTERVAL = 50 it checks: readout_start comes 3 cycles after a
// trigger edge and lasts one cycle; busy lasts exactly MIN_INTERVAL cycles;
// triggers during busy are lost and counted; busy is extended by
// drawer_busy; nothing is accepted while disabled; and a random trigger
// sequence gives the accepted/lost counts of a reference model.
module tb_acq_manager;
  localparam int unsigned MI = 50;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en, trg, dbusy;
  logic start, busy;
  logic [31:0] acc, lost;
  int checks = 0, failures = 0;

  acq_manager #(.MIN_INTERVAL(MI)) dut (.clk, .rst_n, .enable(en), .camera_trigger(trg),
    .drawer_busy(dbusy), .readout_start(start), .busy, .accepted(acc), .lost(lost));

  always #5 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse the trigger input for 2 cycles
  task automatic pulse();
    @(negedge clk) trg = 1'b1;
    @(negedge clk);
    @(negedge clk) trg = 1'b0;
  endtask

  initial begin
    int t0, t1, n_start, n_busy;
    en = 1'b1; trg = 1'b0; dbusy = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // latency and busy length
    @(negedge clk) trg = 1'b1;
    n_start = 0; n_busy = 0; t1 = -1;
    for (int c = 1; c <= MI + 20; c++) begin
      @(posedge clk); #1;
      if (c == 2) trg = 1'b0;
      if (start) begin n_start++; t1 = c; end
      if (busy) n_busy++;
    end
    check("start latency", t1, 3);
    check("start count", n_start, 1);
    check("busy cycles", n_busy, MI);
    check("accepted", acc, 1);
    check("lost", lost, 0);

    // trigger during busy is lost
    pulse();
    repeat (10) @(posedge clk);
    pulse();
    repeat (MI + 10) @(posedge clk);
    #1;
    check("accepted2", acc, 2);
    check("lost2", lost, 1);

    // drawer_busy extends busy
    pulse();
    @(negedge clk) dbusy = 1'b1;
    repeat (MI + 30) @(posedge clk);
    #1;
    check("held busy", busy, 1);
    @(negedge clk) dbusy = 1'b0;
    repeat (2) @(posedge clk);
    #1;
    check("released", busy, 0);

    // disabled: no readout, nothing counted
    en = 1'b0;
    pulse();
    repeat (10) @(posedge clk);
    #1;
    check("disabled busy", busy, 0);
    check("disabled acc", acc, 3);
    en = 1'b1;

    // random sequence against a reference model
    begin
      automatic longint exp_acc = acc, exp_lost = lost;
      automatic int busy_left = 0;
      automatic logic [2:0] q = 3'b000;
      for (int c = 0; c < 20000; c++) begin
        @(negedge clk) trg = ($urandom_range(0, 15) == 0) ? ~trg : trg;
        @(posedge clk);
        // model: same synchroniser and edge detect, evaluated before this edge
        begin
          automatic logic edge_now = q[1] & ~q[2];
          if (busy_left == 0 && edge_now) begin exp_acc++; busy_left = MI; end
          else if (busy_left > 0) begin
            if (edge_now) exp_lost++;
            busy_left--;
          end
          q = {q[1:0], trg};
        end
      end
      #1;
      check("rand accepted", acc, exp_acc);
      check("rand lost", lost, exp_lost);
      check("rand some lost", (exp_lost > 5) ? 1 : 0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
