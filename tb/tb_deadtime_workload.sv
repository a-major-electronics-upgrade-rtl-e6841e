// tb_deadtime_workload: dead time of the camera at a typical coincidence
// trigger rate.
//
// Camera triggers arrive at random (exponential spacing) with a mean rate of
// 1.5 kHz, the array rate that is common when these telescopes trigger
// together with the large central telescope. The same trigger sequence
// drives two acquisition managers at 800 MHz:
//  * the one of this design, minimum interval 5.5 us (4400 cycles);
//  * one set to 450 us (360000 cycles), the readout time of the cameras
//    before the upgrade, for comparison.
// For each, the accepted and lost counts are compared with a reference
// model of a non-paralysable dead time, and the lost fraction is checked:
// below 3 % for 5.5 us (expected 1 - 1/(1 + 1.5 kHz * 5.5 us) = 0.8 %), at
// least 30 % for 450 us (expected 40 %).
module tb_deadtime_workload;
  localparam real RATE_HZ = 1500.0;
  localparam real CLK_HZ  = 800.0e6;
  localparam int  NTRIG   = 400;
  localparam int unsigned NEW_INT = 4400;
  localparam int unsigned OLD_INT = 360000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic trg = 1'b0;
  logic s_new, b_new, s_old, b_old;
  logic [31:0] acc_new, lost_new, acc_old, lost_old;
  int checks = 0, failures = 0;

  acq_manager dut_new (.clk, .rst_n, .enable(1'b1), .camera_trigger(trg), .drawer_busy(1'b0),
    .readout_start(s_new), .busy(b_new), .accepted(acc_new), .lost(lost_new));
  acq_manager #(.MIN_INTERVAL(OLD_INT)) dut_old (.clk, .rst_n, .enable(1'b1), .camera_trigger(trg),
    .drawer_busy(1'b0), .readout_start(s_old), .busy(b_old), .accepted(acc_old), .lost(lost_old));

  always #5 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (400_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t = 0;                       // cycle of the current trigger edge
    longint free_new = 0, free_old = 0;  // first cycle at which a trigger is taken again
    longint m_acc_new = 0, m_lost_new = 0, m_acc_old = 0, m_lost_old = 0;
    real f_new, f_old;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    for (int i = 0; i < NTRIG; i++) begin
      automatic real u = (real'($urandom_range(1, 1000000))) / 1000000.0;
      automatic int gap = int'(-$ln(u) * CLK_HZ / RATE_HZ);
      if (gap < 8) gap = 8;              // a trigger pulse and its gap take 8 cycles
      repeat (gap - 4) @(posedge clk);
      t += gap;
      // reference model: a trigger is taken if the previous accepted one is
      // at least MIN_INTERVAL + 1 cycles earlier (busy, then one free cycle)
      if (t >= free_new) begin m_acc_new++; free_new = t + NEW_INT + 1; end else m_lost_new++;
      if (t >= free_old) begin m_acc_old++; free_old = t + OLD_INT + 1; end else m_lost_old++;
      @(negedge clk) trg = 1'b1;
      repeat (2) @(negedge clk);
      trg = 1'b0;
      @(posedge clk);
    end
    repeat (10) @(posedge clk);
    check("accepted 5.5us", acc_new, m_acc_new);
    check("lost 5.5us", lost_new, m_lost_new);
    check("accepted 450us", acc_old, m_acc_old);
    check("lost 450us", lost_old, m_lost_old);
    f_new = real'(lost_new) / real'(NTRIG);
    f_old = real'(lost_old) / real'(NTRIG);
    $display("1.5 kHz: lost fraction %0.2f %% at 5.5 us, %0.2f %% at 450 us", 100.0 * f_new, 100.0 * f_old);
    check("new dead time below 3 %", (f_new < 0.03) ? 1 : 0, 1);
    check("old dead time at least 30 %", (f_old >= 0.30) ? 1 : 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
