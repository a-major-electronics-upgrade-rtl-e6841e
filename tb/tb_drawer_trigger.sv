// tb_drawer_trigger: self-checking test of drawer_trigger.
// Drives random comparator patterns and pixel masks every cycle and checks
// that, SYNC_STAGES+1 = 3 cycles later, count_left/count_right equal the
// number of enabled pixels set in pixels 0..7 and 8..15. Also checks the
// latency of a single pixel edge and the all-on count of 8.
module tb_drawer_trigger;
  import hess_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] comp, en;
  half_count_t cl, cr;
  int checks = 0, failures = 0;

  drawer_trigger dut (.clk, .rst_n, .comp_async(comp), .pix_enable(en),
                      .count_left(cl), .count_right(cr));

  always #5 clk = ~clk;

  function automatic int ones(logic [7:0] v);
    int n = 0;
    for (int i = 0; i < 8; i++) n += int'(v[i]);
    return n;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic [15:0] hist [4];   // pattern history, [0] = newest

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    comp = '0; en = '1;
    for (int i = 0; i < 4; i++) hist[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    check("idle left", int'(cl), 0);
    check("idle right", int'(cr), 0);

    // Latency of one pixel edge: visible after exactly 3 clock edges.
    @(negedge clk) comp = 16'h0100;      // pixel 8, right half
    @(posedge clk); #1;
    check("lat1", int'(cr), 0);
    @(posedge clk); #1;
    check("lat2", int'(cr), 0);
    @(posedge clk); #1;
    check("lat3", int'(cr), 1);
    check("lat3 left", int'(cl), 0);

    @(negedge clk) comp = 16'hFFFF;
    repeat (3) @(posedge clk); #1;
    check("all left", int'(cl), 8);
    check("all right", int'(cr), 8);

    // Random patterns and masks, compared 3 cycles later.
    @(negedge clk);
    for (int i = 0; i < 4; i++) hist[i] = comp;
    for (int n = 0; n < 2000; n++) begin
      comp = 16'($urandom);
      if (n % 100 == 0) en = 16'($urandom);
      @(posedge clk);
      hist[3] = hist[2]; hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = comp;
      #1;
      // after this edge the counts reflect the pattern driven 3 edges ago (hist[2])
      check("rand left", int'(cl), ones(hist[2][7:0] & en[7:0]));
      check("rand right", int'(cr), ones(hist[2][15:8] & en[15:8]));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
