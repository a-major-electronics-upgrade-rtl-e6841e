// tb_security_interlock: self-checking test of the camera interlock.
// Checks that each fault cause alone removes the drawer power enable and the
// lid-open command, that causes are latched until cleared, that a clear does
// not remove a cause that is still present, that local mode blocks the
// remote lid command, and random sensor sequences against a reference model.
module tb_security_interlock;
  logic clk = 1'b0, rst_n = 1'b0;
  logic smoke, vent_ok, press_ok, light, lid_closed, back_open, local_m;
  logic pwr_req, lid_req, clr;
  logic pwr_en, lid_open, fault;
  logic [4:0] cause;
  int checks = 0, failures = 0;

  security_interlock dut (.clk, .rst_n, .smoke, .ventilation_ok(vent_ok), .pressure_ok(press_ok),
    .ambient_light_high(light), .front_lid_closed(lid_closed), .back_lid_open(back_open),
    .local_mode(local_m), .power_request(pwr_req), .lid_open_request(lid_req), .fault_clear(clr),
    .drawer_power_enable(pwr_en), .remote_lid_open(lid_open), .fault, .fault_cause(cause));

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic safe_sensors();
    smoke = 0; vent_ok = 1; press_ok = 1; light = 0; lid_closed = 1; back_open = 0; local_m = 0;
  endtask

  task automatic tick(int n = 1);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    safe_sensors();
    pwr_req = 1; lid_req = 1; clr = 0;
    tick(2);
    check("reset power", pwr_en, 0);
    rst_n = 1;
    tick(1);
    check("power on", pwr_en, 1);
    check("lid open", lid_open, 1);
    check("no fault", fault, 0);

    for (int c = 0; c < 5; c++) begin
      @(negedge clk);
      case (c)
        0: smoke = 1;
        1: vent_ok = 0;
        2: press_ok = 0;
        3: begin lid_closed = 0; light = 1; end
        4: back_open = 1;
      endcase
      tick(1);
      check($sformatf("cause %0d power off", c), pwr_en, 0);
      check($sformatf("cause %0d lid closing", c), lid_open, 0);
      check($sformatf("cause %0d bit", c), cause, 1 << c);
      @(negedge clk) safe_sensors();
      tick(3);
      check($sformatf("cause %0d latched", c), fault, 1);
      check($sformatf("cause %0d still off", c), pwr_en, 0);
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      tick(1);
      check($sformatf("cause %0d cleared", c), fault, 0);
      check($sformatf("cause %0d power back", c), pwr_en, 1);
    end

    // light with closed lid is no fault
    @(negedge clk) light = 1;
    tick(2);
    check("light lid closed", fault, 0);
    @(negedge clk) light = 0;

    // clear while the cause persists keeps the fault
    @(negedge clk) begin smoke = 1; clr = 1; end
    @(negedge clk) clr = 0;
    tick(2);
    check("persisting cause", fault, 1);
    @(negedge clk) smoke = 0;
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    tick(1);
    check("cleared after", fault, 0);

    // local mode
    @(negedge clk) local_m = 1;
    tick(1);
    check("local mode lid", lid_open, 0);
    check("local mode power", pwr_en, 1);
    @(negedge clk) local_m = 0;

    // random sequences against a model
    begin
      automatic logic [4:0] m_cause = cause;
      automatic logic m_pwr = pwr_en, m_lid = lid_open;
      for (int i = 0; i < 5000; i++) begin
        @(negedge clk);
        smoke = ($urandom_range(0, 40) == 0); vent_ok = ($urandom_range(0, 40) != 0);
        press_ok = ($urandom_range(0, 40) != 0); light = $urandom_range(0, 1);
        lid_closed = ($urandom_range(0, 8) != 0); back_open = ($urandom_range(0, 60) == 0);
        local_m = ($urandom_range(0, 10) == 0); pwr_req = ($urandom_range(0, 10) != 0);
        lid_req = $urandom_range(0, 1); clr = ($urandom_range(0, 5) == 0);
        begin
          automatic logic [4:0] now = {back_open, light & ~lid_closed, ~press_ok, ~vent_ok, smoke};
          automatic logic any = (|now) | (|m_cause);
          m_pwr = pwr_req & ~any;
          m_lid = lid_req & ~any & ~local_m;
          m_cause = clr ? now : (m_cause | now);
        end
        tick(1);
        check("rand cause", cause, m_cause);
        check("rand pwr", pwr_en, m_pwr);
        check("rand lid", lid_open, m_lid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
