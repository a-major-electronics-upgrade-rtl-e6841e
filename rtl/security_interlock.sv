// security_interlock: camera safety interlock in the DIB FPGA.
//
// The interlock evaluates the camera sensors. On an error or failure it cuts
// the drawer power (the "Drawer Power Enable" line to the power distribution
// box) and closes the camera lid (it drops the "remote front lid open"
// command to the pneumatic lid control). Faults are latched: power and lid
// stay safe until slow control clears the fault and the cause has gone.
//
// Fault causes (bit order of fault_cause):
//   0 smoke detected                  (smoke detector)
//   1 ventilation not OK              ("Ventilation OK" line)
//   2 pneumatic pressure not OK       ("Contact pressure ok")
//   3 ambient light too high while the front lid is not closed
//                                     (ambient light sensor, as a flag)
//   4 back door (back lid) open       ("Contact back-lid open")
// The signal names follow the DIB connections of the paper's architecture
// figure; which of them count as faults, the latching and the local-mode rule
// (in local mode the remote lid command is not driven) are this design's
// choices, since the paper only says that the interlock evaluates the sensor
// inputs.
//
// Interface: sensor levels (synchronous to clk, assumed already debounced),
// slow-control requests power_request, lid_open_request and fault_clear.
// Timing: a fault removes drawer_power_enable and remote_lid_open one cycle
// after the sensor input shows it.
module security_interlock #(
  parameter int unsigned N_CAUSES = 5
) (
  input  logic                clk,
  input  logic                rst_n,
  // sensors and contacts
  input  logic                smoke,
  input  logic                ventilation_ok,
  input  logic                pressure_ok,
  input  logic                ambient_light_high,
  input  logic                front_lid_closed,
  input  logic                back_lid_open,
  input  logic                local_mode,
  // slow control
  input  logic                power_request,
  input  logic                lid_open_request,
  input  logic                fault_clear,
  // outputs
  output logic                drawer_power_enable,
  output logic                remote_lid_open,
  output logic                fault,
  output logic [N_CAUSES-1:0] fault_cause
);

  logic [N_CAUSES-1:0] now;

  always_comb begin
    now    = '0;
    now[0] = smoke;
    now[1] = ~ventilation_ok;
    now[2] = ~pressure_ok;
    now[3] = ambient_light_high & ~front_lid_closed;
    now[4] = back_lid_open;
  end

  // Latched causes; a clear removes only causes that are no longer present.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fault_cause <= '0;
    else if (fault_clear) fault_cause <= now;
    else fault_cause <= fault_cause | now;
  end

  logic fault_any;
  assign fault_any = (|now) | (|fault_cause);
  assign fault     = |fault_cause;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drawer_power_enable <= 1'b0;
      remote_lid_open     <= 1'b0;
    end else begin
      drawer_power_enable <= power_request & ~fault_any;
      remote_lid_open     <= lid_open_request & ~fault_any & ~local_mode;
    end
  end

  // Whenever a fault is latched, the camera is held safe.
  a_safe_on_fault: assert property (@(posedge clk) disable iff (!rst_n)
    fault |=> !drawer_power_enable && !remote_lid_open);

endmodule
