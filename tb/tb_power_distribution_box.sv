// tb_power_distribution_box: self-checking test of the drawer power switch.
// Programs random channel states, checks that ch_on follows them while the
// drawer power enable is high and that every channel is off while it is low,
// and writes random current readings and reads them back from the table.
module tb_power_distribution_box;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en, we, on, mv;
  logic [5:0] ch, mch, rch;
  logic [11:0] cur, rcur;
  logic [63:0] ch_on;
  int checks = 0, failures = 0;

  power_distribution_box dut (.clk, .rst_n, .drawer_power_enable(en), .cfg_we(we), .cfg_ch(ch),
    .cfg_on(on), .mon_valid(mv), .mon_ch(mch), .mon_current(cur), .rd_ch(rch),
    .rd_current(rcur), .ch_on);

  always #5 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic logic [63:0] model = '0;
    logic [11:0] table_m [64];
    en = 0; we = 0; on = 0; mv = 0; ch = 0; mch = 0; rch = 0; cur = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check("reset off", ch_on, 0);

    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); ch = 6'($urandom); on = $urandom_range(0, 1);
      en = ($urandom_range(0, 7) != 0);
      mv = 1'b0;
      if (we) model[ch] = on;
      @(posedge clk); #1;
      // ch_on registers the state programmed before this edge, so check one later
      @(negedge clk) we = 0;
      @(posedge clk); #1;
      check("ch_on", ch_on, en ? model : 64'h0);
    end

    // current table
    for (int c = 0; c < 64; c++) begin
      @(negedge clk) begin mv = 1; mch = 6'(c); cur = 12'($urandom); table_m[c] = cur; end
    end
    @(negedge clk) mv = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 1)) begin
        mv = 1; mch = 6'($urandom); cur = 12'($urandom);
      end else mv = 0;
      rch = 6'($urandom);
      @(posedge clk);
      #1;
      check("current", rcur, table_m[rch]);
      if (mv) table_m[mch] = cur;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
