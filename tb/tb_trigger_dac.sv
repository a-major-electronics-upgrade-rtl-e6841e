// tb_trigger_dac: checks that every count 0..8 gives a pulse height of
// 33 mV per pixel.
module tb_trigger_dac;
  import hess_pkg::*;
  half_count_t cnt;
  mv_t mv;
  int checks = 0, failures = 0;

  trigger_dac dut (.count(cnt), .height_mv(mv));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= 8; n++) begin
      cnt = half_count_t'(n);
      #1;
      checks++;
      if (int'(mv) != 33 * n) begin
        failures++;
        $display("FAIL count %0d: %0d mV", n, mv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
