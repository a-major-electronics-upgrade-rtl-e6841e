// tb_analog_trigger_board: self-checking test of the sector sum, comparator
// and OR model.
// The expected sector sums come from a geometry built here from drawer
// coordinates (9 x 8 matrix, 2 x 2-drawer windows every 3 half-columns and
// every row, windows with fewer than 4 populated half-drawers dropped),
// independently of the package tables. Checks: 38 sectors, every
// half-drawer in 1 to 4 sectors, 64-pixel nominal sectors; the N-majority
// rule (N pixels fire with threshold (N-1/2)*33 mV, N-1 do not) in every
// sector; and random pulse patterns against the model.
module tb_analog_trigger_board;
  import hess_pkg::*;

  mv_t half_mv [N_HALF];
  mv_t thr;
  logic [N_SECTORS-1:0] st;
  logic cam;
  int checks = 0, failures = 0;

  analog_trigger_board dut (.half_mv, .threshold_mv(thr), .sector_trig(st), .camera_trigger(cam));

  // independent geometry
  int half_row [N_HALF];
  int half_col [N_HALF];   // half-drawer column 0..17
  int sec_row  [$];
  int sec_col  [$];

  function automatic bit pop(int r, int c);
    int first, last;
    case (r)
      0, 7:    begin first = 2; last = 6; end
      1, 6:    begin first = 1; last = 7; end
      default: begin first = 0; last = 8; end
    endcase
    return c >= first && c <= last;
  endfunction

  function automatic bit in_sector(int s, int h);
    return half_row[h] >= sec_row[s] && half_row[h] <= sec_row[s] + 1 &&
           half_col[h] >= sec_col[s] && half_col[h] <= sec_col[s] + 3;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic clear();
    for (int h = 0; h < int'(N_HALF); h++) half_mv[h] = '0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int d = 0;
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 9; c++)
        if (pop(r, c)) begin
          half_row[2*d] = r;   half_col[2*d] = 2*c;
          half_row[2*d+1] = r; half_col[2*d+1] = 2*c + 1;
          d++;
        end
    check("drawers", d, 60);
    for (int r = 0; r < 7; r++)
      for (int c0 = 0; c0 < 18; c0 += 3) begin
        automatic int n = 0;
        for (int h = 0; h < int'(N_HALF); h++)
          if (half_row[h] >= r && half_row[h] <= r + 1 && half_col[h] >= c0 && half_col[h] <= c0 + 3) n++;
        if (n >= 4) begin sec_row.push_back(r); sec_col.push_back(c0); end
      end
    check("sectors", sec_row.size(), 38);

    // coverage of each half-drawer and sector size
    begin
      automatic int maxc = 0, minc = 99, full = 0;
      for (int h = 0; h < int'(N_HALF); h++) begin
        automatic int c = 0;
        for (int s = 0; s < sec_row.size(); s++) c += int'(in_sector(s, h));
        if (c > maxc) maxc = c;
        if (c < minc) minc = c;
      end
      for (int s = 0; s < sec_row.size(); s++) begin
        automatic int n = 0;
        for (int h = 0; h < int'(N_HALF); h++) n += int'(in_sector(s, h));
        if (n == 8) full++;
      end
      check("max sectors per half", maxc, 4);
      check("min sectors per half", (minc >= 1) ? 1 : 0, 1);
      check("some 64-pixel sectors", (full > 0) ? 1 : 0, 1);
    end

    // N-majority in every sector: N pixels spread over the sector fire it,
    // N-1 do not, for N = 2..5
    for (int n = 2; n <= 5; n++) begin
      thr = mv_t'((2 * n - 1) * 33 / 2);
      for (int s = 0; s < int'(N_SECTORS); s++) begin
        for (int k = n - 1; k <= n; k++) begin
          automatic int left = k;
          clear();
          for (int h = 0; h < int'(N_HALF) && left > 0; h++)
            if (in_sector(s, h)) begin
              half_mv[h] = half_mv[h] + 33;
              left--;
              if (left > 0) begin half_mv[h] = half_mv[h] + 33; left--; end
            end
          #1;
          check($sformatf("sector %0d N=%0d k=%0d", s, n, k), int'(st[s]), (k >= n) ? 1 : 0);
          check("or", int'(cam), (k >= n) ? 1 : 0);
        end
      end
    end

    // random pulse patterns, few pixels per half
    for (int it = 0; it < 3000; it++) begin
      thr = mv_t'($urandom_range(20, 300));
      for (int h = 0; h < int'(N_HALF); h++)
        half_mv[h] = ($urandom_range(0, 9) == 0) ? mv_t'(33 * $urandom_range(1, 8)) : '0;
      #1;
      begin
        automatic logic any = 1'b0;
        for (int s = 0; s < int'(N_SECTORS); s++) begin
          automatic int sum = 0;
          for (int h = 0; h < int'(N_HALF); h++) if (in_sector(s, h)) sum += int'(half_mv[h]);
          check($sformatf("rand sector %0d", s), int'(st[s]), (sum > int'(thr)) ? 1 : 0);
          any |= (sum > int'(thr));
        end
        check("rand or", int'(cam), int'(any));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
