// hess_pkg: constants, types and the trigger-sector geometry shared by the
// camera trigger and control blocks.
//
// Camera layout (from the paper): 60 drawers of 16 pixels each occupy the
// central positions of a 9 x 8 drawer matrix. Every drawer reports two
// trigger signals, one per half (8 pixels). The trigger is an N-majority over
// 38 overlapping sectors of 64 pixels; sectors overlap by one half-drawer in
// width and by one full drawer in height, so a half-drawer feeds at most four
// sectors.
//
// Choices of this design where the paper gives no detail:
//  * The matrix is 9 drawer columns wide and 8 rows high. Rows 0 and 7 hold
//    columns 2..6, rows 1 and 6 hold columns 1..7, rows 2..5 are full
//    (5+7+4*9+7+5 = 60 drawers). Drawers are numbered row by row.
//  * A nominal sector is 2 drawers (4 half-drawer columns) wide and 2 rows
//    high = 8 half-drawers = 64 pixels. Windows start every 3 half-columns
//    (overlap of one half-drawer) and every row (overlap of one drawer):
//    6 x 7 = 42 windows. Windows with fewer than 4 populated half-drawers
//    (the four corner windows, 1 or 2 each) are dropped, leaving 38 sectors,
//    which matches the paper's count. Edge sectors are partially populated.
//  * Half-drawer h = 2*drawer + side, side 0 = left (pixels 0..7),
//    side 1 = right (pixels 8..15).
package hess_pkg;

  localparam int unsigned N_DRAWERS       = 60;
  localparam int unsigned PIX_PER_DRAWER  = 16;
  localparam int unsigned PIX_PER_HALF    = PIX_PER_DRAWER / 2;
  localparam int unsigned N_HALF          = 2 * N_DRAWERS;      // 120 trigger signals
  localparam int unsigned MATRIX_COLS     = 9;
  localparam int unsigned MATRIX_ROWS     = 8;
  localparam int unsigned N_SECTORS       = 38;
  localparam int unsigned SECTOR_HCOLS    = 4;                  // half-drawer columns per sector
  localparam int unsigned SECTOR_ROWS     = 2;
  localparam int unsigned SECTOR_HSTRIDE  = 3;                  // overlap of one half-drawer
  localparam int unsigned SECTOR_MIN_HALF = 4;                  // drop windows below this
  localparam int unsigned MV_PER_PIXEL    = 33;                 // trigger pulse height step
  localparam int unsigned TRIG_CLK_MHZ    = 800;                // comparator sampling clock
  localparam int unsigned PDB_CHANNELS    = 64;

  typedef logic [3:0]  half_count_t;    // 0..8 pixels above threshold in a half-drawer
  typedef logic [15:0] mv_t;            // pulse height / analog level in millivolts
  typedef logic [N_HALF-1:0] half_mask_t;

  // Is drawer matrix position (row, col) populated?
  function automatic bit drawer_present(int row, int col);
    if (row < 0 || row >= int'(MATRIX_ROWS) || col < 0 || col >= int'(MATRIX_COLS)) return 1'b0;
    if (row == 0 || row == int'(MATRIX_ROWS) - 1) return (col >= 2 && col <= 6);
    if (row == 1 || row == int'(MATRIX_ROWS) - 2) return (col >= 1 && col <= 7);
    return 1'b1;
  endfunction

  // Drawer number of a populated position (row-major over populated positions).
  function automatic int drawer_index(int row, int col);
    int n = 0;
    for (int r = 0; r < int'(MATRIX_ROWS); r++)
      for (int c = 0; c < int'(MATRIX_COLS); c++) begin
        if (r == row && c == col) return n;
        if (drawer_present(r, c)) n++;
      end
    return -1;
  endfunction

  // Half-drawer membership of every sector, sector s in row s of the result.
  typedef logic [N_SECTORS-1:0][N_HALF-1:0] sector_map_t;

  function automatic sector_map_t build_sector_map();
    sector_map_t m = '0;
    int s = 0;
    for (int r = 0; r + int'(SECTOR_ROWS) <= int'(MATRIX_ROWS); r++)
      for (int h0 = 0; h0 < 2 * int'(MATRIX_COLS); h0 += int'(SECTOR_HSTRIDE)) begin
        half_mask_t w = '0;
        int n = 0;
        for (int rr = r; rr < r + int'(SECTOR_ROWS); rr++)
          for (int hc = h0; hc < h0 + int'(SECTOR_HCOLS); hc++)
            if (hc < 2 * int'(MATRIX_COLS) && drawer_present(rr, hc / 2)) begin
              w[2 * drawer_index(rr, hc / 2) + (hc % 2)] = 1'b1;
              n++;
            end
        if (n >= int'(SECTOR_MIN_HALF) && s < int'(N_SECTORS)) begin
          m[s] = w;
          s++;
        end
      end
    return m;
  endfunction

  localparam sector_map_t SECTOR_MAP = build_sector_map();

  // The same map as a list of at most 8 half-drawer numbers per sector,
  // NO_MEMBER marking unused slots (for logic that sums per sector).
  localparam int unsigned SECTOR_MAX_HALF = SECTOR_HCOLS * SECTOR_ROWS;   // 8
  localparam logic [7:0]  NO_MEMBER       = 8'hFF;
  typedef logic [N_SECTORS-1:0][SECTOR_MAX_HALF-1:0][7:0] sector_list_t;

  function automatic sector_list_t build_sector_list(sector_map_t m);
    sector_list_t l = '1;
    for (int s = 0; s < int'(N_SECTORS); s++) begin
      int k = 0;
      for (int h = 0; h < int'(N_HALF); h++)
        if (m[s][h] && k < int'(SECTOR_MAX_HALF)) begin
          l[s][k] = 8'(h);
          k++;
        end
    end
    return l;
  endfunction

  localparam sector_list_t SECTOR_LIST = build_sector_list(SECTOR_MAP);

endpackage
