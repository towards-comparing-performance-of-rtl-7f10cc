// life_ref_pkg -- software reference model of the Game of Life world, for the
// testbenches.
//
// life_ref#(ROWS, COLS) works on a world packed as [ROWS-1:0][COLS-1:0]
// (w[r][c] = 1 when alive). step() computes the next generation the way a
// straightforward program does: it copies the world into an array one cell
// larger on every side whose border stays dead, counts the eight neighbours of
// every inner cell and applies the rules. seeded() rebuilds the pseudo-random
// starting world (MurmurHash3 finaliser over seed ^ index * 0x9E3779B9, bit 31)
// with 64-bit arithmetic, independently of the RTL's package.
package life_ref_pkg;

  class life_ref #(int unsigned ROWS = 4, int unsigned COLS = 4);
    typedef logic [ROWS-1:0][COLS-1:0] world_t;

    static function int unsigned count(const ref world_t w, input int r, input int c);
      int unsigned n = 0;
      for (int dr = -1; dr <= 1; dr++)
        for (int dc = -1; dc <= 1; dc++)
          if (!(dr == 0 && dc == 0) && r + dr >= 0 && r + dr < int'(ROWS)
              && c + dc >= 0 && c + dc < int'(COLS))
            n += w[r+dr][c+dc];
      return n;
    endfunction

    static function world_t step(world_t w);
      bit curr [ROWS+2][COLS+2];
      world_t nxt;
      foreach (curr[i, j]) curr[i][j] = 0;
      for (int i = 0; i < int'(ROWS); i++)
        for (int j = 0; j < int'(COLS); j++)
          curr[i+1][j+1] = w[i][j];
      for (int i = 1; i <= int'(ROWS); i++)
        for (int j = 1; j <= int'(COLS); j++) begin
          int cnt = 0;
          for (int k = -1; k <= 1; k++) begin
            cnt += int'(curr[i-1][j+k]);
            cnt += int'(curr[i+1][j+k]);
          end
          cnt += int'(curr[i][j-1]);
          cnt += int'(curr[i][j+1]);
          nxt[i-1][j-1] = ((curr[i][j] == 1 && cnt == 2) || cnt == 3);
        end
      return nxt;
    endfunction

    static function world_t seeded(int unsigned seed);
      world_t w;
      for (int unsigned r = 0; r < ROWS; r++)
        for (int unsigned c = 0; c < COLS; c++) begin
          longint unsigned x, idx;
          idx = 64'(r * COLS + c);
          x = (64'(seed) ^ ((idx * 64'h9E3779B9) & 64'hFFFF_FFFF));
          x = x ^ (x >> 16);
          x = (x * 64'h85EBCA6B) & 64'hFFFF_FFFF;
          x = x ^ (x >> 13);
          x = (x * 64'hC2B2AE35) & 64'hFFFF_FFFF;
          x = x ^ (x >> 16);
          w[r][c] = x[31];
        end
      return w;
    endfunction
  endclass

endpackage
