// life_pkg -- constants and helper functions shared by the Game of Life array.
//
// Every cell of the world sees exactly eight neighbours (the Moore
// neighbourhood), so a neighbour count needs four bits (0..8). The rules are
// the classic B3/S23 ones: a live cell with two or three live neighbours
// survives, a dead cell with exactly three live neighbours is born, every other
// cell is dead in the next generation.
//
// random_cell() gives the starting pattern used when the world is not handed an
// explicit one. The evaluation runs random worlds; the generator here is this
// design's own choice: a 32-bit integer mixing hash (the finaliser of
// MurmurHash3) over seed and cell index, of which bit 31 is taken. Because it is
// a pure function of (seed, row, col, cols) it is evaluated at elaboration time
// and each cell's reset value becomes a constant.
package life_pkg;

  localparam int unsigned NEIGHBOURS = 8;
  localparam int unsigned COUNT_W    = $clog2(NEIGHBOURS + 1);

  typedef logic [NEIGHBOURS-1:0] neighbours_t;
  typedef logic [COUNT_W-1:0]    count_t;

  // Next state of one cell from its present state and its live-neighbour count.
  function automatic logic next_state(input logic alive, input count_t count);
    return (alive && count == count_t'(2)) || (count == count_t'(3));
  endfunction

  // MurmurHash3 32-bit finaliser.
  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] x;
    x = v;
    x = x ^ (x >> 16);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    x = x * 32'hC2B2_AE35;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Pseudo-random starting state of cell (row, col) in a world COLS wide.
  function automatic logic random_cell(input int unsigned seed, input int unsigned row,
                                       input int unsigned col, input int unsigned cols);
    logic [31:0] idx;
    idx = 32'(row * cols + col);
    return mix32(32'(seed) ^ (idx * 32'h9E37_79B9))[31];
  endfunction

endpackage
