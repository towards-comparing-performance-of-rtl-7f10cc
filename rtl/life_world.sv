// life_world -- Conway's Game of Life as a fully parallel array of cells (top).
//
// The world is a ROWS x COLS grid with one life_cell per grid position. Each
// cell's eight neighbour inputs are wired to the outputs of the cells around
// it; inputs that would reach outside the grid are tied to the constant 0 when
// the array is generated, so the world is surrounded by permanently dead cells
// and no boundary test exists at run time. All cells update together, so the
// whole world advances by one generation on every rising clock edge.
//
// Starting pattern: on reset each cell loads a constant fixed when the array is
// built. With USE_INIT_PATTERN = 1 the pattern is INIT_PATTERN, bit r*COLS + c
// being cell (r, c); otherwise it is the pseudo-random world
// life_pkg::random_cell(SEED, r, c, COLS). Reset-to-pattern follows the
// original design; the random generator, the SEED parameter and the flat
// pattern vector are this design's choices.
//
// Neighbour order presented to each cell (bit index: row offset, col offset):
//   0:(-1,-1) 1:(-1,0) 2:(-1,+1) 3:(0,-1) 4:(0,+1) 5:(+1,-1) 6:(+1,0) 7:(+1,+1)
// The order does not matter to the cell, which only counts ones.
//
// Ports:
//   clk    one generation per rising edge
//   rst    synchronous, active high; loads the starting pattern
//   world  present state, world[r][c] = 1 when cell (r, c) is alive; row 0 is
//          the top row, column 0 the left column
//
// Timing: after the cycle in which rst is high, world shows generation 0; after
// k further rising edges with rst low it shows generation k. Defaults are the
// largest world evaluated, 100 x 100 = 10000 cells.
module life_world
  import life_pkg::*;
#(
  parameter int unsigned               ROWS             = 100,
  parameter int unsigned               COLS             = 100,
  parameter int unsigned               SEED             = 1,
  parameter bit                        USE_INIT_PATTERN = 1'b0,
  parameter logic [ROWS*COLS-1:0]      INIT_PATTERN     = (ROWS*COLS)'(0)
) (
  input  logic                          clk,
  input  logic                          rst,
  output logic [ROWS-1:0][COLS-1:0]     world
);

  // Cell states as an unpacked grid, one driver per element.
  logic grid [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam bit CELL_INIT = USE_INIT_PATTERN ? INIT_PATTERN[r*COLS + c]
                                                  : random_cell(SEED, r, c, COLS);
      neighbours_t nb;

      for (genvar k = 0; k < NEIGHBOURS; k++) begin : g_nb
        // Offsets of neighbour k, skipping the centre (0, 0).
        localparam int DR = (k < 3) ? -1 : (k < 5) ? 0 : 1;
        localparam int DC = (k == 0 || k == 3 || k == 5) ? -1 :
                            (k == 1 || k == 6)           ?  0 : 1;
        localparam int NR = r + DR;
        localparam int NC = c + DC;
        if (NR >= 0 && NR < int'(ROWS) && NC >= 0 && NC < int'(COLS)) begin : g_in
          assign nb[k] = grid[NR][NC];
        end else begin : g_edge
          assign nb[k] = 1'b0;
        end
      end

      life_cell #(.INIT(CELL_INIT)) u_cell (
        .clk        (clk),
        .rst        (rst),
        .neighbours (nb),
        .alive      (grid[r][c])
      );

      assign world[r][c] = grid[r][c];
    end
  end

endmodule
