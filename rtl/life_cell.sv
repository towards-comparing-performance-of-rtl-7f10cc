// life_cell -- one cell of the Game of Life world.
//
// A cell is a single flip-flop holding alive (1) or dead (0), a population
// count of its eight neighbour inputs and the rule that decides the next state:
// the cell is alive in the next generation if it has exactly three live
// neighbours, or if it is alive now and has exactly two. This is the structure
// the original design describes (one register, one population count, the
// survive/birth condition per cell).
//
// Ports:
//   clk         rising edge advances the cell by one generation
//   rst         synchronous, active high; loads INIT (the cell's part of the
//               starting pattern). A synchronous active-high reset matches the
//               default register reset of the HDL the original was written in;
//               the reset style itself is this design's choice.
//   neighbours  the present states of the eight surrounding cells, in any
//               order; a neighbour outside the world is tied to 0 by the caller
//   alive       present state, straight from the flip-flop
//
// Timing: one generation per clock, no latency beyond the register.
module life_cell
  import life_pkg::*;
#(
  parameter bit INIT = 1'b0
) (
  input  logic        clk,
  input  logic        rst,
  input  neighbours_t neighbours,
  output logic        alive
);

  count_t count;

  life_popcount #(.N(NEIGHBOURS)) u_popcount (
    .bits  (neighbours),
    .count (count)
  );

  always_ff @(posedge clk) begin
    if (rst) alive <= INIT;
    else     alive <= next_state(alive, count);
  end

endmodule
