// life_popcount -- population count: how many of the N input bits are 1.
//
// Purely combinational. The count is the sum of the N single-bit inputs, written
// as a plain loop so that synthesis picks the adder tree; for the default N = 8
// (the eight neighbours of a Game of Life cell) the result is 4 bits wide and
// ranges over 0..8. The original design used its HDL library's population count;
// this module does the same job without further structure.
//
// Ports: bits[N-1:0] in, count[$clog2(N+1)-1:0] out, valid in the same cycle.
module life_popcount #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]             bits,
  output logic [$clog2(N+1)-1:0]   count
);

  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < N; i++)
      count = count + $bits(count)'(bits[i]);
  end

endmodule
