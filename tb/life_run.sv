// life_run -- drives one life_world of a given size through a run and checks it
// generation by generation against the reference model in life_ref_pkg.
//
// Sequence, started by go: reset, check the world equals the seeded starting
// pattern; then GENS generations, each of which must appear after exactly one
// rising clock edge; halfway through, reset is raised for one cycle and the
// world must return to generation 0 and continue from there. While it runs it
// tallies, from the reference model, how often each rule fired: births,
// survivals, deaths from under- and overpopulation, births on the world's edge
// (where missing neighbours must count as dead), and resets.
module life_run #(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8,
  parameter int unsigned SEED = 1,
  parameter int unsigned GENS = 50
) (
  input  logic clk,
  input  logic go,
  output logic done,
  output int   checks,
  output int   failures,
  output int   births,
  output int   survivals,
  output int   deaths_under,
  output int   deaths_over,
  output int   edge_births,
  output int   resets
);
  import life_ref_pkg::*;
  typedef life_ref #(ROWS, COLS) ref_t;

  logic rst;
  logic [ROWS-1:0][COLS-1:0] world;
  ref_t::world_t exp_w, nxt_w;

  life_world #(.ROWS(ROWS), .COLS(COLS), .SEED(SEED)) dut (
    .clk(clk), .rst(rst), .world(world)
  );

  task automatic check_world(string what);
    checks++;
    if (world !== exp_w) begin
      int bad = 0;
      for (int r = 0; r < int'(ROWS); r++)
        for (int c = 0; c < int'(COLS); c++)
          if (world[r][c] !== exp_w[r][c]) bad++;
      failures++;
      $display("FAIL %0dx%0d %s: %0d cells differ", ROWS, COLS, what, bad);
    end
  endtask

  task automatic tally(ref_t::world_t a, ref_t::world_t b);
    for (int r = 0; r < int'(ROWS); r++)
      for (int c = 0; c < int'(COLS); c++) begin
        int unsigned n = ref_t::count(a, r, c);
        if (!a[r][c] && b[r][c]) begin
          births++;
          if (r == 0 || c == 0 || r == int'(ROWS) - 1 || c == int'(COLS) - 1) edge_births++;
        end
        if (a[r][c] && b[r][c]) survivals++;
        if (a[r][c] && !b[r][c] && n < 2) deaths_under++;
        if (a[r][c] && !b[r][c] && n > 3) deaths_over++;
      end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; births = 0; survivals = 0;
    deaths_under = 0; deaths_over = 0; edge_births = 0; resets = 0;
    rst = 1;
    wait (go);
    @(posedge clk); #1;
    exp_w = ref_t::seeded(SEED);
    check_world("generation 0 after reset");
    rst = 0;
    for (int g = 1; g <= int'(GENS); g++) begin
      if (g == int'(GENS) / 2) begin
        rst = 1;
        @(posedge clk); #1;
        rst = 0;
        resets++;
        exp_w = ref_t::seeded(SEED);
        check_world("generation 0 after mid-run reset");
      end
      nxt_w = ref_t::step(exp_w);
      tally(exp_w, nxt_w);
      exp_w = nxt_w;
      @(posedge clk); #1;
      check_world($sformatf("generation %0d", g));
    end
    done = 1;
  end
endmodule
