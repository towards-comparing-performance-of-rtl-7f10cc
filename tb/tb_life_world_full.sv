// tb_life_world_full -- the Game of Life array at its default size, 100 x 100
// cells with the default pseudo-random starting world, run for 200 generations.
//
// After reset the world must equal the seeded starting pattern; after each
// further rising clock edge it must equal the next generation computed by the
// reference model, i.e. one full-world update per clock cycle. The run also
// counts births, survivals, deaths from under- and overpopulation and births
// on the edge of the world, and fails if any of them never happened.
module tb_life_world_full;
  import life_ref_pkg::*;
  localparam int unsigned ROWS = 100, COLS = 100, SEED = 1, GENS = 200;
  typedef life_ref #(ROWS, COLS) ref_t;

  logic clk = 0, rst;
  logic [ROWS-1:0][COLS-1:0] world;
  ref_t::world_t exp_w, nxt_w;
  int checks = 0, failures = 0;
  int births = 0, survivals = 0, deaths_under = 0, deaths_over = 0, edge_births = 0;

  life_world dut (.clk(clk), .rst(rst), .world(world));

  always #5 clk = ~clk;

  initial begin
    repeat (GENS + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_world(string what);
    checks++;
    if (world !== exp_w) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic need(string what, int n);
    $display("  %-28s %0d", what, n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    int live;
    rst = 1;
    @(posedge clk); #1;
    exp_w = ref_t::seeded(SEED);
    check_world("generation 0 after reset");
    live = $countones(world);
    $display("generation 0: %0d of %0d cells alive", live, ROWS * COLS);
    rst = 0;
    for (int g = 1; g <= int'(GENS); g++) begin
      nxt_w = ref_t::step(exp_w);
      for (int r = 0; r < int'(ROWS); r++)
        for (int c = 0; c < int'(COLS); c++) begin
          int unsigned n;
          n = ref_t::count(exp_w, r, c);
          if (!exp_w[r][c] && nxt_w[r][c]) begin
            births++;
            if (r == 0 || c == 0 || r == int'(ROWS) - 1 || c == int'(COLS) - 1) edge_births++;
          end
          if (exp_w[r][c] && nxt_w[r][c]) survivals++;
          if (exp_w[r][c] && !nxt_w[r][c] && n < 2) deaths_under++;
          if (exp_w[r][c] && !nxt_w[r][c] && n > 3) deaths_over++;
        end
      exp_w = nxt_w;
      @(posedge clk); #1;
      check_world($sformatf("generation %0d", g));
    end
    $display("generation %0d: %0d cells alive", GENS, $countones(world));
    $display("mechanisms exercised:");
    need("births", births);
    need("survivals", survivals);
    need("deaths (underpopulation)", deaths_under);
    need("deaths (overpopulation)", deaths_over);
    need("births on world edge", edge_births);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
