// tb_life_world -- end-to-end test of the Game of Life array at reduced sizes.
//
// Part 1, beacon: a 6x6 world is started from the beacon oscillator and must
// show, cell for cell, the printed generations 1 and 2 (drawn below with 'O'
// alive and '.' dead) and keep oscillating with period 2; one generation per
// clock edge.
// Part 2, random worlds: life_run checks a 12x16 random world and a 7x5 one
// (odd, non-square) against the reference model for 300 generations each,
// including a reset in mid-run.
// Every mechanism must occur at least once: births, survivals, deaths from
// under- and overpopulation, births on the edge of the world, oscillation,
// and reset to the starting pattern.
module tb_life_world;
  logic clk = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- Part 1: beacon ----------------
  // Generation 0 cells alive: (1,1) (1,2) (2,1) (3,4) (4,3) (4,4); bit r*6+c.
  localparam logic [35:0] BEACON = 36'h0_1840_2180;
  logic rst_b;
  logic [5:0][5:0] wb;
  int oscillations = 0;

  life_world #(.ROWS(6), .COLS(6), .USE_INIT_PATTERN(1'b1), .INIT_PATTERN(BEACON))
    u_beacon (.clk(clk), .rst(rst_b), .world(wb));

  string beacon0 [6] = '{"......", ".OO...", ".O....", "....O.", "...OO.", "......"};
  string beacon1 [6] = '{"......", ".OO...", ".OO...", "...OO.", "...OO.", "......"};

  task automatic check_grid(string what, string g [6]);
    checks++;
    for (int r = 0; r < 6; r++)
      for (int c = 0; c < 6; c++)
        if (wb[r][c] != (g[r][c] == "O")) begin
          failures++;
          $display("FAIL beacon %s: cell (%0d,%0d) is %b", what, r, c, wb[r][c]);
          return;
        end
  endtask

  logic beacon_done = 0;
  initial begin
    rst_b = 1;
    @(posedge clk); #1;
    check_grid("generation 0", beacon0);
    rst_b = 0;
    for (int g = 1; g <= 20; g++) begin
      @(posedge clk); #1;
      check_grid($sformatf("generation %0d", g), (g % 2 == 1) ? beacon1 : beacon0);
      if (g % 2 == 0 && wb == BEACON) oscillations++;
    end
    beacon_done = 1;
  end

  // ---------------- Part 2: random worlds ----------------
  logic go = 0;
  logic d1, d2;
  int c1, f1, b1, s1, du1, do1, e1, r1;
  int c2, f2, b2, s2, du2, do2, e2, r2;

  life_run #(.ROWS(12), .COLS(16), .SEED(7), .GENS(300)) u_run1 (
    .clk(clk), .go(go), .done(d1), .checks(c1), .failures(f1), .births(b1),
    .survivals(s1), .deaths_under(du1), .deaths_over(do1), .edge_births(e1), .resets(r1));
  life_run #(.ROWS(7), .COLS(5), .SEED(3), .GENS(300)) u_run2 (
    .clk(clk), .go(go), .done(d2), .checks(c2), .failures(f2), .births(b2),
    .survivals(s2), .deaths_under(du2), .deaths_over(do2), .edge_births(e2), .resets(r2));

  task automatic need(string what, int n);
    $display("  %-28s %0d", what, n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    #1 go = 1;
    wait (d1 && d2 && beacon_done);
    checks += c1 + c2;
    failures += f1 + f2;
    $display("mechanisms exercised:");
    need("births", b1 + b2);
    need("survivals", s1 + s2);
    need("deaths (underpopulation)", du1 + du2);
    need("deaths (overpopulation)", do1 + do2);
    need("births on world edge", e1 + e2);
    need("reset to start pattern", r1 + r2);
    need("beacon oscillations", oscillations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
