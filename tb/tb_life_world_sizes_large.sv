// tb_life_world_sizes_large -- the evaluated world sizes 60x60 and 70x70,
// each built as its own array with its own random starting world and checked
// against the reference model for 100 generations (with a reset in mid-run).
// Same procedure as tb_life_world_sizes (10x10 to 50x50); kept apart because
// the build time grows with the total number of cells. 80x80 and 90x90 are
// not simulated; 100x100 is covered by tb_life_world_full.
module tb_life_world_sizes_large;
  localparam int NSIZES = 2;
  localparam int FIRST  = 6;   // first size is FIRST*10
  logic clk = 0, go = 0;
  logic [NSIZES-1:0] done;
  int c [NSIZES], f [NSIZES], b [NSIZES], s [NSIZES], du [NSIZES], dov [NSIZES],
      e [NSIZES], r [NSIZES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NSIZES; i++) begin : g_size
    life_run #(.ROWS(10 * (i + FIRST)), .COLS(10 * (i + FIRST)), .SEED(200 + i), .GENS(100)) u_run (
      .clk(clk), .go(go), .done(done[i]), .checks(c[i]), .failures(f[i]), .births(b[i]),
      .survivals(s[i]), .deaths_under(du[i]), .deaths_over(dov[i]), .edge_births(e[i]),
      .resets(r[i]));
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 go = 1;
    wait (&done);
    for (int i = 0; i < NSIZES; i++) begin
      $display("%0dx%0d: %0d checks, %0d failures, births %0d, survivals %0d, deaths %0d/%0d, edge births %0d",
               10 * (i + FIRST), 10 * (i + FIRST), c[i], f[i], b[i], s[i], du[i], dov[i], e[i]);
      checks += c[i] + 1;
      failures += f[i];
      if (b[i] == 0 || s[i] == 0 || du[i] == 0 || dov[i] == 0 || r[i] == 0) begin
        failures++;
        $display("FAIL %0dx%0d: a rule never fired", 10 * (i + FIRST), 10 * (i + FIRST));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
