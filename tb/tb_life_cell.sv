// tb_life_cell -- checks one Game of Life cell.
//
// Two cells are built, one reset to dead and one to alive, and their reset
// values are checked. Then for every present state (dead, alive) and every one
// of the 256 neighbour patterns the cell is first steered into the wanted
// state (three live neighbours give a live cell, none a dead one), the pattern
// is applied for one clock and the new state compared with the rules worked
// out here: alive next if exactly 3 neighbours live, or 2 and alive now. The
// new state must appear after exactly one rising edge.
module tb_life_cell;
  logic clk = 0, rst;
  logic [7:0] nb0, nb1;
  logic a0, a1;
  int checks = 0, failures = 0;

  life_cell #(.INIT(1'b0)) dut0 (.clk(clk), .rst(rst), .neighbours(nb0), .alive(a0));
  life_cell #(.INIT(1'b1)) dut1 (.clk(clk), .rst(rst), .neighbours(nb1), .alive(a1));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    rst = 1; nb0 = '0; nb1 = '0;
    @(posedge clk); #1;
    check("reset INIT=0", a0, 1'b0);
    check("reset INIT=1", a1, 1'b1);
    rst = 0;
    for (int s = 0; s < 2; s++)
      for (int v = 0; v < 256; v++) begin
        int n;
        logic exp;
        // Steer both cells into state s.
        nb0 = (s == 1) ? 8'b0000_0111 : 8'h00;
        nb1 = (s == 1) ? 8'b1010_0100 : 8'h00;
        @(posedge clk); #1;
        check("steer", a0, 1'(s));
        check("steer", a1, 1'(s));
        n = 0;
        for (int b = 0; b < 8; b++) n += (v >> b) & 1;
        exp = (n == 3) || (s == 1 && n == 2);
        nb0 = 8'(v);
        nb1 = 8'(v);
        #1;
        check("no change before edge", a0, 1'(s));
        @(posedge clk); #1;
        check($sformatf("state %0d nb %02h", s, v), a0, exp);
        check($sformatf("state %0d nb %02h (cell 1)", s, v), a1, exp);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
