// tb_sau: checks the shift-and-accumulate unit against (a>>4)+(b>>3)+(c>>4)
// over corner values and random triples. Combinational block; the clock
// only paces the checks and drives the watchdog.
module tb_sau;
  logic clk = 1'b0;
  logic [7:0] a, b, c, y;
  int checks = 0, failures = 0;

  sau #(.DATA_W(8), .SHIFT(4)) dut (.a, .b, .c, .y);

  always #5 clk = ~clk;

  task automatic check(logic [7:0] ta, logic [7:0] tb, logic [7:0] tc);
    int exp;
    a = ta; b = tb; c = tc;
    @(posedge clk);
    exp = int'(ta) / 16 + int'(tb) / 8 + int'(tc) / 16;
    checks++;
    if (int'(y) != exp) begin
      failures++;
      $display("FAIL a=%0d b=%0d c=%0d y=%0d exp=%0d", ta, tb, tc, y, exp);
    end
  endtask

  initial begin
    check(0, 0, 0);
    check(255, 255, 255);
    check(255, 0, 0);
    check(0, 255, 0);
    check(0, 0, 255);
    check(16, 8, 16);
    repeat (2000) check(8'($urandom), 8'($urandom), 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
