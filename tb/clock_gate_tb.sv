// clock_gate_tb: drives a random enable (changed right after each rising
// edge) and checks that gclk rises exactly on the rising edges of clk whose
// preceding cycle had en high, and that gclk is never high while clk is low.
module clock_gate_tb;
  logic clk = 0, en = 0, gclk;
  int checks = 0, failures = 0;
  int expected = 0, seen = 0;

  always #5 clk = ~clk;

  clock_gate dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge gclk) seen++;
  always @(negedge clk) #1 check(!gclk, "gclk high while clk low");

  initial begin
    repeat (2) @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      bit e;
      @(posedge clk);
      #1;
      e = ($urandom % 2) == 1;
      en = e;
      if (e) expected++;
      @(posedge clk);
      #1;
      check(gclk == e, $sformatf("cycle %0d: gclk %0b for en %0b", i, gclk, e));
      en = 0;
    end
    check(seen == expected, $sformatf("%0d gated edges, %0d expected", seen, expected));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
