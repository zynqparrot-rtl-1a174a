// coverage_collector_tb: at the default 3284 points, toggles a random subset
// of selects over a number of executed and gated cycles and compares every
// readout word with an independently kept toggle map. Changes made across
// gated cycles only count when seen between two executed cycles; clear must
// empty the map.
module coverage_collector_tb;
  localparam int N = 3284;
  localparam int NW = (N + 31) / 32;
  logic clk = 0, rst = 1, clk_en = 0, clear = 0;
  logic [N-1:0] sel = '0, last = '0, model = '0;
  logic [31:0] word_idx = '0, word;
  int checks = 0, failures = 0;
  bit primed = 0;

  always #5 clk = ~clk;

  coverage_collector #(.NUM_COVER(N)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic compare_all(string when);
    logic [32*NW-1:0] m;
    m = (32*NW)'(model);
    for (int w = 0; w < NW + 2; w++) begin
      word_idx = 32'(w); #1;
      check(word == (w < NW ? m[32*w +: 32] : 32'h0),
            $sformatf("%s: word %0d = %h expected %h", when, w, word, w < NW ? m[32*w +: 32] : 32'h0));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    compare_all("after reset");
    for (int i = 0; i < 60; i++) begin
      clk_en = ($urandom % 3) != 0;
      // flip a few random selects
      for (int j = 0; j < 20; j++) sel[$urandom % N] ^= 1'b1;
      if (clk_en) begin
        if (primed) model |= sel ^ last;
        last   = sel;
        primed = 1;
      end
      @(posedge clk); #1;
    end
    compare_all("running");
    clear = 1;
    @(posedge clk); #1;
    clear = 0; model = '0; primed = 0;
    compare_all("after clear");
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
