// gating_fsm_tb: random run bit and gate requests; the enable must be
// run & no request, the state must record the previous decision, and the two
// counters must match independent tallies.
module gating_fsm_tb;
  import zp_pkg::*;
  logic clk = 0, rst = 1, run = 0, clk_en;
  logic [3:0] gate_req = '0;
  gate_state_e state;
  logic [31:0] run_cycles, gated_cycles;
  int checks = 0, failures = 0, n_run = 0, n_gated = 0;
  bit prev_en;

  always #5 clk = ~clk;

  gating_fsm #(.NUM_REQ(4), .CNT_W(32)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    check(state == GATE_GATED && run_cycles == 0 && gated_cycles == 0, "reset state");
    for (int i = 0; i < 500; i++) begin
      run      = ($urandom % 8) != 0;
      gate_req = ($urandom % 3 == 0) ? 4'(1 << ($urandom % 4)) : '0;
      #1;
      check(clk_en == (run && gate_req == 0), "enable equation");
      prev_en = clk_en;
      if (clk_en) n_run++; else n_gated++;
      @(posedge clk);
      #1;
      check(state == (prev_en ? GATE_RUN : GATE_GATED), "state follows last decision");
      check(run_cycles == n_run && gated_cycles == n_gated, "counters");
    end
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
