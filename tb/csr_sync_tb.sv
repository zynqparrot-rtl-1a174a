// csr_sync_tb: writes values from a slow and a fast source clock and checks
// that each written value arrives whole, with exactly one update pulse per
// spaced write, within the stated latency, and that sready returns.
module csr_sync_tb;
  logic sclk = 0, dclk = 0, srst = 1, drst = 1;
  logic swe = 0, sready, dupdate;
  logic [31:0] sdata = '0, ddata;
  int checks = 0, failures = 0, pulses = 0;

  always #6 sclk = ~sclk;
  always #4 dclk = ~dclk;

  csr_sync #(.WIDTH(32)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge dclk) if (!drst && dupdate) pulses++;

  initial begin
    repeat (4) @(posedge sclk);
    srst = 0; drst = 0;
    @(posedge dclk);
    check(ddata == 0 && !dupdate, "reset value");
    for (int i = 0; i < 40; i++) begin
      logic [31:0] v;
      int p0, n;
      v = $urandom;
      p0 = pulses;
      @(negedge sclk);
      check(sready, "sready before write");
      swe = 1; sdata = v;
      @(negedge sclk);
      swe = 0; sdata = ~v;   // source value changes right after the write
      n = 0;
      while (pulses == p0 && n < 20) begin @(posedge dclk); n++; end
      @(negedge dclk);
      check(ddata == v, $sformatf("value %h arrived as %h", v, ddata));
      check(n <= 5, $sformatf("latency %0d destination cycles", n));
      repeat (6) @(posedge sclk);
      check(pulses == p0 + 1, "exactly one pulse per write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
