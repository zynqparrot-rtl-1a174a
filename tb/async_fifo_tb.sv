// async_fifo_tb: random pushes and pops on two unrelated clocks.
//
// A reference queue records every accepted push; each pop must return the
// oldest queued word. Also checks the reset counts, that full/empty never
// overstate the real occupancy, and that after both sides settle the counts
// equal the true occupancy. Ends with the TB_RESULT line.
module async_fifo_tb;
  localparam int W = 16, D = 8;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic winc = 0, rinc = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic wfull, rempty;
  logic [$clog2(D):0] wfree, rcount;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // writer
  always @(posedge wclk) if (!wrst) begin
    if (winc && !wfull) q.push_back(wdata);
    check(q.size() <= D, "more than DEPTH words accepted");
  end
  always @(negedge wclk) if (!wrst) begin
    winc  <= ($urandom % 3) != 0;
    wdata <= W'($urandom);
  end
  // reader
  always @(posedge rclk) if (!rrst) begin
    if (rinc && !rempty) begin
      check(q.size() > 0, "pop while reference empty");
      if (q.size() > 0) begin
        check(rdata == q[0], $sformatf("data %h expected %h", rdata, q[0]));
        void'(q.pop_front());
      end
    end
  end
  always @(negedge rclk) if (!rrst) rinc <= ($urandom % 3) == 0 ? 1'b0 : 1'b1;

  initial begin
    repeat (3) @(posedge wclk);
    wrst = 0; rrst = 0;
    @(negedge wclk);
    check(wfree == D, "wfree after reset");
    check(rempty && rcount == 0, "empty after reset");
    repeat (3000) @(posedge wclk);
    // drain phase: stop pushing, keep popping
    force winc = 0;
    repeat (200) @(posedge rclk);
    check(rempty && q.size() == 0, "drained");
    check(wfree == D, "wfree back to DEPTH after drain");
    // fill phase: stop popping, push until full
    force rinc = 0;
    release winc;
    repeat (200) @(posedge wclk);
    check(wfull && q.size() == D, "fills to exactly DEPTH");
    check(wfree == 0, "wfree zero when full");
    repeat (10) @(posedge rclk);
    check(rcount == D, "rcount equals DEPTH when full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
