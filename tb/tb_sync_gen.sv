// tb_sync_gen: checks that sync fires exactly once, on the first PPS rising
// edge after arming (three clocks after it reaches the input), that a PPS
// edge without arming produces nothing, and that a PPS already high when
// armed does not count as an edge.
module tb_sync_gen;
  logic clk = 1'b0, rst = 1'b1, arm = 1'b0, pps = 1'b0;
  logic sync, armed;
  always #5 clk = ~clk;
  sync_gen dut (.*);

  int checks = 0, failures = 0, nsync = 0, cyc = 0, t_sync = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sync) begin nsync++; t_sync = cyc; end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic pulse_pps(int width);
    pps <= 1'b1; repeat (width) @(posedge clk);
    pps <= 1'b0; repeat (20) @(posedge clk);
  endtask

  int t_edge;
  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (3) @(posedge clk);
    // PPS without arm.
    pulse_pps(30);
    check("no sync without arm", nsync == 0);
    // Arm while PPS high: must wait for the next rising edge.
    pps <= 1'b1; repeat (5) @(posedge clk);
    arm <= 1'b1; @(posedge clk); arm <= 1'b0;
    repeat (10) @(posedge clk);
    check("armed", armed == 1'b1);
    pps <= 1'b0; repeat (10) @(posedge clk);
    check("no sync on level", nsync == 0);
    // Rising edge.
    pps <= 1'b1; t_edge = cyc + 1; @(posedge clk);
    repeat (10) @(posedge clk);
    check("one sync", nsync == 1);
    check("sync 3 clocks after edge", t_sync - t_edge == 3);
    check("disarmed", armed == 1'b0);
    pps <= 1'b0; repeat (10) @(posedge clk);
    pulse_pps(10);
    check("one-shot", nsync == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
