// tb_adc_snapshot: triggers a capture of a known sample pattern, waits for
// done, reads every word back and compares it with the samples that were
// present in the DEPTH clocks after the trigger; checks that busy lasts
// exactly DEPTH clocks and that a trigger during a capture is ignored.
module tb_adc_snapshot;
  import dsa_pkg::*;
  localparam int DEPTH = 128;
  logic clk = 1'b0, rst = 1'b1, trig = 1'b0, busy, done;
  always #5 clk = ~clk;
  adc_t din_a [DEMUX], din_b [DEMUX];
  logic [$clog2(DEPTH)-1:0] rd_addr = '0;
  logic [4*ADC_W-1:0] rd_data;
  adc_snapshot #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, nbusy = 0;
  function automatic logic [31:0] pat(int c);
    return {8'(c * 5 + 3), 8'(c * 3 + 2), 8'(c + 1), 8'(c * 11)};
  endfunction
  always @(posedge clk) begin
    cyc <= cyc + 1;
    {din_b[1], din_b[0], din_a[1], din_a[0]} <= pat(cyc + 1);
  end
  // Record what is on the inputs during each busy clock.
  logic [31:0] seen [$];
  always @(negedge clk)
    if (busy) begin
      nbusy++;
      seen.push_back({din_b[1], din_b[0], din_a[1], din_a[0]});
    end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0;
  initial begin
    {din_b[1], din_b[0], din_a[1], din_a[0]} = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (10) @(posedge clk);
    trig <= 1'b1; @(posedge clk); trig <= 1'b0;
    t0 = cyc;
    repeat (20) @(posedge clk);
    trig <= 1'b1; @(posedge clk); trig <= 1'b0;   // ignored
    wait (done);
    @(posedge clk);
    checks++;
    if (nbusy != DEPTH) begin failures++; $display("busy for %0d", nbusy); end
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr <= $clog2(DEPTH)'(a);
      @(posedge clk); @(posedge clk);
      checks++;
      if (rd_data !== seen[a] || seen[a] !== pat(t0 + 1 + a)) begin
        failures++;
        if (failures < 5) $display("word %0d got %h want %h", a, rd_data, seen[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
