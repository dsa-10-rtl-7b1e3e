// tb_coarse_delay: feeds a counting pattern and checks that the output is
// the input delayed by exactly delay + 1 clocks for several delay settings,
// including 0 and the largest (DEPTH - 1).
module tb_coarse_delay;
  import dsa_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [$clog2(DEPTH)-1:0] delay = '0;
  adc_t din [DEMUX], dout [DEMUX];
  coarse_delay #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  adc_t hist0 [int];
  adc_t hist1 [int];
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    din[0] <= adc_t'(3 * cyc + 1);
    din[1] <= adc_t'(7 * cyc + 2);
    hist0[cyc + 1] = adc_t'(3 * cyc + 1);
    hist1[cyc + 1] = adc_t'(7 * cyc + 2);
  end

  int dl [5] = '{0, 1, 5, 37, DEPTH - 1};
  initial begin
    din[0] = '0; din[1] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    foreach (dl[j]) begin
      delay <= $clog2(DEPTH)'(dl[j]);
      repeat (DEPTH + 5) @(posedge clk);
      repeat (50) begin
        @(posedge clk);
        checks++;
        // dout sampled now holds din of cycle (cyc - delay - 1).
        if (dout[0] !== hist0[cyc - dl[j] - 1] || dout[1] !== hist1[cyc - dl[j] - 1]) begin
          failures++;
          if (failures < 5) $display("delay %0d: got %0d %0d", dl[j], dout[0], dout[1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
