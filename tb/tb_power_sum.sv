// tb_power_sum: streams random 18+18 bit channels (including full-scale
// extremes) for four inputs and checks each output against the sum over the
// inputs of re^2 + im^2 computed here, 2 clocks later, with sync_out aligned.
module tb_power_sum;
  import dsa_pkg::*;
  localparam int NIN = 4;
  localparam int PW = 2 * DATA_W + $clog2(NIN) + 1;
  logic clk = 1'b0, rst = 1'b0, sync_in = 1'b0, sync_out;
  always #5 clk = ~clk;
  cplx_t din [NIN];
  logic [PW-1:0] dout;
  power_sum #(.NIN(NIN)) dut (.*);

  int checks = 0, failures = 0;
  longint expq [$];
  bit     syncq [$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NIN; i++) din[i] = '0;
    for (int n = 0; n < 2002; n++) begin
      @(negedge clk);
      if (n >= 2) begin
        longint e; bit s;
        e = expq.pop_front(); s = syncq.pop_front();
        checks++;
        if (longint'(dout) != e || sync_out != s) begin
          failures++;
          if (failures < 5) $display("n=%0d got %0d want %0d", n, dout, e);
        end
      end
      begin
        longint e;
        e = 0;
        for (int i = 0; i < NIN; i++) begin
          int r, m;
          r = (n % 97 == 5) ? -131072 : int'($urandom_range(262143)) - 131072;
          m = (n % 97 == 5) ? -131072 : int'($urandom_range(262143)) - 131072;
          din[i].re = DATA_W'(r);
          din[i].im = DATA_W'(m);
          e += longint'(r) * r + longint'(m) * m;
        end
        sync_in = (n % 500 == 3);
        expq.push_back(e);
        syncq.push_back(sync_in);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
