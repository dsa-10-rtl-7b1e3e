// tb_bit_select: multiplies random 64-bit values by random 16-bit scalars and
// checks that each of the four selections returns bits [16s+15:16s] of the
// low 64 bits of the product, 2 clocks later, with valid and sync delayed
// alike.
module tb_bit_select;
  import dsa_pkg::*;
  logic clk = 1'b0, rst = 1'b1, valid_in = 1'b0, sync_in = 1'b0, valid, sync_out;
  always #5 clk = ~clk;
  logic [ACC_W-1:0] din = '0;
  logic [SCALAR_W-1:0] scalar = '0;
  logic [1:0] sel = '0;
  logic [OUT_W-1:0] dout;
  bit_select dut (.*);

  int checks = 0, failures = 0;
  logic [OUT_W+1:0] q [$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < 2002; n++) begin
      @(negedge clk);
      if (n >= 2) begin
        logic [OUT_W+1:0] e;
        e = q.pop_front();
        checks++;
        if ({valid, sync_out, dout} != e) begin
          failures++;
          if (failures < 5) $display("n=%0d got %h want %h", n, {valid, sync_out, dout}, e);
        end
      end
      begin
        logic [79:0] p;
        if (n % 100 == 0) begin
          scalar = SCALAR_W'($urandom);
          sel = 2'(n / 100);
        end
        din = {$urandom, $urandom} >> (n % 40);
        valid_in = (n % 3 != 0);
        sync_in = (n % 50 == 1);
        p = 80'(din) * 80'(scalar);
        q.push_back({valid_in, sync_in, p[16*sel +: 16]});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
