// tb_requant: loads a gain per input and channel (including 0.5, which makes
// exact ties, and large gains, which saturate), streams random 18+18 bit
// channels and compares every 4+4 bit output with round-half-to-even of
// data*gain/4096 clamped to [-8, 7], computed here. Checks the 2-clock
// latency, that the sticky saturation flags rise only for inputs that
// saturated, and that sat_clr clears them.
module tb_requant;
  import dsa_pkg::*;
  localparam int NCH = 16, NIN = 4;
  logic clk = 1'b0, rst = 1'b1, sync_in = 1'b0, sync_out, sat_clr = 1'b0;
  always #5 clk = ~clk;
  cplx_t din [NIN];
  cq_t   dout [NIN];
  logic gain_we = 1'b0;
  logic [1:0] gain_input = '0;
  logic [3:0] gain_chan = '0;
  logic [GAIN_W-1:0] gain_data = '0;
  logic [NIN-1:0] sat_flag;
  requant #(.N_CH(NCH), .NIN(NIN)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int g [NIN][NCH];
  int xr [NIN][4*NCH], xi [NIN][4*NCH];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rq(int d, int gg);
    longint v, ip, fr;
    v  = longint'(d) * gg;
    ip = v >>> 12;
    fr = v - (ip <<< 12);
    if (fr > 2048 || (fr == 2048 && (ip % 2 != 0))) ip++;
    if (ip > 7) ip = 7;
    if (ip < -8) ip = -8;
    return int'(ip);
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [NIN-1:0] exp_sat;
  int t_in, t_out;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (sync_out) t_out = cyc;

  initial begin
    for (int i = 0; i < NIN; i++) din[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    // Gains: input 0 small (never saturates), 1 = 0.5 (ties), 2 random, 3 large.
    for (int i = 0; i < NIN; i++)
      for (int k = 0; k < NCH; k++) begin
        case (i)
          0: g[i][k] = 1 + k;
          1: g[i][k] = 2048;
          2: g[i][k] = int'($urandom_range(8000));
          default: g[i][k] = 40000 + k;
        endcase
        @(negedge clk);
        gain_we = 1'b1; gain_input = 2'(i); gain_chan = 4'(k); gain_data = GAIN_W'(g[i][k]);
      end
    @(negedge clk); gain_we = 1'b0; sat_clr = 1'b1;
    @(negedge clk); sat_clr = 1'b0;
    for (int i = 0; i < NIN; i++)
      for (int n = 0; n < 4*NCH; n++) begin
        xr[i][n] = (i == 1) ? 2 * ((n % 8) - 4) + 1 : int'($urandom_range(200)) - 100;
        xi[i][n] = (i == 1) ? -(2 * ((n % 8) - 4) + 1) : int'($urandom_range(200)) - 100;
        if (i == 0) begin xr[i][n] = int'($urandom_range(262143)) - 131072; xi[i][n] = xr[i][n] / 3; end
      end
    exp_sat = '0;
    for (int n = 0; n < 4*NCH + 2; n++) begin
      @(negedge clk);
      if (n >= 2) begin
        int m;
        m = n - 2;
        for (int i = 0; i < NIN; i++) begin
          checks++;
          if (int'(dout[i].re) != rq(xr[i][m], g[i][m % NCH]) || int'(dout[i].im) != rq(xi[i][m], g[i][m % NCH])) begin
            failures++;
            if (failures < 6) $display("in %0d ch %0d got %0d,%0d want %0d,%0d", i, m, dout[i].re, dout[i].im,
                                       rq(xr[i][m], g[i][m % NCH]), rq(xi[i][m], g[i][m % NCH]));
          end
        end
      end
      if (n < 4*NCH) begin
        sync_in = (n == 0);
        if (n == 0) t_in = cyc;
        for (int i = 0; i < NIN; i++) begin
          din[i].re = DATA_W'(xr[i][n]);
          din[i].im = DATA_W'(xi[i][n]);
          // Saturation: the unclamped rounded value lies outside [-8, 7].
          for (int c = 0; c < 2; c++) begin
            longint v;
            v = ((c != 0) ? longint'(xi[i][n]) : longint'(xr[i][n])) * longint'(g[i][n % NCH]);
            if (v >= 7 * 4096 + 2048 + 1 || v < -8 * 4096 - 2048) exp_sat[i] = 1'b1;
          end
        end
      end else sync_in = 1'b0;
    end
    check("latency 2", t_out - t_in == 2);
    @(negedge clk);
    check("sticky flags match saturating inputs", sat_flag == exp_sat);
    check("input 3 saturated", sat_flag[3]);
    check("input 1 (0.5 gain, small) not saturated", !sat_flag[1]);
    for (int i = 0; i < NIN; i++) begin din[i].re = '0; din[i].im = '0; end
    repeat (3) @(negedge clk);
    sat_clr = 1'b1; @(negedge clk); sat_clr = 1'b0;
    repeat (3) @(negedge clk);
    check("flags cleared", sat_flag == '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
