// tb_pfb: runs the four-input filterbank at 64 points per tap (32 channels)
// with a different tone plus noise on each input, and checks the frame that
// begins 3 frames after sync (the first with a full FIR history) against a
// reference computed here: the 4-tap FIR in integers, then a direct DFT
// divided by N/2 (all FFT stages shifted), within a few LSB. Also checks
// that each input's tone lands in its own channel, the latency of sync_out
// and that no overflow is flagged.
module tb_pfb;
  import dsa_pkg::*;
  localparam int N = 64, NC = N / 2, T = 4, FS = 8, NIN = 4, NF = 6;
  localparam int S = $clog2(NC);
  localparam int LAT = 2 + (NC - 1) + 2 * S + NC + 3;
  localparam real TOL = 2.0 * S + 6.0;
  logic clk = 1'b0, rst = 1'b1, sync_in = 1'b0, sync_out, ovf;
  always #5 clk = ~clk;
  adc_t din [NIN][DEMUX];
  logic [S-1:0] shift = '1;
  cplx_t dout [NIN];
  pfb #(.NIN(NIN), .N(N), .T(T), .FIR_SHIFT(FS)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int x [NIN][NF*N];
  longint hc [T*N];
  real rre [NIN][NC], rim [NIN][NC];
  localparam real PI = 3.14159265358979323846;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < T*N; i++) begin
      real w, a, s, v;
      w = 0.54 - 0.46 * $cos(2.0 * PI * i / (T*N - 1));
      a = real'(i) / N - T / 2.0;
      s = (a == 0.0) ? 1.0 : $sin(PI * a) / (PI * a);
      v = w * s * 131071.0;
      hc[i] = (v < 0.0) ? -longint'($rtoi(-v + 0.5)) : longint'($rtoi(v + 0.5));
    end
    for (int i = 0; i < NIN; i++)
      for (int n = 0; n < NF*N; n++)
        x[i][n] = $rtoi(100.0 * $cos(2.0 * PI * (3 + 5 * i) * n / N)) + int'($urandom_range(40)) - 20;
    // Reference for frame 3 (samples 3N .. 4N-1).
    for (int i = 0; i < NIN; i++) begin
      longint y [N];
      for (int p = 0; p < N; p++) begin
        longint acc;
        acc = 0;
        for (int t = 0; t < T; t++) acc += hc[(T-1-t)*N + p] * x[i][3*N + p - t*N];
        y[p] = acc >>> FS;
      end
      for (int k = 0; k < NC; k++) begin
        rre[i][k] = 0.0; rim[i][k] = 0.0;
        for (int p = 0; p < N; p++) begin
          rre[i][k] += y[p] * $cos(2.0 * PI * k * p / N);
          rim[i][k] -= y[p] * $sin(2.0 * PI * k * p / N);
        end
        rre[i][k] /= NC; rim[i][k] /= NC;
      end
    end
  end

  always @(posedge clk) cyc <= cyc + 1;
  int t_in = -1, t_out = -1, k = -1, peak_ok = 0;
  real best [NIN];
  int  bestk [NIN];
  always @(negedge clk) begin
    if (sync_out && !rst && t_in >= 0) begin t_out = cyc; end
    if (t_out >= 0 && cyc == t_out + 3 * NC) k = 0;
    if (k >= 0 && k < NC) begin
      for (int i = 0; i < NIN; i++) begin
        real er, ei, mag;
        er = $itor(dout[i].re) - rre[i][k];
        ei = $itor(dout[i].im) - rim[i][k];
        checks++;
        if (er > TOL || er < -TOL || ei > TOL || ei < -TOL) begin
          failures++;
          if (failures < 6) $display("in %0d ch %0d got %0d,%0d ref %f,%f", i, k, dout[i].re, dout[i].im, rre[i][k], rim[i][k]);
        end
        mag = $itor(dout[i].re) ** 2 + $itor(dout[i].im) ** 2;
        if (k == 0 || mag > best[i]) begin best[i] = mag; bestk[i] = k; end
      end
      k++;
    end
    if (t_out >= 0 && ovf) begin checks++; failures++; $display("overflow"); end
  end

  initial begin
    for (int i = 0; i < NIN; i++) begin din[i][0] = '0; din[i][1] = '0; end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    repeat (2) @(posedge clk);
    for (int n = 0; n < NF*NC; n++) begin
      @(negedge clk);
      sync_in = (n == 0);
      if (n == 0) t_in = cyc;
      for (int i = 0; i < NIN; i++) begin
        din[i][0] = adc_t'(x[i][2*n]);
        din[i][1] = adc_t'(x[i][2*n+1]);
      end
    end
    @(negedge clk); sync_in = 1'b0;
    repeat (3 * N) @(negedge clk);
    checks++;
    if (t_out - t_in != LAT) begin failures++; $display("latency %0d want %0d", t_out - t_in, LAT); end
    for (int i = 0; i < NIN; i++) begin
      checks++;
      if (bestk[i] != 3 + 5 * i) begin failures++; $display("input %0d peak in channel %0d", i, bestk[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
