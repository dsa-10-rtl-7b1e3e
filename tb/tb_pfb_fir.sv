// tb_pfb_fir: drives random 8-bit samples (two per clock) into a 4-tap FIR
// with 64 points per tap, and compares every output from the fourth frame on
// with y[n] = sum_t h[(3-t)*P + n mod P] * x[n - t*P] >>> FIR_SHIFT,
// computed here from its own copy of the Hamming-windowed sinc coefficients.
// Also checks the 2-clock latency of sync_out and output saturation with a
// full-scale input.
module tb_pfb_fir;
  import dsa_pkg::*;
  localparam int P = 64, T = 4, FS = 6;
  localparam int NF = 8;                 // frames
  logic clk = 1'b0, rst = 1'b1, sync_in = 1'b0, sync_out;
  always #5 clk = ~clk;
  adc_t din [DEMUX];
  logic signed [DATA_W-1:0] dout [DEMUX];
  pfb_fir #(.P(P), .T(T), .FIR_SHIFT(FS)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int x [NF*P];
  longint hc [T*P];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pi;
    pi = 3.14159265358979323846;
    for (int i = 0; i < T*P; i++) begin
      real w, a, s, v;
      w = 0.54 - 0.46 * $cos(2.0 * pi * i / (T*P - 1));
      a = real'(i) / P - T / 2.0;
      s = (a == 0.0) ? 1.0 : $sin(pi * a) / (pi * a);
      v = w * s * 131071.0;
      hc[i] = (v < 0.0) ? -longint'($rtoi(-v + 0.5)) : longint'($rtoi(v + 0.5));
    end
    for (int n = 0; n < NF*P; n++) x[n] = (n < (NF-1)*P) ? int'($urandom_range(255)) - 128 : 127;
  end

  function automatic longint ref_y(int n);
    longint acc = 0, y;
    for (int t = 0; t < T; t++) acc += hc[(T-1-t)*P + n % P] * x[n - t*P];
    y = acc >>> FS;
    if (y > 131071) y = 131071;
    if (y < -131072) y = -131072;
    return y;
  endfunction

  int t_in = -1, t_out = -1;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (sync_out) t_out = cyc;

  int nsat = 0;
  initial begin
    din[0] = '0; din[1] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int i = 0; i < NF*P/2 + 2; i++) begin
      @(negedge clk);
      if (i >= 2) begin
        // Output pair i-2 holds samples 2(i-2), 2(i-2)+1.
        int n;
        n = 2 * (i - 2);
        if (n >= (T-1)*P) begin
          for (int l = 0; l < 2; l++) begin
            checks++;
            if (longint'(dout[l]) != ref_y(n + l)) begin
              failures++;
              if (failures < 5) $display("n=%0d got %0d want %0d", n + l, dout[l], ref_y(n + l));
            end
            if (dout[l] == 18'sh1ffff || dout[l] == -18'sh20000) nsat++;
          end
        end
      end
      if (i < NF*P/2) begin
        sync_in = (i == 0);
        if (i == 0) t_in = cyc;
        din[0] = adc_t'(x[2*i]);
        din[1] = adc_t'(x[2*i+1]);
      end else sync_in = 1'b0;
    end
    checks++;
    if (t_out - t_in != 2) begin failures++; $display("latency %0d", t_out - t_in); end
    $display("saturated outputs seen: %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
