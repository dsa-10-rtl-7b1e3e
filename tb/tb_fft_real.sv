// tb_fft_real: checks the real-input FFT against a direct DFT computed here in
// floating point. Three frames of a tone plus pseudo-random noise are fed,
// two real samples per clock, starting with a sync pulse; the frame that
// starts at the sync must come out in natural channel order, with
// sync_out exactly LAT clocks after sync_in, and each channel must match
// DFT/ (N/2) (every stage shifted) within a few LSB. Default N = 256; the
// full 4096-point size runs in the top-level test.
module tb_fft_real;
  import dsa_pkg::*;
  localparam int N   = 256;
  localparam int NC  = N / 2;
  localparam int S   = $clog2(NC);
  localparam int LAT = (NC - 1) + 2 * S + NC + 3;
  localparam real TOL = 2.0 * S + 4.0;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic [S-1:0] shift = '1;
  logic sync_in = 1'b0, sync_out, ovf;
  logic signed [DATA_W-1:0] din [DEMUX];
  cplx_t dout;

  fft_real #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int x [3*N];
  real ref_re [NC], ref_im [NC];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference DFT of the first frame.
  initial begin
    for (int n = 0; n < 3*N; n++)
      x[n] = $rtoi(60000.0 * $cos(2.0 * 3.14159265358979 * 5.3 * n / N))
             + int'($urandom_range(8191)) - 4096;
    for (int k = 0; k < NC; k++) begin
      ref_re[k] = 0.0; ref_im[k] = 0.0;
      for (int n = 0; n < N; n++) begin
        ref_re[k] += x[n] * $cos(2.0 * 3.14159265358979 * k * n / N);
        ref_im[k] -= x[n] * $sin(2.0 * 3.14159265358979 * k * n / N);
      end
      ref_re[k] /= NC; ref_im[k] /= NC;
    end
  end

  int t_sync_in, t_sync_out, cyc = 0, nsync = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    din[0] = '0; din[1] = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 3 * NC; i++) begin
      sync_in <= (i == 0);
      din[0] <= DATA_W'(x[2*i]);
      din[1] <= DATA_W'(x[2*i+1]);
      if (i == 0) t_sync_in = cyc + 1;
      @(posedge clk);
    end
    sync_in <= 1'b0;
    repeat (LAT + 2 * NC) @(posedge clk);
    checks++;
    if (nsync != 1) begin failures++; $display("sync_out count %0d", nsync); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Capture the frame that starts with sync_out.
  int k = -1;
  real er, ei;
  always @(posedge clk) begin
    if (sync_out && !rst) begin
      nsync++;
      t_sync_out = cyc;
      checks++;
      if (t_sync_out - t_sync_in != LAT) begin
        failures++;
        $display("latency %0d expected %0d", t_sync_out - t_sync_in, LAT);
      end
      k = 0;
    end
    if (k >= 0 && k < NC) begin
      er = $itor(dout.re) - ref_re[k];
      ei = $itor(dout.im) - ref_im[k];
      checks++;
      if (er > TOL || er < -TOL || ei > TOL || ei < -TOL) begin
        failures++;
        if (failures < 10)
          $display("chan %0d got %0d,%0d ref %f,%f", k, dout.re, dout.im, ref_re[k], ref_im[k]);
      end
      k++;
    end
    // Stages still hold start-up contents before the first frame; only the
    // checked frame must be free of saturation.
    if (k >= 0 && k <= NC && ovf) begin
      checks++; failures++;
      $display("unexpected overflow at %0d", cyc);
    end
  end
endmodule
