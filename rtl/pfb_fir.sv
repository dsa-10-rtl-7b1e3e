// pfb_fir: the polyphase FIR front end of the filterbank for one input. Each
// output sample is a 4-tap weighted sum of the current sample and the samples
// 4096, 8192 and 12288 earlier, with coefficients taken from a 16384-point
// Hamming-windowed sinc:
//   y[n] = sum_{t=0..T-1} h[(T-1-t)*P + (n mod P)] * x[n - t*P]
//   h[i] = round((2^17-1) * hamming(i) * sinc(i/P - T/2)), i = 0..T*P-1
// Two samples arrive per clock, so the P-sample history of the T-1 older
// frames is kept in one (P/2)-word RAM, read and rewritten at the same
// address every clock. The tap count, the length and the 18-bit coefficients
// follow the paper; the exact coefficient formula (the usual form of such a
// filterbank) and the output scaling (sum >>> FIR_SHIFT, saturated to 18
// bits) are this design's choices.
// Timing: dout and sync_out follow din and sync_in by 2 clocks. `sync_in`
// marks sample 0 of a frame.
module pfb_fir
  import dsa_pkg::*;
#(
  parameter int P         = NFFT,   // points per tap
  parameter int T         = TAPS,
  parameter int FIR_SHIFT = 8
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     sync_in,
  input  adc_t                     din  [DEMUX],
  output logic                     sync_out,
  output logic signed [DATA_W-1:0] dout [DEMUX]
);
  localparam int M    = P / DEMUX;                 // clocks per frame
  localparam int AW   = $clog2(M);
  localparam int HW   = (T - 1) * DEMUX * ADC_W;   // history word
  localparam int ACCW = ADC_W + COEF_W + $clog2(T) + 1;

  // Coefficient ROM, indexed [tap][lane][m] for h[tap*P + DEMUX*m + lane].
  logic signed [COEF_W-1:0] coef [T][DEMUX][M];
  function automatic logic signed [COEF_W-1:0] h(int i);
    real pi, w, a, s, v;
    pi = 3.14159265358979323846;
    w  = 0.54 - 0.46 * $cos(2.0 * pi * i / (T * P - 1));
    a  = real'(i) / real'(P) - real'(T) / 2.0;
    s  = (a == 0.0) ? 1.0 : $sin(pi * a) / (pi * a);
    v  = w * s * real'((1 << (COEF_W - 1)) - 1);
    return COEF_W'($rtoi(v < 0.0 ? v - 0.5 : v + 0.5));
  endfunction
  initial
    for (int t = 0; t < T; t++)
      for (int l = 0; l < DEMUX; l++)
        for (int m = 0; m < M; m++)
          coef[t][l][m] = h(t * P + DEMUX * m + l);

  logic [AW-1:0] cnt, m;
  always_comb m = sync_in ? '0 : cnt;
  always_ff @(posedge clk) begin
    if (rst) cnt <= '0;
    else     cnt <= m + 1'b1;
  end

  // History RAM: word = {frame t-1, frame t-2, ...}, each DEMUX samples.
  logic [HW-1:0] hist [M];
  logic [HW-1:0] old;
  logic [DEMUX*ADC_W-1:0] cur;
  always_comb begin
    for (int l = 0; l < DEMUX; l++) cur[l*ADC_W +: ADC_W] = din[l];
    old = hist[m];
  end
  always_ff @(posedge clk)
    hist[m] <= {old[HW-DEMUX*ADC_W-1:0], cur};

  // Stage 1: products. Sample of age t (frames) uses tap T-1-t.
  logic signed [ADC_W+COEF_W-1:0] prod [T][DEMUX];
  logic s1;
  always_ff @(posedge clk) begin
    for (int l = 0; l < DEMUX; l++) begin
      prod[0][l] <= din[l] * coef[T-1][l][m];
      for (int t = 1; t < T; t++)
        prod[t][l] <= $signed(old[(t-1)*DEMUX*ADC_W + l*ADC_W +: ADC_W]) * coef[T-1-t][l][m];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin s1 <= 1'b0; sync_out <= 1'b0; end
    else     begin s1 <= sync_in; sync_out <= s1; end
  end

  // Stage 2: sum, scale, saturate.
  logic signed [ACCW-1:0] acc [DEMUX];
  logic signed [ACCW-1:0] sh  [DEMUX];
  always_comb
    for (int l = 0; l < DEMUX; l++) begin
      acc[l] = '0;
      for (int t = 0; t < T; t++) acc[l] += ACCW'(prod[t][l]);
      sh[l] = acc[l] >>> FIR_SHIFT;
    end

  always_ff @(posedge clk) begin
    for (int l = 0; l < DEMUX; l++) begin
      if (sh[l] > ACCW'((1 << (DATA_W-1)) - 1))  dout[l] <= {1'b0, {(DATA_W-1){1'b1}}};
      else if (sh[l] < -ACCW'(1 << (DATA_W-1)))  dout[l] <= {1'b1, {(DATA_W-1){1'b0}}};
      else                                       dout[l] <= sh[l][DATA_W-1:0];
    end
  end
endmodule
