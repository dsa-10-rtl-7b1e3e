// fft_real_split: turns the bit-reversed output of an NC-point complex FFT of
// packed real samples, z[n] = x[2n] + i*x[2n+1], into the first NC channels of
// the 2*NC-point real transform of x, in natural order, one per clock:
//   X[k] = ( A + W^k * (-i) * B ) / 2,  A = Z[k] + conj(Z[NC-k]),
//   B = Z[k] - conj(Z[NC-k]),  W = exp(-2*pi*i/(2*NC)).
// A frame is written into one half of a double buffer at its bit-reversed
// address while the previous frame is read from the other half, two words per
// clock (k and NC-k). Results are saturated to DATA_W bits. This packing
// method is this design's choice for the paper's real 4096-point FFT.
// Timing: channel 0 of a frame leaves NC + 3 clocks after that frame's first
// input word; `sync_out` marks channel 0 of the frame that began with
// `sync_in`, once per `sync_in`.
module fft_real_split
  import dsa_pkg::*;
#(
  parameter int NC = NFFT / 2
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  sync_in,
  input  cplx_t din,
  output logic  sync_out,
  output cplx_t dout,
  output logic  ovf
);
  localparam int AW = $clog2(NC);
  localparam int W  = DATA_W;
  localparam int PW = DATA_W + TW_W + 3;

  cplx_t mem [2 * NC];
  logic signed [TW_W-1:0] tw_re [NC];
  logic signed [TW_W-1:0] tw_im [NC];
  initial for (int k = 0; k < NC; k++) begin
    tw_re[k] = tw_cos(k, 2 * NC);
    tw_im[k] = tw_msin(k, 2 * NC);
  end

  function automatic logic [AW-1:0] bitrev(logic [AW-1:0] a);
    for (int i = 0; i < AW; i++) bitrev[i] = a[AW-1-i];
  endfunction

  // Write side.
  logic [AW-1:0] wc_q, wc;
  logic          wb;           // bank being written
  logic          wsync;        // current write frame began with sync_in
  always_comb wc = sync_in ? '0 : wc_q;

  always_ff @(posedge clk) mem[{wb, bitrev(wc)}] <= din;

  // Read side: rk runs over the bank finished last frame.
  logic [AW-1:0] rk;
  logic          rb, rsync;
  always_ff @(posedge clk) begin
    if (rst) begin
      wc_q <= '0; wb <= 1'b0; wsync <= 1'b0;
      rk <= '0; rb <= 1'b1; rsync <= 1'b0;
    end else begin
      wc_q <= wc + 1'b1;
      if (sync_in) wsync <= 1'b1;
      if (wc == AW'(NC - 1)) begin
        wb    <= ~wb;
        rb    <= wb;
        rk    <= '0;
        rsync <= wsync || sync_in;
        wsync <= 1'b0;
      end else begin
        rk    <= rk + 1'b1;
        rsync <= 1'b0;
      end
    end
  end

  // Stage 1: read Z[k] and Z[NC-k], form A and B.
  cplx_t z1, z2;
  logic [AW-1:0] rk_m;
  always_comb begin
    rk_m = AW'(0) - rk;
    z1 = mem[{rb, rk}];
    z2 = mem[{rb, rk_m}];
  end

  logic signed [W:0] a_re, a_im, b_re, b_im;
  logic [AW-1:0] k1;
  logic          s1, s2, s3;
  always_ff @(posedge clk) begin
    a_re <= (W+1)'(z1.re) + (W+1)'(z2.re);
    a_im <= (W+1)'(z1.im) - (W+1)'(z2.im);
    b_re <= (W+1)'(z1.re) - (W+1)'(z2.re);
    b_im <= (W+1)'(z1.im) + (W+1)'(z2.im);
    k1   <= rk;
  end

  // Stage 2: P = W^k * (-i) * B = W^k * (b_im - i*b_re).
  logic signed [PW-1:0] cr, ci, wr, wi, pr, pi;
  always_comb begin
    cr = PW'(b_im);
    ci = -PW'(b_re);
    wr = PW'(tw_re[k1]);
    wi = PW'(tw_im[k1]);
    pr = (cr * wr - ci * wi + PW'(1 << (TW_W-2))) >>> (TW_W-1);
    pi = (cr * wi + ci * wr + PW'(1 << (TW_W-2))) >>> (TW_W-1);
  end

  logic signed [PW-1:0] a2_re, a2_im, p2_re, p2_im;
  always_ff @(posedge clk) begin
    a2_re <= PW'(a_re);
    a2_im <= PW'(a_im);
    p2_re <= pr;
    p2_im <= pi;
  end

  // Stage 3: halve and saturate.
  function automatic logic signed [W-1:0] sat(logic signed [PW-1:0] v, output logic o);
    o = 1'b0;
    if (v > PW'((1 << (W-1)) - 1)) begin o = 1'b1; return {1'b0, {(W-1){1'b1}}}; end
    if (v < -PW'(1 << (W-1)))      begin o = 1'b1; return {1'b1, {(W-1){1'b0}}}; end
    return v[W-1:0];
  endfunction

  logic signed [PW-1:0] xr, xi;
  logic [1:0] o2;
  cplx_t x;
  always_comb begin
    xr = (a2_re + p2_re) >>> 1;
    xi = (a2_im + p2_im) >>> 1;
    x.re = sat(xr, o2[0]);
    x.im = sat(xi, o2[1]);
  end

  always_ff @(posedge clk) begin
    dout <= x;
    ovf  <= |o2;
  end

  always_ff @(posedge clk) begin
    if (rst) {s1, s2, s3} <= '0;
    else     {s1, s2, s3} <= {rsync, s1, s2};
  end
  assign sync_out = s3;
endmodule
