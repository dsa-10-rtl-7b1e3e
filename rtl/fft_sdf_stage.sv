// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (SDF) pipeline FFT, one complex sample per clock. The first
// D samples of each 2D-sample block are parked in a D-word feedback memory;
// while the next D arrive, each is combined with its partner x[m]: the sum
// goes out at once and the difference goes back into the memory, to leave
// during the following D cycles multiplied by the twiddle exp(-2*pi*i*m/2D).
// When `shift` is set both results are halved (truncating), otherwise they
// are saturated to DATA_W bits; `ovf` pulses on a saturation. The stage is
// this design's own realisation of the paper's FFT (the paper uses a CASPER
// library block and gives no insides).
// Timing: dout/sync_out follow din/sync_in by D + 2 clocks; `sync_in` marks
// sample 0 of a block and restarts the local counter.
module fft_sdf_stage
  import dsa_pkg::*;
#(
  parameter int D = 1024
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  shift,
  input  logic  sync_in,
  input  cplx_t din,
  output logic  sync_out,
  output cplx_t dout,
  output logic  ovf
);
  localparam int CW = $clog2(2 * D);
  localparam int PW = (D > 1) ? $clog2(D) : 1;
  localparam int W  = DATA_W;
  localparam int PROD_W = DATA_W + TW_W + 1;

  logic [CW-1:0] cnt, c;
  logic [PW-1:0] ptr;
  logic          phase;
  cplx_t         fb_mem [D];
  cplx_t         fb_out;

  logic signed [TW_W-1:0] tw_re [D];
  logic signed [TW_W-1:0] tw_im [D];
  initial for (int m = 0; m < D; m++) begin
    tw_re[m] = tw_cos(m, 2 * D);
    tw_im[m] = tw_msin(m, 2 * D);
  end

  function automatic logic signed [W-1:0] fit(logic signed [W:0] v, logic sh, output logic o);
    o = 1'b0;
    if (sh) return v[W:1];
    if (v > (W+1)'((1 << (W-1)) - 1)) begin o = 1'b1; return {1'b0, {(W-1){1'b1}}}; end
    if (v < -(W+1)'(1 << (W-1)))      begin o = 1'b1; return {1'b1, {(W-1){1'b0}}}; end
    return v[W-1:0];
  endfunction

  function automatic logic signed [W-1:0] sat(logic signed [PROD_W-1:0] v, output logic o);
    o = 1'b0;
    if (v > PROD_W'((1 << (W-1)) - 1)) begin o = 1'b1; return {1'b0, {(W-1){1'b1}}}; end
    if (v < -PROD_W'(1 << (W-1)))      begin o = 1'b1; return {1'b1, {(W-1){1'b0}}}; end
    return v[W-1:0];
  endfunction

  always_comb begin
    c     = sync_in ? '0 : cnt;
    phase = c[CW-1];
    ptr   = (D > 1) ? PW'(c) : '0;
    fb_out = fb_mem[ptr];
  end

  always_ff @(posedge clk) begin
    if (rst) cnt <= '0;
    else     cnt <= c + 1'b1;
  end

  // Butterfly.
  logic signed [W:0] s_re, s_im, d_re, d_im;
  cplx_t s_fit, d_fit;
  logic  [3:0] o4;
  always_comb begin
    d_re = (W+1)'(fb_out.re) - (W+1)'(din.re);
    d_im = (W+1)'(fb_out.im) - (W+1)'(din.im);
    s_re = (W+1)'(fb_out.re) + (W+1)'(din.re);
    s_im = (W+1)'(fb_out.im) + (W+1)'(din.im);
    s_fit.re = fit(s_re, shift, o4[0]);
    s_fit.im = fit(s_im, shift, o4[1]);
    d_fit.re = fit(d_re, shift, o4[2]);
    d_fit.im = fit(d_im, shift, o4[3]);
  end

  always_ff @(posedge clk)
    fb_mem[ptr] <= phase ? d_fit : din;

  // Pipeline register 1: select the output and its twiddle.
  cplx_t p1;
  logic  p1_rot, p1_ovf;
  logic [PW-1:0] p1_m;
  always_ff @(posedge clk) begin
    p1     <= phase ? s_fit : fb_out;
    p1_rot <= !phase;
    p1_m   <= ptr;
    p1_ovf <= phase && (|o4);
  end

  // Pipeline register 2: complex multiply by exp(-2*pi*i*m/2D), rounded.
  logic signed [PROD_W-1:0] pr, pi;
  logic [1:0] mo;
  cplx_t mul;
  logic signed [PROD_W-1:0] xr, xi, wr, wi;
  always_comb begin
    xr = PROD_W'(p1.re);
    xi = PROD_W'(p1.im);
    wr = PROD_W'(tw_re[p1_m]);
    wi = PROD_W'(tw_im[p1_m]);
    pr = xr * wr - xi * wi + PROD_W'(1 << (TW_W-2));
    pi = xr * wi + xi * wr + PROD_W'(1 << (TW_W-2));
    mul.re = sat(pr >>> (TW_W-1), mo[0]);
    mul.im = sat(pi >>> (TW_W-1), mo[1]);
  end

  always_ff @(posedge clk) begin
    dout <= p1_rot ? mul : p1;
    ovf  <= p1_ovf || (p1_rot && (|mo));
  end

  sync_delay #(.LAT(D + 2)) u_sync (.clk, .rst, .sync_in, .sync_out);
endmodule
