// fft_real: the FFT half of the polyphase filterbank for one input. It takes
// the two real samples that arrive each clock, packs them as one complex word
// (earlier sample real, later sample imaginary), runs an NFFT/2-point radix-2
// SDF pipeline (fft_sdf_stage, log2(NFFT/2) stages) and recovers the NFFT/2
// channels of the real NFFT-point transform with fft_real_split. The paper
// gives the size (4096 points, 2048 channels) and the 18+18 bit data; the
// architecture and the per-stage shift schedule `shift` (bit s halves the
// outputs of stage s; all ones by default gives X/2048 for NFFT = 4096 and
// cannot overflow) are this design's choices.
// Timing: one channel per clock, channels 0..NFFT/2-1 in order; channel 0 of
// the frame started by `sync_in` appears with `sync_out` LAT = (NFFT/2 - 1) +
// 2*log2(NFFT/2) + NFFT/2 + 3 clocks later. `ovf` is a saturation pulse.
module fft_real
  import dsa_pkg::*;
#(
  parameter int N = NFFT
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [$clog2(N/2)-1:0]      shift,
  input  logic                        sync_in,
  input  logic signed [DATA_W-1:0]    din [DEMUX],
  output logic                        sync_out,
  output cplx_t                       dout,
  output logic                        ovf
);
  localparam int NC = N / 2;
  localparam int S  = $clog2(NC);

  cplx_t d   [S+1];
  logic  sy  [S+1];
  logic  [S:0] ov;

  assign d[0].re = din[0];
  assign d[0].im = din[1];
  assign sy[0]   = sync_in;

  for (genvar s = 0; s < S; s++) begin : g_stage
    fft_sdf_stage #(.D(NC >> (s + 1))) u_stage (
      .clk, .rst, .shift(shift[s]),
      .sync_in(sy[s]), .din(d[s]),
      .sync_out(sy[s+1]), .dout(d[s+1]), .ovf(ov[s])
    );
  end

  fft_real_split #(.NC(NC)) u_split (
    .clk, .rst, .sync_in(sy[S]), .din(d[S]),
    .sync_out, .dout, .ovf(ov[S])
  );

  always_comb ovf = |ov;
endmodule
