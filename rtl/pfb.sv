// pfb: the polyphase filterbank of one SNAP board, four inputs wide. Each
// input runs through its own 4-tap 4096-point FIR (pfb_fir) and real
// 4096-point FFT (fft_real), turning two 8-bit samples per clock into one
// 18+18 bit channel per clock, channels 0..2047 in order, as the paper
// describes. All inputs share the sync pulse, so their channels come out
// aligned; `sync_out` is taken from input 0. `shift` is the FFT stage shift
// schedule shared by all inputs and `ovf` ORs their saturation pulses.
// Timing: channel 0 of the frame begun by `sync_in` leaves LAT = 2 +
// fft_real latency clocks later (4122 clocks at the default size).
module pfb
  import dsa_pkg::*;
#(
  parameter int NIN       = N_INPUTS,
  parameter int N         = NFFT,
  parameter int T         = TAPS,
  parameter int FIR_SHIFT = 8
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   sync_in,
  input  adc_t                   din [NIN][DEMUX],
  input  logic [$clog2(N/2)-1:0] shift,
  output logic                   sync_out,
  output cplx_t                  dout [NIN],
  output logic                   ovf
);
  logic [NIN-1:0] fir_sync, fft_sync, fft_ovf;
  logic signed [DATA_W-1:0] fir_out [NIN][DEMUX];

  for (genvar i = 0; i < NIN; i++) begin : g_in
    pfb_fir #(.P(N), .T(T), .FIR_SHIFT(FIR_SHIFT)) u_fir (
      .clk, .rst, .sync_in, .din(din[i]),
      .sync_out(fir_sync[i]), .dout(fir_out[i])
    );
    fft_real #(.N(N)) u_fft (
      .clk, .rst, .shift, .sync_in(fir_sync[i]), .din(fir_out[i]),
      .sync_out(fft_sync[i]), .dout(dout[i]), .ovf(fft_ovf[i])
    );
  end

  assign sync_out = fft_sync[0];

  // All inputs share one sync, so their FFT outputs must stay aligned.
  always_ff @(posedge clk)
    if (!rst) assert (fft_sync == '0 || fft_sync == '1)
      else $error("pfb: FFT outputs of the inputs are misaligned");
  assign ovf      = |fft_ovf;
endmodule
