// dsa_pkg: constants and types shared by the SNAP FPGA signal chain of the
// DSA-10 prototype. Sizes that follow the paper: 4 inputs per board, 8-bit
// ADC samples arriving two per clock (demultiplexed by two), a 4-tap 4096-point
// polyphase filterbank giving 2048 channels, 18+18 bit channel data, 4+4 bit
// requantised output, 16-spectrum integration in 64 bits and a 16-bit output
// slice. Widths the paper does not give (delay depth, gain format, twiddle
// width) are this design's own choices and are marked as such below.
package dsa_pkg;
  localparam int N_INPUTS  = 4;     // inputs per SNAP board
  localparam int DEMUX     = 2;     // samples per clock per input
  localparam int ADC_W     = 8;     // ADC sample width
  localparam int NFFT      = 4096;  // real FFT length
  localparam int N_CHAN    = NFFT / 2;
  localparam int TAPS      = 4;     // PFB FIR taps
  localparam int COEF_W    = 18;    // PFB coefficient width
  localparam int DATA_W    = 18;    // PFB data width (each of re, im)
  localparam int Q_W       = 4;     // requantised width (each of re, im)
  localparam int ACC_W     = 64;    // integrator width
  localparam int N_ACC     = 16;    // spectra per integration
  localparam int SCALAR_W  = 16;    // integrated-stream scalar
  localparam int OUT_W     = 16;    // integrated-stream output width
  localparam int DELAY_W   = 10;    // coarse delay register (own choice)
  localparam int GAIN_W    = 16;    // requantiser gain (own choice)
  localparam int GAIN_FRAC = 12;    // fractional bits of the gain (own choice)
  localparam int TW_W      = 18;    // FFT twiddle width (own choice)

  typedef logic signed [ADC_W-1:0] adc_t;
  typedef adc_t adc_pair_t [DEMUX];

  typedef struct packed {
    logic signed [DATA_W-1:0] re;
    logic signed [DATA_W-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [Q_W-1:0] re;
    logic signed [Q_W-1:0] im;
  } cq_t;

  // Round-to-nearest twiddle factor exp(-2*pi*i*k/n) scaled to 2^(TW_W-1)-1.
  function automatic logic signed [TW_W-1:0] tw_cos(int k, int n);
    real v;
    v = $cos(2.0 * 3.14159265358979323846 * real'(k) / real'(n)) * real'((1 << (TW_W-1)) - 1);
    return TW_W'($rtoi(v < 0.0 ? v - 0.5 : v + 0.5));
  endfunction
  function automatic logic signed [TW_W-1:0] tw_msin(int k, int n);
    real v;
    v = -$sin(2.0 * 3.14159265358979323846 * real'(k) / real'(n)) * real'((1 << (TW_W-1)) - 1);
    return TW_W'($rtoi(v < 0.0 ? v - 0.5 : v + 0.5));
  endfunction
endpackage
