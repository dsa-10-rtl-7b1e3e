// snap_fpga_top: the signal processing of one SNAP board of the DSA-10 array
// (five such boards serve the ten dual-polarisation antennas). Four ADC
// inputs, two 8-bit samples each per 250 MHz clock, pass through:
//   sync_gen      start on the PPS edge after software arms the board
//   coarse_delay  per-input programmable delay in 4 ns steps
//   adc_snapshot  two raw-sample capture buffers, one per ADC chip
//   pfb           4-tap 4096-point polyphase filterbank, 2048 channels
// and then split into two outputs:
//   raw stream        requant: per-channel gain, 4+4 bit rounding with
//                     saturation flags; 4 inputs x 8 bits per clock
//   integrated stream power_sum -> integrator (16 spectra, 64 bit) ->
//                     bit_select (u16 scalar, one 16-bit slice)
// The 10 GbE transmitters, the ADC chips and the register bus to the control
// computer are outside this module: their streams and registers are ports.
// Timing (default size): `sync` rises 3 clocks after the PPS edge reaches
// the pin; raw channel 0 of the first spectrum leaves with raw_sync 4125
// clocks after `sync` (1 delay register + 4122 filterbank + 2 requantiser),
// then one channel of all four inputs per clock, without gaps. The
// integrated stream sends 2048 consecutive values (int_valid) once every
// 16 spectra, 5 clocks after the last spectrum's channel leaves the
// filterbank. All register inputs are static controls.
module snap_fpga_top
  import dsa_pkg::*;
#(
  parameter int N         = NFFT,
  parameter int NA        = N_ACC,
  parameter int FIR_SHIFT = 8,
  parameter int DDEPTH    = 1 << DELAY_W,
  parameter int SNAP_D    = 1024
) (
  input  logic                       clk,
  input  logic                       rst,
  // timing
  input  logic                       pps,
  input  logic                       arm,
  output logic                       armed,
  // ADC samples, [input][sample in clock]; inputs 0,1 on ADC 0, 2,3 on ADC 1
  input  adc_t                       adc [N_INPUTS][DEMUX],
  // registers
  input  logic [$clog2(DDEPTH)-1:0]  delay [N_INPUTS],
  input  logic [$clog2(N/2)-1:0]     fft_shift,
  input  logic                       gain_we,
  input  logic [1:0]                 gain_input,
  input  logic [$clog2(N/2)-1:0]     gain_chan,
  input  logic [GAIN_W-1:0]          gain_data,
  input  logic                       sat_clr,
  output logic [N_INPUTS-1:0]        sat_flag,
  output logic                       fft_ovf,
  input  logic [SCALAR_W-1:0]        int_scalar,
  input  logic [1:0]                 int_sel,
  // ADC snapshots
  input  logic [1:0]                 snap_trig,
  input  logic [$clog2(SNAP_D)-1:0]  snap_addr [2],
  output logic [4*ADC_W-1:0]         snap_data [2],
  output logic [1:0]                 snap_busy,
  output logic [1:0]                 snap_done,
  // raw stream to the 10 GbE transmitter
  output logic                       raw_valid,
  output logic                       raw_sync,
  output logic [$clog2(N/2)-1:0]     raw_chan,
  output cq_t                        raw_data [N_INPUTS],
  // integrated stream to the 10 GbE transmitter
  output logic                       int_valid,
  output logic                       int_sync,
  output logic [$clog2(N/2)-1:0]     int_chan,
  output logic [OUT_W-1:0]           int_data
);
  localparam int NC = N / 2;
  localparam int CW = $clog2(NC);

  logic sync;
  sync_gen u_sync (.clk, .rst, .arm, .pps, .sync, .armed);

  // Coarse delays.
  adc_t dly [N_INPUTS][DEMUX];
  for (genvar i = 0; i < N_INPUTS; i++) begin : g_dly
    coarse_delay #(.DEPTH(DDEPTH)) u_dly (
      .clk, .rst, .delay(delay[i]), .din(adc[i]), .dout(dly[i])
    );
  end

  // The delay line adds one register; delay sync to match.
  logic sync_d;
  always_ff @(posedge clk) sync_d <= rst ? 1'b0 : sync;

  // Snapshots of the undelayed ADC samples.
  for (genvar a = 0; a < 2; a++) begin : g_snap
    adc_snapshot #(.DEPTH(SNAP_D)) u_snap (
      .clk, .rst, .trig(snap_trig[a]),
      .din_a(adc[2*a]), .din_b(adc[2*a+1]),
      .rd_addr(snap_addr[a]), .rd_data(snap_data[a]),
      .busy(snap_busy[a]), .done(snap_done[a])
    );
  end

  // Filterbank.
  logic  pfb_sync;
  cplx_t spec [N_INPUTS];
  pfb #(.NIN(N_INPUTS), .N(N), .T(TAPS), .FIR_SHIFT(FIR_SHIFT)) u_pfb (
    .clk, .rst, .sync_in(sync_d), .din(dly), .shift(fft_shift),
    .sync_out(pfb_sync), .dout(spec), .ovf(fft_ovf)
  );

  // Raw stream.
  requant #(.N_CH(NC), .NIN(N_INPUTS)) u_rq (
    .clk, .rst, .sync_in(pfb_sync), .din(spec),
    .gain_we, .gain_input, .gain_chan, .gain_data, .sat_clr,
    .sync_out(raw_sync), .dout(raw_data), .sat_flag
  );

  logic [CW-1:0] rc;
  always_ff @(posedge clk) begin
    if (rst) begin
      raw_valid <= 1'b0;
      rc        <= '0;
    end else begin
      if (raw_sync) raw_valid <= 1'b1;
      rc <= raw_sync ? CW'(1) : rc + 1'b1;
    end
  end
  assign raw_chan = raw_sync ? '0 : rc;

  // Integrated stream.
  localparam int PW = 2 * DATA_W + $clog2(N_INPUTS) + 1;
  logic          pw_sync;
  logic [PW-1:0] pw;
  power_sum #(.NIN(N_INPUTS), .PW(PW)) u_pw (
    .clk, .rst, .sync_in(pfb_sync), .din(spec), .sync_out(pw_sync), .dout(pw)
  );

  logic             acc_valid, acc_sync;
  logic [CW-1:0]    acc_chan;
  logic [ACC_W-1:0] acc;
  integrator #(.N_CH(NC), .NA(NA), .IN_W(PW), .AW_(ACC_W)) u_int (
    .clk, .rst, .sync_in(pw_sync), .din(pw),
    .valid(acc_valid), .sync_out(acc_sync), .chan(acc_chan), .dout(acc)
  );

  bit_select u_bs (
    .clk, .rst, .valid_in(acc_valid), .sync_in(acc_sync), .din(acc),
    .scalar(int_scalar), .sel(int_sel),
    .valid(int_valid), .sync_out(int_sync), .dout(int_data)
  );

  logic [CW-1:0] chan_d;
  always_ff @(posedge clk) begin
    chan_d   <= acc_chan;
    int_chan <= chan_d;
  end
endmodule
