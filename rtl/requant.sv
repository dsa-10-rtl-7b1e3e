// requant: the raw-stream requantiser for the four inputs. Every channel of
// every input is multiplied by its own gain from a 2048 x 4 coefficient RAM,
// rounded to the nearest integer with ties to even, and limited to the 4-bit
// signed range: values above +7 become +7, below -8 become -8. A sticky flag
// per input records that saturation happened; `sat_clr` clears it. This
// follows the paper's description; the gain format (unsigned GAIN_W bits with
// GAIN_FRAC fractional bits, so 4096 is a gain of 1.0) and the gain write
// port are this design's choices.
// Interface: one channel of each input per clock, channel k at the k-th clock
// after `sync_in`. Gains are written through gain_we/gain_input/gain_chan.
// Timing: dout/sync_out follow din/sync_in by 2 clocks.
module requant
  import dsa_pkg::*;
#(
  parameter int N_CH = N_CHAN,
  parameter int NIN  = N_INPUTS
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      sync_in,
  input  cplx_t                     din  [NIN],
  // gain RAM write port
  input  logic                      gain_we,
  input  logic [$clog2(NIN)-1:0]    gain_input,
  input  logic [$clog2(N_CH)-1:0]   gain_chan,
  input  logic [GAIN_W-1:0]         gain_data,
  input  logic                      sat_clr,
  output logic                      sync_out,
  output cq_t                       dout [NIN],
  output logic [NIN-1:0]            sat_flag
);
  localparam int AW = $clog2(N_CH);
  localparam int PW = DATA_W + GAIN_W + 1;

  logic [GAIN_W-1:0] gain [NIN][N_CH];
  logic [AW-1:0] cnt, k;
  always_comb k = sync_in ? '0 : cnt;
  always_ff @(posedge clk) begin
    if (rst) cnt <= '0;
    else     cnt <= k + 1'b1;
  end

  always_ff @(posedge clk)
    if (gain_we) gain[gain_input][gain_chan] <= gain_data;

  // Stage 1: multiply.
  logic signed [PW-1:0] pr [NIN], pi [NIN];
  logic s1;
  always_ff @(posedge clk) begin
    for (int i = 0; i < NIN; i++) begin
      pr[i] <= PW'(din[i].re) * $signed({1'b0, gain[i][k]});
      pi[i] <= PW'(din[i].im) * $signed({1'b0, gain[i][k]});
    end
  end

  // Round half to even at the binary point GAIN_FRAC, then saturate.
  function automatic logic signed [Q_W-1:0] q(logic signed [PW-1:0] v, output logic o);
    logic signed [PW-1:0] ip;
    logic [GAIN_FRAC-1:0] fr;
    logic signed [PW-1:0] r;
    ip = v >>> GAIN_FRAC;
    fr = v[GAIN_FRAC-1:0];
    if (fr > {1'b1, {(GAIN_FRAC-1){1'b0}}} ||
        (fr == {1'b1, {(GAIN_FRAC-1){1'b0}}} && ip[0]))
      r = ip + 1;
    else
      r = ip;
    o = 1'b0;
    if (r > PW'((1 << (Q_W-1)) - 1)) begin o = 1'b1; return {1'b0, {(Q_W-1){1'b1}}}; end
    if (r < -PW'(1 << (Q_W-1)))      begin o = 1'b1; return {1'b1, {(Q_W-1){1'b0}}}; end
    return r[Q_W-1:0];
  endfunction

  logic [1:0] o [NIN];
  cq_t  qv [NIN];
  always_comb
    for (int i = 0; i < NIN; i++) begin
      qv[i].re = q(pr[i], o[i][0]);
      qv[i].im = q(pi[i], o[i][1]);
    end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NIN; i++) dout[i] <= qv[i];
  end

  always_ff @(posedge clk) begin
    if (rst) begin s1 <= 1'b0; sync_out <= 1'b0; end
    else     begin s1 <= sync_in; sync_out <= s1; end
  end

  always_ff @(posedge clk) begin
    if (rst || sat_clr) sat_flag <= '0;
    else
      for (int i = 0; i < NIN; i++)
        if (|o[i]) sat_flag[i] <= 1'b1;
  end
endmodule
