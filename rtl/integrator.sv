// integrator: accumulates N_ACC (16) consecutive power spectra channel by
// channel in ACC_W (64) bit accumulators, which at one spectrum per 8.192 us
// gives the paper's 131.072 us resolution. The accumulators live in an
// N_CH-word RAM that is read, added to and written back each clock; on the
// first spectrum of a period the old value is replaced instead of added to,
// and on the last the finished sum is sent out with `valid`. The sizes follow
// the paper; the RAM organisation is this design's choice.
// Interface: one channel per clock from the power adder, channel 0 of a
// spectrum marked by `sync_in` (the first one arms the block; any later one
// restarts the count of spectra). Output: `valid` with `chan` and `dout` for
// each channel of an integrated spectrum, `sync_out` with its channel 0.
// Timing: an output channel appears 1 clock after its last input.
module integrator
  import dsa_pkg::*;
#(
  parameter int N_CH = N_CHAN,
  parameter int NA   = N_ACC,
  parameter int IN_W = 2 * DATA_W + 3,
  parameter int AW_  = ACC_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    sync_in,
  input  logic [IN_W-1:0]         din,
  output logic                    valid,
  output logic                    sync_out,
  output logic [$clog2(N_CH)-1:0] chan,
  output logic [AW_-1:0]          dout
);
  localparam int CW = $clog2(N_CH);
  localparam int NW = $clog2(NA);

  logic [AW_-1:0] acc [N_CH];
  logic [CW-1:0]  cnt, k;
  logic [NW-1:0]  spec_q, spec;
  logic           running;

  always_comb begin
    k    = sync_in ? '0 : cnt;
    spec = sync_in ? '0 : spec_q;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0; spec_q <= '0; running <= 1'b0;
    end else begin
      cnt <= k + 1'b1;
      if (sync_in) running <= 1'b1;
      if (k == CW'(N_CH - 1)) spec_q <= spec + 1'b1;
      else                    spec_q <= spec;
    end
  end

  logic [AW_-1:0] sum;
  always_comb sum = (spec == '0) ? AW_'(din) : acc[k] + AW_'(din);

  always_ff @(posedge clk) begin
    acc[k] <= sum;
    dout   <= sum;
    chan   <= k;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid    <= 1'b0;
      sync_out <= 1'b0;
    end else begin
      valid    <= (running || sync_in) && (spec == NW'(NA - 1));
      sync_out <= (running || sync_in) && (spec == NW'(NA - 1)) && (k == '0);
    end
  end
endmodule
