// power_sum: detector and incoherent adder of the integrated stream. For each
// channel it forms |x|^2 = re^2 + im^2 of every input and adds the four
// inputs into one unsigned value, as the paper describes; the full-precision
// width (no rounding) and the two pipeline registers are this design's
// choices.
// Timing: dout/sync_out follow din/sync_in by 2 clocks, one channel per clock.
module power_sum
  import dsa_pkg::*;
#(
  parameter int NIN = N_INPUTS,
  parameter int PW  = 2 * DATA_W + $clog2(NIN) + 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          sync_in,
  input  cplx_t         din [NIN],
  output logic          sync_out,
  output logic [PW-1:0] dout
);
  localparam int SW = 2 * DATA_W;   // one square
  logic [SW:0] pw [NIN];
  logic s1;

  logic signed [SW-1:0] xr [NIN], xi [NIN];
  logic        [SW:0]   sq [NIN];
  always_comb
    for (int i = 0; i < NIN; i++) begin
      xr[i] = SW'(din[i].re);
      xi[i] = SW'(din[i].im);
      sq[i] = {1'b0, xr[i] * xr[i]} + {1'b0, xi[i] * xi[i]};
    end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NIN; i++) pw[i] <= sq[i];
  end

  logic [PW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < NIN; i++) sum += PW'(pw[i]);
  end

  always_ff @(posedge clk) dout <= sum;

  always_ff @(posedge clk) begin
    if (rst) begin s1 <= 1'b0; sync_out <= 1'b0; end
    else     begin s1 <= sync_in; sync_out <= s1; end
  end
endmodule
