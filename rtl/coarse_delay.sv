// coarse_delay: programmable whole-cycle delay for one input, used to line up
// antennas before the filterbank. As in the paper, the samples are written
// into a block-RAM circular buffer and read back a user-set number of clock
// cycles later; one clock carries two samples, so one step is 4 ns at
// 500 MS/s. The buffer depth (1024 cycles) is this design's choice.
// Interface: `din` (two samples) every clock, `delay` static register.
// Timing: dout(t) = din(t - delay - 1); the extra cycle is the RAM read
// register. Changing `delay` takes effect immediately.
module coarse_delay
  import dsa_pkg::*;
#(
  parameter int DEPTH = 1 << DELAY_W
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [$clog2(DEPTH)-1:0] delay,
  input  adc_t                     din  [DEMUX],
  output adc_t                     dout [DEMUX]
);
  localparam int AW = $clog2(DEPTH);
  logic [DEMUX*ADC_W-1:0] mem [DEPTH];
  logic [AW-1:0] wptr;
  logic [AW-1:0] rptr;
  logic [DEMUX*ADC_W-1:0] wword, rword;

  always_comb begin
    for (int i = 0; i < DEMUX; i++) wword[i*ADC_W +: ADC_W] = din[i];
    rptr = wptr - delay;
  end

  always_ff @(posedge clk) begin
    if (rst) wptr <= '0;
    else     wptr <= wptr + 1'b1;
  end

  // Read before write: a delay of 0 returns the sample written this cycle
  // through the bypass, so the latency is always delay + 1.
  always_ff @(posedge clk) begin
    mem[wptr] <= wword;
    rword     <= (delay == '0) ? wword : mem[rptr];
  end

  always_comb
    for (int i = 0; i < DEMUX; i++) dout[i] = rword[i*ADC_W +: ADC_W];
endmodule
