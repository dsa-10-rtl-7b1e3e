// adc_snapshot: raw-sample capture buffer for one ADC chip (two inputs, two
// samples each per clock), for inspecting levels from software. The paper's
// block diagram names this block (one per ADC) without describing it; this
// design's version is a plain one-shot capture: a `trig` pulse records the
// next DEPTH clocks of samples into a RAM, `done` then rises, and software
// reads word `rd_addr` one clock later on `rd_data`. Word layout, LSB first:
// input A sample 0, input A sample 1, input B sample 0, input B sample 1.
module adc_snapshot
  import dsa_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     trig,
  input  adc_t                     din_a [DEMUX],
  input  adc_t                     din_b [DEMUX],
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [4*ADC_W-1:0]       rd_data,
  output logic                     busy,
  output logic                     done
);
  localparam int AW = $clog2(DEPTH);
  logic [4*ADC_W-1:0] mem [DEPTH];
  logic [AW-1:0] wa;
  logic [4*ADC_W-1:0] word;

  assign word = {din_b[1], din_b[0], din_a[1], din_a[0]};

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      wa   <= '0;
    end else if (trig && !busy) begin
      busy <= 1'b1;
      done <= 1'b0;
      wa   <= '0;
    end else if (busy) begin
      wa <= wa + 1'b1;
      if (wa == AW'(DEPTH - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) mem[wa] <= word;
    rd_data <= mem[rd_addr];
  end
endmodule
