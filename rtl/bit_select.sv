// bit_select: output stage of the integrated stream. Each 64-bit integrated
// value is multiplied by one unsigned 16-bit scalar shared by all channels,
// and one of four 16-bit slices of the product is sent on: `sel` = 0, 1, 2, 3
// picks bits 1-16, 17-32, 33-48 or 49-64 (bits [15:0] ... [63:48] counting
// from 0). Scalar, slice positions and widths follow the paper. Product bits
// above 64 are dropped and the slice is taken without saturation; both are
// this design's reading of the paper.
// Timing: dout/valid/sync_out follow din/valid_in/sync_in by 2 clocks.
module bit_select
  import dsa_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                valid_in,
  input  logic                sync_in,
  input  logic [ACC_W-1:0]    din,
  input  logic [SCALAR_W-1:0] scalar,
  input  logic [1:0]          sel,
  output logic                valid,
  output logic                sync_out,
  output logic [OUT_W-1:0]    dout
);
  logic [ACC_W-1:0] prod;
  logic             v1, s1;
  logic [1:0]       sel1;

  always_ff @(posedge clk) begin
    prod <= din * ACC_W'(scalar);
    sel1 <= sel;
    if (rst) begin
      v1 <= 1'b0; s1 <= 1'b0; valid <= 1'b0; sync_out <= 1'b0;
    end else begin
      v1 <= valid_in; s1 <= sync_in;
      valid <= v1;    sync_out <= s1;
    end
    dout <= prod[sel1 * OUT_W +: OUT_W];
  end
endmodule
