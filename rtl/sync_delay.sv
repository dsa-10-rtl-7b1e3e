// sync_delay: delays a single-cycle frame-start pulse by LAT clocks with a
// down-counter instead of a shift register, so long delays cost only a
// counter. A new pulse restarts the count, so LAT must be shorter than the
// spacing of the pulses (one frame); every user in this design meets that.
module sync_delay #(
  parameter int LAT = 2
) (
  input  logic clk,
  input  logic rst,
  input  logic sync_in,
  output logic sync_out
);
  localparam int CW = $clog2(LAT + 1);
  logic [CW-1:0] cnt;
  always_ff @(posedge clk) begin
    if (rst)               cnt <= '0;
    else if (sync_in)      cnt <= CW'(LAT);
    else if (cnt != '0)    cnt <= cnt - 1'b1;
  end
  assign sync_out = (cnt == CW'(1));
endmodule
