// sync_gen: starts the data streams of all boards on the same second.
// Software sets `arm`; the design then waits for the next rising edge of the
// pulse-per-second input and issues a single-cycle `sync`, which every
// downstream block uses to reset its frame counters. The paper gives the rule
// (start on the rising edge of the PPS following the request); the two-stage
// synchroniser on PPS and the one-shot arm latch are this design's choices.
// Timing: `sync` is high for one clock, three clocks after the PPS edge
// reaches the input (two synchroniser stages plus the edge register).
module sync_gen (
  input  logic clk,
  input  logic rst,
  input  logic arm,      // pulse or level: arms the next PPS
  input  logic pps,      // asynchronous 1 PPS
  output logic sync,     // one-cycle start pulse
  output logic armed     // high while waiting for the PPS edge
);
  logic [2:0] pps_sr;    // two synchroniser stages + previous value

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_sr <= '0;
      armed  <= 1'b0;
      sync   <= 1'b0;
    end else begin
      pps_sr <= {pps_sr[1:0], pps};
      sync   <= 1'b0;
      if (armed && pps_sr[1] && !pps_sr[2]) begin
        sync  <= 1'b1;
        armed <= 1'b0;
      end else if (arm) begin
        armed <= 1'b1;
      end
    end
  end
endmodule
