// tb_integrator: feeds spectra of NCH channels, one channel per clock, and
// checks that after every NA spectra counted from the sync exactly one
// integrated spectrum comes out, with valid only then, sync_out on its
// channel 0, the right channel numbers, and each value equal to the sum of
// the NA inputs of that channel (computed here, with large inputs so that
// the sum needs more than 32 bits). Checks that the block stays silent
// before the first sync and that a second sync restarts the count.
module tb_integrator;
  import dsa_pkg::*;
  localparam int NCH = 16, NA = 16, IN_W = 2 * DATA_W + 3;
  logic clk = 1'b0, rst = 1'b1, sync_in = 1'b0;
  always #5 clk = ~clk;
  logic [IN_W-1:0] din = '0;
  logic valid, sync_out;
  logic [3:0] chan;
  logic [ACC_W-1:0] dout;
  integrator #(.N_CH(NCH), .NA(NA), .IN_W(IN_W), .AW_(ACC_W)) dut (.*);

  int checks = 0, failures = 0, nvalid = 0, nsyncout = 0;
  longint unsigned acc [NCH];
  int spec_cnt = -1;
  bit exp_valid [$];
  longint unsigned exp_val [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor: valid, sync_out, chan and dout must match the queue.
  int ocyc = 0;
  always @(posedge clk) if (!rst) begin
    #1;
    if (exp_valid.size() > 0) begin
      bit ev; longint unsigned e;
      ev = exp_valid.pop_front(); e = exp_val.pop_front();
      checks++;
      if (valid != ev || (ev && dout != e)) begin
        failures++;
        if (failures < 6) $display("t=%0d valid %0d/%0d got %0d want %0d", ocyc, valid, ev, dout, e);
      end
    end
    if (valid) begin
      nvalid++;
      checks++;
      if (sync_out != (chan == 0)) begin failures++; $display("sync_out misplaced"); end
      if (sync_out) nsyncout++;
    end
    ocyc++;
  end

  task automatic feed_spectrum(bit with_sync);
    for (int k = 0; k < NCH; k++) begin
      longint unsigned v;
      v = {$urandom, $urandom} % (longint'(1) << 38);
      @(negedge clk);
      if (with_sync && k == 0) spec_cnt = 0;
      sync_in = with_sync && (k == 0);
      din = IN_W'(v);
      if (spec_cnt >= 0) begin
        acc[k] = ((spec_cnt % NA) == 0) ? v : acc[k] + v;
        exp_valid.push_back((spec_cnt % NA) == NA - 1);
        exp_val.push_back(acc[k]);
      end else begin
        exp_valid.push_back(1'b0);
        exp_val.push_back(0);
      end
    end
    if (spec_cnt >= 0) spec_cnt++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (3) feed_spectrum(1'b0);     // before any sync: silent
    feed_spectrum(1'b1);
    repeat (2 * NA - 1 + 5) feed_spectrum(1'b0);
    feed_spectrum(1'b1);                // restart mid-integration
    repeat (NA + 2) feed_spectrum(1'b0);
    @(negedge clk); sync_in = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (nvalid != 3 * NCH || nsyncout != 3) begin
      failures++;
      $display("valid count %0d sync count %0d", nvalid, nsyncout);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
