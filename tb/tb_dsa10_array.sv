// tb_dsa10_array: the whole digital array of DSA-10: five SNAP boards (20
// inputs) sharing one clock and one PPS, run at a reduced filterbank size
// (256 points, 128 channels) to keep the test short. Boards 0-3 are armed at
// different times before the first PPS edge and must start on it together:
// their raw and integrated streams must be cycle-aligned and, since all
// boards receive the same samples, identical. Board 4 is armed only after the
// first edge and must start exactly one PPS period later, on the second
// edge. The central node's sum of the five integrated spectra is formed here
// and checked against 5x board 0 while board 4 is excluded from the count.
module tb_dsa10_array;
  import dsa_pkg::*;
  localparam int NB = 5;
  localparam int N  = 256;
  localparam int NC = N / 2;
  localparam int CW = $clog2(NC);
  localparam int PPS_PERIOD = 3000;

  logic clk = 1'b0, rst = 1'b1;
  always #2 clk = ~clk;
  logic pps = 1'b0;
  logic [NB-1:0] arm = '0, armed;
  adc_t adc [N_INPUTS][DEMUX];
  logic [DELAY_W-1:0] delay [N_INPUTS];
  logic [CW-1:0] fft_shift = '1;
  logic gain_we = 1'b0, sat_clr = 1'b0;
  logic [1:0] gain_input = '0;
  logic [CW-1:0] gain_chan = '0;
  logic [GAIN_W-1:0] gain_data = GAIN_W'(4096);

  logic [N_INPUTS-1:0] sat_flag [NB];
  logic [NB-1:0] fft_ovf, raw_valid, raw_sync, int_valid, int_sync;
  logic [1:0] snap_busy [NB], snap_done [NB];
  logic [31:0] snap_data [NB][2];
  logic [CW-1:0] raw_chan [NB], int_chan [NB];
  cq_t raw_data [NB][N_INPUTS];
  logic [OUT_W-1:0] int_data [NB];
  logic [9:0] snap_addr [2];

  for (genvar b = 0; b < NB; b++) begin : g_board
    snap_fpga_top #(.N(N)) u_board (
      .clk, .rst, .pps, .arm(arm[b]), .armed(armed[b]), .adc, .delay, .fft_shift,
      .gain_we, .gain_input, .gain_chan, .gain_data, .sat_clr,
      .sat_flag(sat_flag[b]), .fft_ovf(fft_ovf[b]),
      .int_scalar(16'd1), .int_sel(2'd0),
      .snap_trig(2'b00), .snap_addr, .snap_data(snap_data[b]),
      .snap_busy(snap_busy[b]), .snap_done(snap_done[b]),
      .raw_valid(raw_valid[b]), .raw_sync(raw_sync[b]), .raw_chan(raw_chan[b]),
      .raw_data(raw_data[b]),
      .int_valid(int_valid[b]), .int_sync(int_sync[b]), .int_chan(int_chan[b]),
      .int_data(int_data[b])
    );
  end

  int checks = 0, failures = 0, cyc = 0;
  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk)
    for (int i = 0; i < N_INPUTS; i++)
      for (int l = 0; l < DEMUX; l++)
        adc[i][l] <= adc_t'($rtoi(40.0 * $sin(0.37 * (2 * cyc + l) + i)) + int'(((cyc * 7 + l * 3 + i) * 2654435761) >> 28) - 8);

  // Stream comparison among boards 0-3, and the central-node sum.
  int first_raw [NB];
  int n_cmp = 0, n_int = 0;
  always @(negedge clk) if (!rst) begin
    for (int b = 0; b < NB; b++)
      if (raw_sync[b] && first_raw[b] < 0) first_raw[b] = cyc;
    if (raw_valid[0]) begin
      n_cmp++;
      for (int b = 1; b < 4; b++)
        check($sformatf("board %0d raw stream equals board 0", b),
              raw_sync[b] == raw_sync[0] && raw_chan[b] == raw_chan[0] && raw_data[b] == raw_data[0]);
    end
    if (int_valid[0]) begin
      longint unsigned tot;
      n_int++;
      tot = 0;
      for (int b = 0; b < 4; b++) begin
        check("integrated streams aligned", int_valid[b] && int_chan[b] == int_chan[0]);
        tot += int_data[b];
      end
      check("central sum of boards 0-3", tot == 4 * longint'(int_data[0]));
    end
  end

  initial begin
    for (int b = 0; b < NB; b++) first_raw[b] = -1;
    for (int i = 0; i < N_INPUTS; i++) delay[i] = DELAY_W'(3);
    snap_addr[0] = '0; snap_addr[1] = '0;
    repeat (5) @(negedge clk);
    rst = 1'b0;
    // Gains of 1.0 for every input and channel.
    for (int i = 0; i < N_INPUTS; i++)
      for (int k = 0; k < NC; k++) begin
        gain_we = 1'b1; gain_input = 2'(i); gain_chan = CW'(k);
        @(negedge clk);
      end
    gain_we = 1'b0;
    // Boards 0-3 armed at different times before the first edge.
    for (int b = 0; b < 4; b++) begin
      arm[b] = 1'b1; @(negedge clk); arm[b] = 1'b0;
      repeat (37 * b + 5) @(negedge clk);
    end
    check("boards 0-3 armed", armed[3:0] == 4'hf && !armed[4]);
    pps = 1'b1; repeat (100) @(negedge clk); pps = 1'b0;
    arm[4] = 1'b1; @(negedge clk); arm[4] = 1'b0;
    repeat (PPS_PERIOD - 101) @(negedge clk);
    pps = 1'b1; repeat (100) @(negedge clk); pps = 1'b0;
    // The filter history holds start-up contents for its first frames, which
    // may saturate; clear the flags once it has been refilled.
    repeat (N * 4) @(negedge clk);
    sat_clr = 1'b1; @(negedge clk); sat_clr = 1'b0;
    repeat (N * 16) @(negedge clk);
    check("boards 0-3 start on the same clock",
          first_raw[0] > 0 && first_raw[1] == first_raw[0] && first_raw[2] == first_raw[0] && first_raw[3] == first_raw[0]);
    check($sformatf("board 4 starts one PPS later (%0d)", first_raw[4] - first_raw[0]),
          first_raw[4] - first_raw[0] == PPS_PERIOD);
    check("streams compared", n_cmp > 10 * NC && n_int >= NC);
    // At unit gain the tone exceeds the 4-bit range, so the flags are set
    // again after the clear, identically on every board.
    check("saturation flags set after clear", sat_flag[0] != '0);
    check("saturation flags equal on boards 0-3",
          sat_flag[1] == sat_flag[0] && sat_flag[2] == sat_flag[0] && sat_flag[3] == sat_flag[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
