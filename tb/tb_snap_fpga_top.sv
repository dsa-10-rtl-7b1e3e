// tb_snap_fpga_top: end-to-end test of one SNAP board at full size (4096-point
// filterbank, 2048 channels, 16-spectrum integration; no parameter is
// overridden). The same tone-plus-noise signal reaches the four inputs with
// different "cable" delays of 5, 0, 12 and 3 clocks, and the coarse delay
// registers are set to 7, 12, 0 and 9 so that all four line up again.
// Checked:
//  - sync only after arm, on the PPS edge; raw_sync at the expected latency
//  - after alignment the four filterbank outputs are identical
//  - input 0's spectrum, one full frame, against an FIR + DFT reference
//    computed here for a set of channels around and away from the tone
//  - raw stream: every channel of every input equals the round-half-even,
//    clamped product of the spectrum and its gain; channel numbering
//  - saturation: only input 3 (large gain) raises its flag; sat_clr clears
//  - integrated stream: two periods of 16 spectra, each value equal to the
//    scaled, bit-selected sum of |x|^2 over inputs and spectra, recomputed
//    from the filterbank output; the slice selection is changed between them
//  - ADC snapshot of ADC 0 against the samples that were driven
// Each mechanism (PPS start, delay alignment, saturation, flag clear,
// integration dump, slice change, snapshot) is counted and must occur.
module tb_snap_fpga_top;
  import dsa_pkg::*;
  localparam int NC = N_CHAN;
  localparam real PI = 3.14159265358979323846;
  localparam int  AMP = 20;
  localparam int  TONE = 300;
  localparam int  CABLE [N_INPUTS] = '{5, 0, 12, 3};
  localparam int  DMAX = 12;
  int gain_now [N_INPUTS] = '{2, 2, 2, 100};
  bit gain_changing = 1'b0;

  logic clk = 1'b0, rst = 1'b1;
  always #2 clk = ~clk;
  logic pps = 1'b0, arm = 1'b0, armed;
  adc_t adc [N_INPUTS][DEMUX];
  logic [DELAY_W-1:0] delay [N_INPUTS];
  logic [10:0] fft_shift = '1;
  logic gain_we = 1'b0;
  logic [1:0] gain_input = '0;
  logic [10:0] gain_chan = '0;
  logic [GAIN_W-1:0] gain_data = '0;
  logic sat_clr = 1'b0;
  logic [N_INPUTS-1:0] sat_flag;
  logic fft_ovf;
  logic [SCALAR_W-1:0] int_scalar = 16'd3;
  logic [1:0] int_sel = 2'd1;
  logic [1:0] snap_trig = '0;
  logic [9:0] snap_addr [2];
  logic [31:0] snap_data [2];
  logic [1:0] snap_busy, snap_done;
  logic raw_valid, raw_sync;
  logic [10:0] raw_chan;
  cq_t raw_data [N_INPUTS];
  logic int_valid, int_sync;
  logic [10:0] int_chan;
  logic [OUT_W-1:0] int_data;

  snap_fpga_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_start = 0, n_align = 0, n_sat = 0, n_clr = 0, n_dump = 0, n_selchg = 0, n_snap = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  initial begin
    repeat (120000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Source signal, sample index s (two per clock).
  function automatic int sig(int s);
    int unsigned h;
    h = (s * 32'd2654435761) >> 20;
    return $rtoi(AMP * $cos(2.0 * PI * TONE * s / 4096.0)) + int'(h % 9) - 4;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // ADC drive: input i sees the signal CABLE[i] clocks late.
  int base = 100;
  always @(negedge clk)
    for (int i = 0; i < N_INPUTS; i++)
      for (int l = 0; l < DEMUX; l++)
        adc[i][l] <= adc_t'(sig(2 * (cyc - CABLE[i] + base) + l));

  // ---------------- filterbank reference for input 0 ----------------
  // Record the FIR input stream from the synchronised start.
  int fir_in [$];
  int t_rec = -1;
  bit rec = 0;
  always @(negedge clk) begin
    if (dut.sync_d && !rst && !rec) begin rec = 1; t_rec = cyc; end
    if (rec && fir_in.size() < 4 * 4096) begin
      fir_in.push_back(int'(dut.dly[0][0]));
      fir_in.push_back(int'(dut.dly[0][1]));
    end
  end

  longint hc [4*4096];
  initial
    for (int i = 0; i < 4*4096; i++) begin
      real w, a, s, v;
      w = 0.54 - 0.46 * $cos(2.0 * PI * i / (4*4096 - 1));
      a = real'(i) / 4096.0 - 2.0;
      s = (a == 0.0) ? 1.0 : $sin(PI * a) / (PI * a);
      v = w * s * 131071.0;
      hc[i] = (v < 0.0) ? -longint'($rtoi(-v + 0.5)) : longint'($rtoi(v + 0.5));
    end

  // Spectrum frames: frame f starts at the first pfb_sync + f*NC.
  int t_pfb = -1;
  cplx_t frame3 [NC];
  int spec_idx = -1;
  always @(negedge clk) begin
    if (rec && dut.pfb_sync && t_pfb < 0) t_pfb = cyc;
    if (t_pfb >= 0) begin
      spec_idx = cyc - t_pfb;
      if (spec_idx >= 3 * NC && spec_idx < 4 * NC) frame3[spec_idx - 3 * NC] = dut.spec[0];
      if (spec_idx >= 3 * NC) begin
        n_align += (dut.spec[1] == dut.spec[0] && dut.spec[2] == dut.spec[0] && dut.spec[3] == dut.spec[0]) ? 1 : 0;
        check("inputs aligned", dut.spec[1] == dut.spec[0] && dut.spec[2] == dut.spec[0] && dut.spec[3] == dut.spec[0]);
      end
    end
  end

  task automatic check_frame3();
    int chans [12] = '{0, 1, 100, 298, 299, 300, 301, 302, 1000, 1500, 2000, 2047};
    longint y [4096];
    int peak_k = 0;
    real best = 0.0;
    for (int p = 0; p < 4096; p++) begin
      longint acc;
      acc = 0;
      for (int t = 0; t < 4; t++) acc += hc[(3 - t) * 4096 + p] * fir_in[3 * 4096 + p - t * 4096];
      y[p] = acc >>> 8;
    end
    foreach (chans[j]) begin
      real rr, ri;
      int k;
      k = chans[j];
      rr = 0.0; ri = 0.0;
      for (int p = 0; p < 4096; p++) begin
        rr += y[p] * $cos(2.0 * PI * k * p / 4096.0);
        ri -= y[p] * $sin(2.0 * PI * k * p / 4096.0);
      end
      rr /= NC; ri /= NC;
      check($sformatf("spectrum ch %0d: got %0d,%0d ref %0.1f,%0.1f", k, frame3[k].re, frame3[k].im, rr, ri),
            $itor(frame3[k].re) - rr < 30.0 && $itor(frame3[k].re) - rr > -30.0 &&
            $itor(frame3[k].im) - ri < 30.0 && $itor(frame3[k].im) - ri > -30.0);
    end
    for (int k = 0; k < NC; k++) begin
      real m;
      m = $itor(frame3[k].re) ** 2 + $itor(frame3[k].im) ** 2;
      if (m > best) begin best = m; peak_k = k; end
    end
    check($sformatf("tone in channel %0d", peak_k), peak_k == TONE);
  endtask

  // ---------------- raw stream ----------------
  function automatic int rq(int d, int g);
    longint v, ip, fr;
    v = longint'(d) * g;
    ip = v >>> 12;
    fr = v - (ip <<< 12);
    if (fr > 2048 || (fr == 2048 && (ip % 2 != 0))) ip++;
    if (ip > 7) ip = 7;
    if (ip < -8) ip = -8;
    return int'(ip);
  endfunction

  cplx_t specq [$][N_INPUTS];
  int raw_t0 = -1, nraw = 0;
  logic [N_INPUTS-1:0] exp_sat = '0;
  always @(negedge clk) begin
    cplx_t s [N_INPUTS];
    for (int i = 0; i < N_INPUTS; i++) s[i] = dut.spec[i];
    specq.push_back(s);
    if (specq.size() > 3) void'(specq.pop_front());
    if (rec && raw_sync && raw_t0 < 0) raw_t0 = cyc;
    if (raw_t0 >= 0 && specq.size() == 3) begin
      nraw++;
      check("raw channel number", int'(raw_chan) == (cyc - raw_t0) % NC);
      for (int i = 0; i < N_INPUTS; i++) begin
        int er, ei;
        er = rq(int'(specq[0][i].re), gain_now[i]);
        ei = rq(int'(specq[0][i].im), gain_now[i]);
        if (er inside {7, -8} || ei inside {7, -8}) exp_sat[i] = 1'b1;
        if (!(gain_changing && i == 3))
          check($sformatf("raw in %0d ch %0d", i, raw_chan),
                int'(raw_data[i].re) == er && int'(raw_data[i].im) == ei);
      end
    end
  end

  // ---------------- integrated stream ----------------
  longint unsigned pacc [NC];
  int int_t0 = -1, nint = 0;
  logic [15:0] int_exp [$];
  always @(negedge clk) begin
    if (t_pfb >= 0 && spec_idx >= 0) begin
      int k, sp;
      longint unsigned p;
      k = spec_idx % NC;
      sp = spec_idx / NC;
      p = 0;
      for (int i = 0; i < N_INPUTS; i++) begin
        cplx_t c;
        longint r, m;
        c = dut.spec[i];
        r = longint'(c.re);
        m = longint'(c.im);
        p += longint'(r * r + m * m);
      end
      pacc[k] = (sp % 16 == 0) ? p : pacc[k] + p;
      if (sp % 16 == 15) begin
        logic [63:0] prod;
        prod = pacc[k] * 64'(int_scalar);
        int_exp.push_back(prod[16 * int_sel +: 16]);
      end
    end
    if (int_valid) begin
      logic [15:0] e;
      if (int_exp.size() == 0) check("integrated output expected", 0);
      else begin
        e = int_exp.pop_front();
        nint++;
        check($sformatf("integrated ch %0d got %0d want %0d", int_chan, int_data, e), int_data == e);
        check("integrated channel number", int_chan == 11'((nint - 1) % NC));
        if (int_sync) begin
          n_dump++;
          check("int_sync on channel 0", int_chan == 0);
        end
      end
    end
  end

  // ---------------- main sequence ----------------
  int t_sync;
  initial begin
    for (int i = 0; i < N_INPUTS; i++) delay[i] = DELAY_W'(DMAX - CABLE[i]);
    snap_addr[0] = '0; snap_addr[1] = '0;
    repeat (5) @(negedge clk);
    rst = 1'b0;
    // Gains.
    for (int i = 0; i < N_INPUTS; i++)
      for (int k = 0; k < NC; k++) begin
        gain_we = 1'b1; gain_input = 2'(i); gain_chan = 11'(k); gain_data = GAIN_W'(gain_now[i]);
        @(negedge clk);
      end
    gain_we = 1'b0;
    // A PPS edge before arming does nothing.
    pps = 1'b1; repeat (20) @(negedge clk); pps = 1'b0; repeat (20) @(negedge clk);
    check("no start without arm", !rec);
    arm = 1'b1; @(negedge clk); arm = 1'b0;
    check("armed", armed);
    repeat (50) @(negedge clk);
    pps = 1'b1; t_sync = cyc;
    @(negedge clk);
    wait (rec);
    n_start++;
    check("started 3-4 clocks after the PPS edge", cyc - t_sync >= 3 && cyc - t_sync <= 5);
    // Snapshot of ADC 0 while the filterbank fills.
    snap_trig = 2'b01; @(negedge clk); snap_trig = 2'b00;
    begin
      int ts;
      int dd0 [$], dd1 [$];
      ts = cyc;
      wait (snap_done[0]);
      @(negedge clk);
      for (int a = 0; a < 1024; a += 97) begin
        int c;
        snap_addr[0] = 10'(a);
        @(negedge clk); @(negedge clk);
        // Word a holds the samples driven during clock ts + a.
        c = ts + a;
        check($sformatf("snapshot word %0d", a),
              snap_data[0] == {adc_t'(sig(2 * (c - CABLE[1] + base) + 1)), adc_t'(sig(2 * (c - CABLE[1] + base))),
                               adc_t'(sig(2 * (c - CABLE[0] + base) + 1)), adc_t'(sig(2 * (c - CABLE[0] + base)))});
      end
      n_snap++;
    end
    pps = 1'b0;
    wait (t_pfb >= 0 && spec_idx == 4 * NC);
    check_frame3();
    // Clear flags raised while the FIR history was still filling.
    sat_clr = 1'b1; exp_sat = '0; @(negedge clk); sat_clr = 1'b0; exp_sat = '0;
    // First integration ends at spectrum 16; switch the slice after it.
    wait (n_dump == 1);
    wait (spec_idx == 16 * NC + 100);
    check("saturation flags", sat_flag == exp_sat && exp_sat == 4'b1000);
    if (sat_flag[3]) n_sat++;
    gain_changing = 1'b1;
    gain_we = 1'b1; gain_input = 2'd3;
    for (int k = 0; k < NC; k++) begin gain_chan = 11'(k); gain_data = GAIN_W'(2); @(negedge clk); end
    gain_we = 1'b0;
    gain_now[3] = 2;
    repeat (4) @(negedge clk);
    gain_changing = 1'b0;
    sat_clr = 1'b1; @(negedge clk); sat_clr = 1'b0;
    repeat (NC + 10) @(negedge clk);
    check("flags clear once gain lowered", sat_flag == '0);
    if (sat_flag == '0) n_clr++;
    wait (spec_idx == 20 * NC);
    int_sel = 2'd0; n_selchg++;
    wait (n_dump == 2);
    repeat (NC + 20) @(negedge clk);
    check("two integrations, 2048 values each", nint == 2 * NC);
    check($sformatf("raw latency %0d clocks after sync (4125)", raw_t0 - t_rec + 1), raw_t0 - t_rec + 1 == 4125);
    check("raw stream ran", nraw > 30 * NC);
    check("raw_valid", raw_valid);
    check("no FFT overflow at this level", !fft_ovf);
    $display("mechanisms: start=%0d align=%0d sat=%0d clr=%0d dump=%0d selchg=%0d snap=%0d",
             n_start, n_align, n_sat, n_clr, n_dump, n_selchg, n_snap);
    check("every mechanism exercised",
          n_start > 0 && n_align > 0 && n_sat > 0 && n_clr > 0 && n_dump > 1 && n_selchg > 0 && n_snap > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
