// tb_adw_channel: testbench of one ADC digital wrapper channel.
// A first-order delta-sigma modulator model (real arithmetic, testbench
// only) turns an analog test signal into the 1-bit stream. Checks:
//  - a DC input of +0.5 full scale with the high-pass off gives samples of
//    128 +- 6 (9-bit full scale 256);
//  - the output sample period is 256 clock cycles (19.53 kHz at 5 MHz) in
//    both bandwidth modes;
//  - with the 300 Hz high-pass, the DC is removed (|y| < 10 after settling);
//  - every flag equals |x(n)| > amp_thr and x(n)^2 - x(n+1)x(n-1) > neo_thr
//    computed from the delivered samples;
//  - a spike-like burst is flagged by the detector, switches the channel
//    to high-bandwidth mode, which falls back to low bandwidth afterwards;
//  - the FIFO keeps order and reports overflow when not read;
//  - a 5 kHz tone passes in high-bandwidth mode and is attenuated (below
//    70 %) in low-bandwidth mode (2.4 kHz band).
module tb_adw_channel;
  import psoc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  hpf_sel_e hpf_sel;
  logic force_hb, mod_en, hb_mode, dsm_bit, f_valid, rd_en, f_det, ovf;
  logic [8:0] amp_thr, f_data;
  logic [19:0] neo_thr;
  logic [7:0] hold_len;
  adw_channel dut (.*);

  real u = 0.0, integ = 0.0;
  bit sine_on = 0;
  // 5 kHz test tone: inside the high (10 kHz) but outside the low
  // (2.4 kHz) bandwidth
  always @(posedge clk) if (sine_on) u = 0.6 * $sin(2.0 * 3.14159265 * 5000.0 * real'(cyc) * 200.0e-9);
  always @(posedge clk) if (rst_n && mod_en) begin
    integ = integ + u - (dsm_bit ? 1.0 : -1.0);
    dsm_bit <= (integ >= 0.0);
  end

  int ys [$]; bit dets [$]; longint tpush [$];
  longint cyc = 0;
  always @(posedge clk) cyc++;
  logic sd_prev_v;
  always @(posedge clk) if (rst_n && dut.sd_v) tpush.push_back(cyc);
  always @(posedge clk) if (rst_n && rd_en && f_valid) begin
    ys.push_back(int'(signed'(f_data))); dets.push_back(f_det);
  end
  int nhb_seen = 0;
  always @(posedge clk) if (hb_mode) nhb_seen++;

  task automatic wait_samples(int n);
    int k0; k0 = ys.size();
    while (ys.size() < k0 + n) @(negedge clk);
  endtask

  initial begin
    int s, ndet, ok_rate;
    hpf_sel = HPF_OFF; force_hb = 0; rd_en = 1; dsm_bit = 0;
    amp_thr = 9'd60; neo_thr = 20'd3000; hold_len = 8'd20;
    repeat (3) @(negedge clk); rst_n = 1;
    u = 0.5;
    wait_samples(40);
    s = 0; for (int i = ys.size() - 10; i < ys.size(); i++) s += ys[i];
    checks++;
    if (s / 10 < 122 || s / 10 > 134) begin failures++; $display("FAIL DC level %0d", s / 10); end
    ok_rate = 1;
    for (int i = tpush.size() - 10; i < tpush.size(); i++) if (tpush[i] - tpush[i-1] != 256) ok_rate = 0;
    checks++; if (!ok_rate) begin failures++; $display("FAIL LB sample period"); end
    // high-bandwidth forced: same output rate
    force_hb = 1; wait_samples(20);
    ok_rate = 1;
    for (int i = tpush.size() - 10; i < tpush.size(); i++) if (tpush[i] - tpush[i-1] != 256) ok_rate = 0;
    checks++; if (!ok_rate || !hb_mode) begin failures++; $display("FAIL HB sample period / mode"); end
    s = 0; for (int i = ys.size() - 5; i < ys.size(); i++) s += ys[i];
    checks++;
    if (s / 5 < 122 || s / 5 > 134) begin failures++; $display("FAIL HB DC level %0d", s / 5); end
    force_hb = 0; wait_samples(4);
    // high-pass 300 Hz removes DC
    hpf_sel = HPF_300HZ; wait_samples(60);
    checks++;
    if (ys[$] > 10 || ys[$] < -10) begin failures++; $display("FAIL HPF residue %0d", ys[$]); end
    // spike burst
    hpf_sel = HPF_OFF; u = 0.0; wait_samples(30);
    ndet = 0; nhb_seen = 0;
    checks++; if (hb_mode) begin failures++; $display("FAIL not in low-bandwidth mode"); end
    u = 0.9; wait_samples(2); u = -0.9; wait_samples(2); u = 0.0;
    wait_samples(8);
    for (int i = ys.size() - 12; i < ys.size(); i++) ndet += dets[i];
    checks++; if (ndet == 0) begin failures++; $display("FAIL spike not detected"); end
    checks++; if (nhb_seen == 0) begin failures++; $display("FAIL no switch to high bandwidth"); end
    wait_samples(40);
    checks++; if (hb_mode) begin failures++; $display("FAIL did not return to low bandwidth"); end
    ndet = 0; for (int i = ys.size() - 20; i < ys.size(); i++) ndet += dets[i];
    checks++; if (ndet != 0) begin failures++; $display("FAIL false detections %0d", ndet); end
    // every flag so far against the two-stage rule applied to the delivered samples
    begin
      int nbad = 0, nflag = 0;
      for (int i = 1; i + 1 < ys.size(); i++) begin
        longint psi; bit exp_d;
        psi = longint'(ys[i]) * ys[i] - longint'(ys[i+1]) * ys[i-1];
        exp_d = ((ys[i] < 0 ? -ys[i] : ys[i]) > 60) && (psi > 3000);
        nflag += exp_d;
        if (dets[i] != exp_d) nbad++;
      end
      checks++;
      if (nbad != 0 || nflag == 0) begin failures++; $display("FAIL detection flags: %0d wrong, %0d expected", nbad, nflag); end
    end
    // FIFO overflow and order
    rd_en = 0; repeat (256 * 6) @(negedge clk);
    checks++; if (!ovf) begin failures++; $display("FAIL FIFO overflow not reported"); end
    rd_en = 1; wait_samples(2);
    // bandwidth: a 5 kHz tone is attenuated in low- but not in high-bandwidth mode
    begin
      int lo_pp, hi_pp, mx, mn;
      sine_on = 1; hold_len = 8'd0; amp_thr = 9'd511;
      wait_samples(40);
      mx = -1000; mn = 1000;
      for (int i = ys.size() - 30; i < ys.size(); i++) begin mx = (ys[i] > mx) ? ys[i] : mx; mn = (ys[i] < mn) ? ys[i] : mn; end
      lo_pp = mx - mn;
      force_hb = 1; wait_samples(40);
      mx = -1000; mn = 1000;
      for (int i = ys.size() - 30; i < ys.size(); i++) begin mx = (ys[i] > mx) ? ys[i] : mx; mn = (ys[i] < mn) ? ys[i] : mn; end
      hi_pp = mx - mn;
      $display("5 kHz tone peak-to-peak: low bandwidth %0d, high bandwidth %0d", lo_pp, hi_pp);
      checks++;
      if (hi_pp < 150 || lo_pp * 10 > hi_pp * 7) begin failures++; $display("FAIL bandwidth modes"); end
      sine_on = 0; force_hb = 0;
    end
    $display("samples %0d, hb cycles %0d", ys.size(), nhb_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
