// tb_ate: self-checking testbench of the adaptive threshold estimator.
// Drives noise with occasional spikes, window 2^5 samples, b = 2 (4
// windows per threshold), in NEO mode and then in plain HPF mode. A
// behavioural model written here with integer arithmetic (HPF, NEO, sign
// changes, log2, LPF, max/min/mean, ne*zc averaging) gives the expected
// zc, ne and threshold values; all are compared, and the threshold must
// appear exactly every 4*32 samples. One sample every 4 cycles.
module tb_ate;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr, neo_en, x_valid, win_valid, thr_valid;
  logic [3:0] win_log2, lpf_sh, zc;
  logic [2:0] b_sh;
  logic signed [8:0] x;
  logic [23:0] ne;
  logic [27:0] thr;
  ate dut (.*);

  // model
  int mx1, mh1, mh2, mprime, msp, mlp, mmx, mmn, mlsum, mz, mn_, macc, mw;
  int ezc [$], ene [$], ethr [$];
  function automatic int asr(int v, int s); return v >>> s; endfunction
  function automatic void model(int xv, bit neo, int wl, int ls, int bs);
    int h, psi, s, lpn;
    h = xv - mx1;
    psi = mh1 * mh1 - h * mh2;
    s = neo ? psi : mh1;
    mx1 = xv; mh2 = mh1; mh1 = h;
    if (mprime < 3) begin mprime++; return; end
    lpn = mlp + asr(s - mlp, ls);
    if (mn_ == 0) begin mmx = lpn; mmn = lpn; end
    else begin if (lpn > mmx) mmx = lpn; if (lpn < mmn) mmn = lpn; end
    mlsum += lpn;
    if (mn_ != 0 && ((s < 0) != (msp < 0))) mz++;
    msp = s; mlp = lpn;
    if (mn_ == (1 << wl) - 1) begin
      int zcv, nev, lg;
      lg = 0; for (int i = 0; i < 16; i++) if (mz >= (1 << i)) lg = i;
      zcv = lg;
      nev = asr(mlsum, wl) + 2 * ((mmx - mmn) < 0 ? mmn - mmx : mmx - mmn);
      ezc.push_back(zcv); ene.push_back(nev);
      macc += nev * zcv;
      if (mw == (1 << (2*bs)) - 1) begin ethr.push_back(macc >> (2*bs)); macc = 0; mw = 0; end
      else mw++;
      mn_ = 0; mz = 0; mlsum = 0;
    end else mn_++;
  endfunction
  function automatic void mreset();
    mx1 = 0; mh1 = 0; mh2 = 0; mprime = 0; msp = 0; mlp = 0; mmx = 0; mmn = 0;
    mlsum = 0; mz = 0; mn_ = 0; macc = 0; mw = 0;
  endfunction

  int nwin = 0, nthr = 0, last_thr_cnt = -1, scount = 0;
  always @(posedge clk) if (rst_n) begin
    if (win_valid) begin
      checks++;
      if (ezc.size() == 0 || zc != 4'(ezc[0]) || ne != 24'(ene[0])) begin
        failures++; $display("FAIL window %0d zc %0d ne %0d exp %0d %0d", nwin, zc, ne,
                             ezc.size() ? ezc[0] : -1, ene.size() ? ene[0] : -1);
      end
      if (ezc.size()) begin void'(ezc.pop_front()); void'(ene.pop_front()); end
      nwin++;
    end
    if (thr_valid) begin
      checks++;
      if (ethr.size() == 0 || thr != 28'(ethr[0])) begin
        failures++; $display("FAIL thr %0d exp %0d", thr, ethr.size() ? ethr[0] : -1);
      end
      if (ethr.size()) void'(ethr.pop_front());
      checks++;
      if (last_thr_cnt >= 0 && scount - last_thr_cnt != 128) begin
        failures++; $display("FAIL threshold period %0d samples", scount - last_thr_cnt);
      end
      last_thr_cnt = scount; nthr++;
    end
  end

  task automatic run(bit neo, int n);
    neo_en = neo; mreset();
    @(negedge clk); clr = 1; @(negedge clk); clr = 0; last_thr_cnt = -1;
    for (int i = 0; i < n; i++) begin
      int v;
      v = int'($urandom_range(0, 20)) - 10;
      if (i % 50 < 3) v += (i % 50 == 1) ? 180 : -120;
      @(negedge clk); x_valid = 1; x = 9'(v); model(v, neo, 5, 2, 1);
      @(negedge clk); x_valid = 0; scount++;
      repeat (2) @(negedge clk);
    end
    repeat (4) @(negedge clk);
  endtask

  initial begin
    clr = 0; neo_en = 1; x_valid = 0; x = 0; win_log2 = 5; lpf_sh = 2; b_sh = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    run(1, 1300);
    run(0, 700);
    checks++;
    if (nthr < 12) begin failures++; $display("FAIL only %0d thresholds", nthr); end
    $display("windows %0d thresholds %0d", nwin, nthr);
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
