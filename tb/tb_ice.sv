// tb_ice: self-checking testbench of the ICE (AP compression engine).
// Four slots are used: AC slots 0 (table 0, peaked) and 1 (table 1,
// uniform) and GC slots 8 and 9; slots 0 and 8 code the same channel.
// Samples arrive one per channel every FRAME cycles (20 kHz frames at the
// 5 MHz the paper requires). The testbench decodes every slot's bit stream
// with its own arithmetic and Golomb decoders and compares:
//  - lossless phase: the reconstructed samples with the inputs;
//  - near-lossless phase: the run lengths and 64-sample spike windows with
//    a window model (window = up to 31 samples before the flagged sample,
//    the flagged sample and the following ones, 64 in all).
// It also checks that no slot overflowed at that frame rate.
module tb_ice;
  import psoc_pkg::*;
  localparam int FRAME = 250;
  localparam int NS_LL = 160;
  localparam int NS_NLL = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic nll, rle3, s_valid, s_det, flush, flush_done, tbl_we, o_valid, o_ready;
  logic [15:0] slot_en, overflow;
  logic [6:0] slot_ch [16];
  logic [7:0] ac_tbl;
  logic [6:0] s_ch;
  logic [8:0] s_data;
  logic [9:0] tbl_waddr;
  logic [15:0] tbl_wdata, o_word;
  logic [3:0] o_slot;

  ice dut (.*);

  // cumulative tables
  int cum [2][513];
  function automatic int freq_of(int t, int s);
    int r;
    r = (s >= 256) ? s - 512 : s;
    if (t == 1) return 32;
    return (r >= -15 && r <= 15) ? 513 : 1;
  endfunction

  // collected bits per slot
  bit bits [16][$];
  always @(posedge clk)
    if (rst_n && o_valid && o_ready)
      for (int b = 15; b >= 0; b--) bits[o_slot].push_back(o_word[b]);

  // signals
  int xs [3][$];   // per used channel (5, 9, 20)
  bit ds [3][$];
  int chs [3] = '{5, 9, 20};

  function automatic int wrap9(int v);
    int w;
    w = v & 511;
    return (w >= 256) ? w - 512 : w;
  endfunction

  task automatic gen_signal(int n);
    for (int c = 0; c < 3; c++) begin
      xs[c].delete(); ds[c].delete();
      for (int i = 0; i < n; i++) begin
        int v; bit d;
        v = int'($urandom_range(0, 12)) - 6;
        d = 0;
        if (i % 97 == 40 + 7*c || (c == 1 && i % 97 == 75)) d = 1;
        if (i % 97 >= 40 + 7*c && i % 97 < 50 + 7*c)
          v += ((i % 2) ? 110 : -90) + 3*c;
        xs[c].push_back(wrap9(v)); ds[c].push_back(d);
      end
    end
  endtask

  task automatic run_samples(int n);
    for (int i = 0; i < n; i++) begin
      for (int c = 0; c < 3; c++) begin
        @(negedge clk);
        s_valid = 1; s_ch = 7'(chs[c]); s_data = 9'(xs[c][i]); s_det = ds[c][i];
        @(negedge clk);
        s_valid = 0;
      end
      repeat (FRAME - 6) @(negedge clk);
    end
  endtask

  task automatic do_flush();
    int t;
    @(negedge clk); flush = 1;
    t = 0;
    while (!flush_done && t < 200000) begin @(negedge clk); t++; end
    checks++;
    if (!flush_done) begin failures++; $display("FAIL flush did not complete"); end
    @(negedge clk); flush = 0;
    repeat (5) @(negedge clk);
  endtask

  // ---------- decoders ----------
  int pos;
  function automatic int rdbit(int sl);
    int b;
    b = (pos < bits[sl].size()) ? int'(bits[sl][pos]) : 0;
    pos++;
    return b;
  endfunction

  // Golomb model with the k adaptation rule of the design (independent copy)
  int ga, gn, gz;
  function automatic int gk();
    int k;
    k = 8;
    for (int i = 8; i >= 0; i--) if ((gn << i) >= ga) k = i;
    if (gz * 2 > gn) k = 0;
    return k;
  endfunction
  function automatic void gupd(int u);
    if (gn == 32) begin ga = (ga >> 1) + u; gn = (gn >> 1) + 1; gz = (gz >> 1) + (u == 0); end
    else begin ga += u; gn++; gz += (u == 0); end
  endfunction
  function automatic int gdec(int sl, int k);
    int q, r;
    q = 0;
    while (q < 16 && rdbit(sl) == 1) q++;
    if (q == 16) begin
      r = 0; for (int i = 0; i < 9; i++) r = (r << 1) | rdbit(sl);
      return r;
    end
    r = 0; for (int i = 0; i < k; i++) r = (r << 1) | rdbit(sl);
    return (q << k) | r;
  endfunction
  function automatic int unzig(int u);
    return (u & 1) ? -((u + 1) >> 1) : (u >> 1);
  endfunction

  // arithmetic decoder state
  longint alow, ahigh, aval;
  function automatic void ainit(int sl);
    alow = 0; ahigh = 65535; aval = 0;
    for (int i = 0; i < 16; i++) aval = (aval << 1) | rdbit(sl);
  endfunction
  function automatic int adec(int sl, int t);
    longint rng, cnt, nh, nl;
    int s;
    rng = ahigh - alow + 1;
    cnt = ((aval - alow + 1) * 16384 - 1) / rng;
    s = 0;
    while (s < 511 && cum[t][s+1] <= cnt) s++;
    nh = alow + ((rng * cum[t][s+1]) >> 14) - 1;
    nl = alow + ((rng * cum[t][s]) >> 14);
    ahigh = nh; alow = nl;
    forever begin
      if (ahigh < 32768) ;
      else if (alow >= 32768) begin aval -= 32768; alow -= 32768; ahigh -= 32768; end
      else if (alow >= 16384 && ahigh < 49152) begin aval -= 16384; alow -= 16384; ahigh -= 16384; end
      else break;
      alow = alow * 2; ahigh = ahigh * 2 + 1; aval = aval * 2 + rdbit(sl);
    end
    return s;
  endfunction

  // decode one symbol of a slot (residual or raw RLE part), return value
  function automatic int dsym(int sl, bit is_ac, int t, bit rle);
    int u;
    if (is_ac) return adec(sl, t);
    if (rle) return gdec(sl, 9);
    u = gdec(sl, gk());
    gupd(u);
    return u;
  endfunction

  function automatic void check_ll(int sl, int c, bit is_ac, int t);
    int x1, x2, e, x, errs;
    pos = 0; ga = 0; gn = 0; gz = 0; x1 = 0; x2 = 0; errs = 0;
    if (is_ac) ainit(sl);
    for (int i = 0; i < NS_LL; i++) begin
      e = dsym(sl, is_ac, t, 0);
      if (!is_ac) e = unzig(e) & 511;
      x = wrap9(e + 2*x1 - x2);
      x2 = x1; x1 = x;
      checks++;
      if (x != xs[c][i]) begin
        failures++; errs++;
        if (errs < 4) $display("FAIL LL slot %0d sample %0d got %0d exp %0d", sl, i, x, xs[c][i]);
      end
    end
  endfunction

  function automatic void check_nll(int sl, int c, bit is_ac, int t);
    int prev_end, i, start, run, x1, x2, e, x, errs, r;
    pos = 0; ga = 0; gn = 0; gz = 0; errs = 0; prev_end = 0; i = 0;
    if (is_ac) ainit(sl);
    while (i < NS_NLL) begin
      if (ds[c][i] && i + 32 < NS_NLL) begin
        start = (i - 31 > prev_end) ? i - 31 : prev_end;
        run = start - prev_end;
        r = 0;
        for (int p = 0; p < 3; p++) r = (r << 9) | dsym(sl, is_ac, t, 1);
        checks++;
        if (r != run) begin failures++; $display("FAIL NLL slot %0d run %0d exp %0d", sl, r, run); end
        x1 = 0; x2 = 0;
        for (int j = start; j < start + 64; j++) begin
          e = dsym(sl, is_ac, t, 0);
          if (!is_ac) e = unzig(e) & 511;
          x = wrap9(e + 2*x1 - x2);
          x2 = x1; x1 = x;
          checks++;
          if (x != xs[c][j]) begin
            failures++; errs++;
            if (errs < 4) $display("FAIL NLL slot %0d sample %0d got %0d exp %0d", sl, j, x, xs[c][j]);
          end
        end
        prev_end = start + 64;
        i = prev_end;
      end else i++;
    end
  endfunction

  initial begin
    int acc;
    nll = 0; rle3 = 1; s_valid = 0; s_det = 0; flush = 0; tbl_we = 0; o_ready = 1;
    s_ch = 0; s_data = 0; tbl_waddr = 0; tbl_wdata = 0;
    slot_en = 16'h0303;
    foreach (slot_ch[i]) slot_ch[i] = 7'd127;
    slot_ch[0] = 5; slot_ch[1] = 9; slot_ch[8] = 5; slot_ch[9] = 20;
    ac_tbl = 8'b0000_0010;
    for (int t = 0; t < 2; t++) begin
      acc = 0;
      for (int s = 0; s < 512; s++) begin cum[t][s] = acc; acc += freq_of(t, s); end
      cum[t][512] = acc;
      if (acc != 16384) $display("table %0d total %0d", t, acc);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++)
      for (int s = 0; s < 512; s++) begin
        @(negedge clk); tbl_we = 1; tbl_waddr = 10'(t*512 + s); tbl_wdata = 16'(cum[t][s]);
      end
    @(negedge clk); tbl_we = 0;
    // ---- lossless ----
    gen_signal(NS_LL);
    run_samples(NS_LL);
    do_flush();
    check_ll(0, 0, 1, 0);
    check_ll(1, 1, 1, 1);
    check_ll(8, 0, 0, 0);
    check_ll(9, 2, 0, 0);
    checks++;
    if (overflow != 0) begin failures++; $display("FAIL overflow in LL %h", overflow); end
    $display("LL bits: AC0 %0d AC1 %0d GC8 %0d GC9 %0d (raw %0d)", bits[0].size(), bits[1].size(),
             bits[8].size(), bits[9].size(), NS_LL*9);
    // ---- near-lossless ----
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; nll = 1;
    foreach (bits[i]) bits[i].delete();
    gen_signal(NS_NLL);
    run_samples(NS_NLL);
    do_flush();
    check_nll(0, 0, 1, 0);
    check_nll(1, 1, 1, 1);
    check_nll(8, 0, 0, 0);
    check_nll(9, 2, 0, 0);
    checks++;
    if (overflow != 0) begin failures++; $display("FAIL overflow in NLL %h", overflow); end
    $display("NLL bits: AC0 %0d GC8 %0d (raw %0d)", bits[0].size(), bits[8].size(), NS_NLL*9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
