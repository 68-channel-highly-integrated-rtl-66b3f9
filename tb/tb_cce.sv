// tb_cce: self-checking testbench of the CCE (LFP cross-channel compressor).
// Eight lanes on channels {3,7,12,20,21,30,45,60}, root lane 2, a parent
// chain and gamma values as training would set them. Correlated LFP-like
// samples are sent in channel order, one frame per FRAME cycles; the first
// frame is cut (starts at lane 4) to exercise the align logic, and an
// unselected channel is interleaved. The bit stream is Golomb-decoded in
// the testbench and compared with residuals computed here from the
// equations: e = x(n)-x(n-1), r = e - round(gamma*e_parent) (root: r = e).
module tb_cce;
  localparam int NF = 120;
  localparam int FRAME = 250;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, s_valid, flush, overflow, w_valid, w_ready, idle;
  logic [6:0] lane_ch [8];
  logic [2:0] parent [8];
  logic [2:0] root;
  logic signed [11:0] gamma [8];
  logic [3:0] k;
  logic [6:0] s_ch;
  logic [8:0] s_data;
  logic [15:0] w_data;
  cce dut (.*);

  int chs [8] = '{3, 7, 12, 20, 21, 30, 45, 60};
  int par [8] = '{1, 2, 2, 2, 3, 4, 5, 6};
  int gam [8] = '{200, 240, 0, 300, 256, 180, 230, 128};
  int xs [NF][8];
  bit bits [$];
  always @(posedge clk) if (rst_n && w_valid && w_ready) for (int b = 15; b >= 0; b--) bits.push_back(w_data[b]);

  int pos = 0;
  function automatic int rb();
    int b; b = (pos < bits.size()) ? int'(bits[pos]) : 0; pos++; return b;
  endfunction
  function automatic int gdec(int kk);
    int q, r;
    q = 0; while (q < 16 && rb() == 1) q++;
    r = 0;
    if (q == 16) begin for (int i = 0; i < 13; i++) r = (r << 1) | rb(); return r; end
    for (int i = 0; i < kk; i++) r = (r << 1) | rb();
    return (q << kk) | r;
  endfunction
  function automatic int sx13(int v); v &= 8191; return v >= 4096 ? v - 8192 : v; endfunction
  function automatic int rnd_shift(int p); return (p + 128) >>> 8; endfunction

  task automatic send(int f, int l0);
    for (int l = l0; l < 8; l++) begin
      @(negedge clk); s_valid = 1; s_ch = 7'(chs[l]); s_data = 9'(xs[f][l]);
      @(negedge clk); s_valid = 0;
      if (l == 4) begin @(negedge clk); s_valid = 1; s_ch = 7'd22; s_data = 9'd77; @(negedge clk); s_valid = 0; end
    end
    repeat (FRAME - 20) @(negedge clk);
  endtask

  initial begin
    int ep [8], e [8], r, got, errs, t0, t1;
    en = 0; s_valid = 0; flush = 0; w_ready = 1; k = 3; root = 3'd2; s_ch = 0; s_data = 0;
    for (int l = 0; l < 8; l++) begin
      lane_ch[l] = 7'(chs[l]); parent[l] = 3'(par[l]); gamma[l] = 12'(gam[l]);
    end
    for (int f = 0; f < NF; f++) begin
      int base;
      base = int'(120.0 * $sin(f * 0.13));
      for (int l = 0; l < 8; l++) xs[f][l] = base * (l + 4) / 8 + int'($urandom_range(0, 6)) - 3;
    end
    repeat (3) @(negedge clk); rst_n = 1; en = 1;
    send(0, 4);              // partial frame: must be ignored by align
    t0 = $time;
    for (int f = 0; f < NF; f++) send(f, 0);
    @(negedge clk); flush = 1;
    t1 = 0; while (!idle && t1 < 5000) begin @(negedge clk); t1++; end
    repeat (3) @(negedge clk); flush = 0;
    checks++; if (!idle) begin failures++; $display("FAIL not idle after flush"); end
    checks++; if (overflow) begin failures++; $display("FAIL overflow"); end
    // decode and compare
    errs = 0;
    for (int l = 0; l < 8; l++) ep[l] = 0;
    for (int f = 0; f < NF; f++) begin
      for (int l = 0; l < 8; l++) begin
        e[l] = xs[f][l] - ep[l]; ep[l] = xs[f][l];
      end
      for (int l = 0; l < 8; l++) begin
        int u;
        r = (l == 2) ? e[l] : sx13(e[l] - rnd_shift(gam[l] * e[par[l]]));
        u = gdec(3);
        got = (u & 1) ? -((u + 1) >> 1) : (u >> 1);
        checks++;
        if (got != r) begin
          failures++; errs++;
          if (errs < 5) $display("FAIL frame %0d lane %0d got %0d exp %0d", f, l, got, r);
        end
      end
    end
    $display("CCE bits %0d for %0d samples (raw %0d)", bits.size(), NF*8, NF*8*9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
