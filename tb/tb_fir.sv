// tb_fir: self-checking testbench of the 16-channel FIR filter.
// Random coefficients and samples on 16 channels (mapped to taps in a
// shuffled order, plus one unmapped channel); every output is compared
// with y = sum c_i x[n-i] computed here, limited to 26 bits, and the
// output must come one cycle after the input. Large coefficients drive
// the accumulator into saturation at least once.
module tb_fir;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nsat = 0;
  logic clr, s_valid, o_valid;
  logic signed [15:0] coef [16];
  logic [15:0] tap_en;
  logic [6:0] tap_ch [16];
  logic [6:0] s_ch, o_ch;
  logic signed [8:0] s_data;
  logic signed [25:0] o_y;
  fir dut (.*);
  int hist [68][$];
  int exp_y; int exp_ch;
  function automatic int model(int ch);
    longint s;
    s = 0;
    for (int i = 0; i < 16; i++)
      if (i < hist[ch].size()) s += longint'(coef[i]) * hist[ch][hist[ch].size()-1-i];
    if (s > 33554431) begin s = 33554431; nsat++; end
    if (s < -33554432) begin s = -33554432; nsat++; end
    return int'(s);
  endfunction
  initial begin
    clr = 0; s_valid = 0; s_ch = 0; s_data = 0;
    for (int i = 0; i < 16; i++) begin
      coef[i] = 16'($urandom_range(0, 65535)); tap_ch[i] = 7'((i * 5 + 3) % 68);
    end
    tap_en = 16'hFFFF;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++)
      for (int t = 0; t < 17; t++) begin
        int ch, v;
        ch = (t == 16) ? 1 : (t * 5 + 3) % 68;
        v = (n > 30) ? ((n % 2) ? 255 : -256) : int'($urandom_range(0, 511)) - 256;
        if (n > 30) for (int i = 0; i < 16; i++) coef[i] = (i % 2) ? -16'sd32768 : 16'sd32767;
        @(negedge clk); s_valid = 1; s_ch = 7'(ch); s_data = 9'(v);
        if (t < 16) begin hist[ch].push_back(v); exp_y = model(ch); end
        @(negedge clk); s_valid = 0;
        checks++;
        if (t < 16) begin
          if (!o_valid || o_ch != 7'(ch) || o_y != 26'(exp_y)) begin
            failures++; $display("FAIL n=%0d ch=%0d got v=%0d ch=%0d y=%0d exp %0d", n, ch, o_valid, o_ch, o_y, exp_y);
          end
        end else if (o_valid) begin failures++; $display("FAIL unmapped channel produced output"); end
      end
    checks++; if (nsat == 0) begin failures++; $display("FAIL saturation never happened"); end
    $display("saturations %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
