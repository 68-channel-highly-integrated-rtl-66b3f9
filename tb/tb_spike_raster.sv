// tb_spike_raster: self-checking testbench of the spike raster block.
// Sends 40 rounds of 68 detection bits (about a third of the rounds with
// no spike at all). Every packet is parsed: header code, 12-bit time equal
// to the round number, and for spike rounds the 5 mask words compared
// bit by bit with the bits sent. Both packet kinds must occur.
module tb_spike_raster;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, d_valid, d_det, o_valid, o_ready, overrun;
  logic [6:0] d_ch;
  logic [15:0] o_word;
  logic [31:0] timer;
  spike_raster dut (.*);
  logic [15:0] words [$];
  always @(posedge clk) if (rst_n && o_valid && o_ready) words.push_back(o_word);
  bit sent [40][68];
  int nempty = 0, nspk = 0;
  initial begin
    en = 0; d_valid = 0; d_det = 0; d_ch = 0; o_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1; en = 1;
    for (int r = 0; r < 40; r++) begin
      bit quiet;
      quiet = (r % 3 == 1);
      for (int c = 0; c < 68; c++) begin
        sent[r][c] = quiet ? 0 : ($urandom_range(0, 9) == 0);
        @(negedge clk); d_valid = 1; d_ch = 7'(c); d_det = sent[r][c];
        o_ready = ($urandom_range(0, 3) != 0);
      end
      @(negedge clk); d_valid = 0; o_ready = 1;
      repeat (10) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    for (int r = 0; r < 40; r++) begin
      logic [15:0] h;
      bit any;
      any = 0; for (int c = 0; c < 68; c++) any |= sent[r][c];
      checks++;
      if (words.size() == 0) begin failures++; $display("FAIL missing packet %0d", r); break; end
      h = words.pop_front();
      if (h[11:0] != 12'(r) || h[15:12] != (any ? 4'hA : 4'hE)) begin
        failures++; $display("FAIL header %h round %0d", h, r);
      end
      if (any) begin
        nspk++;
        for (int w = 0; w < 5; w++) begin
          logic [15:0] m;
          m = words.pop_front();
          for (int b = 0; b < 16; b++) if (16*w + b < 68) begin
            checks++;
            if (m[b] != sent[r][16*w+b]) begin failures++; $display("FAIL mask r%0d ch%0d", r, 16*w+b); end
          end
        end
      end else nempty++;
    end
    checks++; if (nempty == 0 || nspk == 0) begin failures++; $display("FAIL packet kinds %0d %0d", nempty, nspk); end
    checks++; if (overrun) begin failures++; $display("FAIL overrun"); end
    checks++; if (timer != 40) begin failures++; $display("FAIL timer %0d", timer); end
    $display("empty %0d spike %0d", nempty, nspk);
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
