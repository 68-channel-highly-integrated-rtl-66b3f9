// tb_cbpu_ctrl: self-checking testbench of the CBPU command controller.
// Models around it: 68 channel FIFOs that receive one sample per channel
// every PER cycles (value and detection flag computed from channel and
// frame), a PE SRAM with random grant delays, and simple stand-ins for the
// functional units. Runs C2 (stream, frame headers), C1 (record to SRAM),
// C2 in debug mode with batch transmission (samples read from SRAM), C3
// (compressed words and flush handshake), C6 (FIR results to SRAM), C7
// (raster words) and C9 (threshold updates). Each expected word, SRAM
// content and parameter write is computed here and compared.
module tb_cbpu_ctrl;
  import psoc_pkg::*;
  localparam int PER = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cbpu_cfg_t cfg;
  logic start, stop, busy, done;
  logic [N_CH-1:0] f_valid, f_det, f_rd;
  logic [8:0] f_data [N_CH];
  logic u_valid, u_det, ice_en, cce_en, fir_en, sr_en, ate_en, u_flush;
  logic [6:0] u_ch; logic [8:0] u_data;
  logic ice_valid, ice_ready, ice_flush_done, cce_valid, cce_ready, cce_idle, fir_valid;
  logic [3:0] ice_slot; logic [15:0] ice_word, cce_word, sr_word;
  logic [6:0] fir_ch; logic [25:0] fir_y;
  logic sr_valid, sr_ready, ate_valid; logic [27:0] ate_thr;
  logic sd_we, sd_amp; logic [6:0] sd_ch; logic [19:0] sd_val;
  logic m_req, m_we, m_gnt, m_rvalid; logic [14:0] m_addr; logic [31:0] m_wdata, m_rdata;
  logic tx_valid, tx_ready; tx_word_t tx_word;
  cbpu_ctrl dut (.*);

  // ---- channel FIFOs ----
  int fq [N_CH][$];
  int fr [N_CH];
  int cyc = 0;
  function automatic int sval(int c, int f); return (c * 7 + f * 3) & 511; endfunction
  function automatic bit sdet(int c, int f); return ((c + f) % 5) == 0; endfunction
  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < N_CH; c++) begin
      if (f_rd[c]) void'(fq[c].pop_front());
      if (cyc % PER == 0) begin fq[c].push_back(fr[c]); fr[c]++; end
    end
  end
  always_comb for (int c = 0; c < N_CH; c++) begin
    f_valid[c] = fq[c].size() > 0;
    f_data[c]  = f_valid[c] ? 9'(sval(c, fq[c][0])) : '0;
    f_det[c]   = f_valid[c] ? sdet(c, fq[c][0]) : 1'b0;
  end
  // ---- PE SRAM model ----
  logic [31:0] mem [32768];
  always @(posedge clk) begin
    m_rvalid <= 0;
    if (m_req && m_gnt) begin
      if (m_we) mem[m_addr] <= m_wdata;
      else begin m_rvalid <= 1; m_rdata <= mem[m_addr]; end
    end
  end
  always @(negedge clk) m_gnt = ($urandom_range(0, 2) != 0);
  // ---- unit stand-ins ----
  int ice_left = 0, flush_wait = 0;
  always @(posedge clk) begin
    fir_valid <= fir_en && u_valid; fir_ch <= u_ch; fir_y <= 26'(int'(u_data) * 1000 - 5);
    ate_valid <= ate_en && u_valid; ate_thr <= 28'(int'(u_data) * 37);
    if (ice_en && u_valid && u_det) ice_left <= ice_left + 2;
    if (ice_valid && ice_ready) ice_left <= ice_left - 1 + ((ice_en && u_valid && u_det) ? 2 : 0);
    if (u_flush) flush_wait <= flush_wait + 1; else flush_wait <= 0;
  end
  int ice_cnt = 0;
  assign ice_valid = ice_left > 0;
  assign ice_slot = 4'd7;
  assign ice_word = 16'(ice_cnt);
  always @(posedge clk) if (ice_valid && ice_ready) ice_cnt++;
  assign ice_flush_done = u_flush && flush_wait > 5 && ice_left == 0;
  assign cce_valid = 0; assign cce_word = 0; assign cce_idle = 1;
  // SR stand-in: one word per round end
  assign sr_valid = sr_en && u_valid && u_ch == 67;
  assign sr_word = 16'(u_data);

  tx_word_t got [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) got.push_back(tx_word);
  int batch_viol = 0;
  always @(posedge clk) if (rst_n && tx_valid && cfg.batch && dut.tcnt < 6'(cfg.batch_len) && dut.st != 5) batch_viol++;
  int sdw [$];
  always @(posedge clk) if (rst_n && sd_we) sdw.push_back(int'(sd_val));

  task automatic run_cmd();
    int t;
    got.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t = 0;
    while (!done && t < 400000) begin @(negedge clk); t++; end
    checks++;
    if (!done) begin failures++; $display("FAIL command %0d did not finish", cfg.cmd); end
    repeat (3) @(negedge clk);
  endtask
  function automatic void expect_word(int i, logic [3:0] tag, int idx, int pl);
    checks++;
    if (i >= got.size() || got[i].tag != tag || got[i].idx != 7'(idx) || got[i].payload != 26'(pl)) begin
      failures++;
      if (i < got.size()) $display("FAIL word %0d: %0d/%0d/%0d exp %0d/%0d/%0d", i, got[i].tag,
        got[i].idx, got[i].payload, tag, idx, pl);
      else $display("FAIL word %0d missing", i);
    end
  endfunction
  function automatic void clear_fifos();
    for (int c = 0; c < N_CH; c++) fq[c].delete();
  endfunction

  initial begin
    int f0, n, chs [3];
    cfg = '0; start = 0; stop = 0; tx_ready = 1;
    for (int c = 0; c < N_CH; c++) fr[c] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // ---------- C2 stream ----------
    cfg.cmd = CMD_C2_RAW; cfg.ch_en = '0; cfg.ch_en[0] = 1; cfg.ch_en[10] = 1; cfg.ch_en[67] = 1;
    cfg.pkt_period = 2; cfg.n_frames = 4;
    @(negedge clk); clear_fifos(); f0 = fr[0];
    run_cmd();
    chs = '{0, 10, 67}; n = 0;
    for (int f = 0; f < 4; f++) begin
      if (f % 2 == 0) begin expect_word(n, TAG_FRAME, 0, f); n++; end
      foreach (chs[k]) begin
        expect_word(n, TAG_RAW, chs[k], (int'(sdet(chs[k], f0 + f)) << 9) | sval(chs[k], f0 + f)); n++;
      end
    end
    checks++; if (got.size() != n) begin failures++; $display("FAIL C2 words %0d exp %0d", got.size(), n); end
    // ---------- C1 record ----------
    cfg.cmd = CMD_C1_REC; cfg.ch_en = '0; cfg.ch_en[5] = 1; cfg.ch_en[6] = 1;
    cfg.mem_base = 100; cfg.mem_len = 7; cfg.n_frames = 0;
    @(negedge clk); clear_fifos(); f0 = fr[0];
    run_cmd();
    for (int i = 0; i < 7; i++) begin
      int c, f;
      c = 5 + (i % 2); f = f0 + i / 2;
      checks++;
      if (mem[100 + i] != 32'((int'(sdet(c, f)) << 9) | sval(c, f))) begin
        failures++; $display("FAIL C1 word %0d = %h", i, mem[100 + i]);
      end
    end
    // ---------- C2 debug + batch ----------
    for (int i = 0; i < 6; i++) mem[2000 + i] = 32'(((i % 2) << 9) | (100 + i));
    cfg.cmd = CMD_C2_RAW; cfg.debug = 1; cfg.batch = 1; cfg.batch_len = 4; cfg.pkt_period = 0;
    cfg.ch_en = '0; cfg.ch_en[1] = 1; cfg.ch_en[2] = 1; cfg.dbg_base = 2000; cfg.dbg_period = 400;
    cfg.n_frames = 3; batch_viol = 0;
    run_cmd();
    for (int i = 0; i < 6; i++) expect_word(i, TAG_RAW, 1 + (i % 2), ((i % 2) << 9) | (100 + i));
    checks++; if (batch_viol != 0) begin failures++; $display("FAIL batch released early"); end
    cfg.debug = 0; cfg.batch = 0;
    // ---------- C3 ----------
    cfg.cmd = CMD_C3_ICE; cfg.ch_en = '1; cfg.n_frames = 3;
    @(negedge clk); clear_fifos(); ice_cnt = 0;
    run_cmd();
    n = 0;
    for (int f = 0; f < 3; f++) for (int c = 0; c < N_CH; c++) n += 2 * int'(sdet(c, fr[0] - 3 + f));
    checks++; if (got.size() == 0 || got.size() != ice_cnt) begin failures++; $display("FAIL C3 words %0d / %0d", got.size(), ice_cnt); end
    for (int i = 0; i < got.size(); i++) expect_word(i, TAG_ICE, 7, i);
    // ---------- C6 ----------
    cfg.cmd = CMD_C6_FIRS; cfg.ch_en = '0; cfg.ch_en[20] = 1; cfg.mem_base = 300; cfg.mem_len = 4; cfg.n_frames = 0;
    @(negedge clk); clear_fifos(); f0 = fr[0];
    run_cmd();
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (mem[300 + i] != 32'(sval(20, f0 + i) * 1000 - 5)) begin failures++; $display("FAIL C6 word %0d", i); end
    end
    // ---------- C7 ----------
    cfg.cmd = CMD_C7_SR; cfg.ch_en = '0; cfg.n_frames = 3;
    @(negedge clk); clear_fifos(); f0 = fr[0];
    run_cmd();
    for (int i = 0; i < 3; i++) expect_word(i, TAG_SR, 0, sval(67, f0 + i));
    // ---------- C9 ----------
    cfg.cmd = CMD_C9_ATESD; cfg.ate_ch = 9; cfg.ate_to_amp = 0; cfg.n_frames = 5; sdw.delete();
    @(negedge clk); clear_fifos(); f0 = fr[0];
    run_cmd();
    checks++; if (sdw.size() != 5) begin failures++; $display("FAIL C9 writes %0d", sdw.size()); end
    for (int i = 0; i < sdw.size(); i++) begin
      checks++; if (sdw[i] != sval(9, f0 + i) * 37) begin failures++; $display("FAIL C9 value %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
