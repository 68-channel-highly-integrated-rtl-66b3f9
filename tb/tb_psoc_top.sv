// tb_psoc_top: end-to-end test of the whole digital core at its default
// size (68 channels, 16 ICE slots, 8 CCE lanes, 16 FIR channels, 128 KiB
// memory). 68 first-order delta-sigma modulator models (real arithmetic,
// testbench only, clocked by each channel's mod_en) turn test signals into
// bit streams: a small sine per channel, plus a periodic biphasic spike on
// channels 5, 22, 39 and 56. The testbench plays the processor: it
// configures everything over APB, uses the memory port, and reads the
// off-chip stream, which it stalls at random (tx_ready low).
// Reference values are taken from the samples each channel FIFO actually
// delivers (observed at the FIFO read strobes) and from the testbench's
// own arithmetic. Sequence and checks:
//   idle    FIFO overflow while no command runs is reported in STATUS
//   C2      every raw word matches the delivered sample of its channel, in
//           order; frame headers every 4 frames; one frame per 256 cycles
//   C1      samples of 4 channels land in SRAM in scan order
//   debug   C2 in debug mode replays the recorded SRAM samples
//   C3/C4   ICE (lossless and near-lossless) and CCE runs produce words
//           and complete their flush
//   C5      FIR output equals a reference convolution of the delivered
//           samples with random coefficients
//   C7      each raster packet's mask equals the frame's detection bits
//   C8/C9   ATE thresholds are streamed / written to a detector register
//   batch   in batch mode words leave the TX FIFO only in full batches
//   stop    a run without frame limit ends on the stop command
//   MAC     C = A*B^T through SRAM, with processor accesses contending
//   sleep   the processor sleeps during a command; the CBPU interrupt
//           wakes it through the wake-up controller
//   MBIST   March C- over part of a bank passes
//   window  words written and read over the APB SRAM window while the
//           self test occupies the same bank (APB wait states)
// Mechanisms counted (each must occur): TX stall, FIFO overflow, LB->HB
// and HB->LB mode switches, spike detection, frame headers, debug replay,
// batch hold, SRAM bank contention, flush, C9 threshold update, sleep and
// wake-up, memory self test, APB wait states.
module tb_psoc_top;
  import psoc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [N_CH-1:0] dsm_bit = '0, mod_en, hb_mode;
  logic        p_req = 1'b0, p_we = 1'b0, p_gnt, p_rvalid;
  logic [3:0]  p_be = 4'hF;
  logic [14:0] p_addr = '0;
  logic [31:0] p_wdata = '0, p_rdata;
  logic        psel = 1'b0, penable = 1'b0, pwrite = 1'b0, pready, pslverr;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic        cbpu_irq, mac_irq, tx_valid, tx_ready = 1'b1;
  logic [3:0]  ext_irq = '0;
  logic        sleep_req = 1'b0, core_irq, core_clk_en;
  tx_word_t    tx_word;
  logic [31:0] sr_timer;

  psoc_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // ---------------- modulator models ----------------
  real integ [N_CH];
  real ampl = 0.15;
  initial for (int c = 0; c < N_CH; c++) integ[c] = 0.0;
  function automatic bit spiking(int c); return (c % 17) == 5; endfunction
  always @(posedge clk) if (rst_n) begin
    longint s;
    s = cyc / 256;
    for (int c = 0; c < N_CH; c++) if (mod_en[c]) begin
      real u;
      u = ampl * $sin(6.2831853 * real'(cyc) / (256.0 * real'(20 + c)));
      if (spiking(c) && s > 40) begin
        if (s % 48 < 2) u = 0.9;
        else if (s % 48 < 4) u = -0.9;
      end
      integ[c] = integ[c] + u - (dsm_bit[c] ? 1.0 : -1.0);
      dsm_bit[c] <= (integ[c] >= 0.0);
    end
  end

  // ---------------- observation ----------------
  logic [9:0] pq [N_CH][$];          // delivered {det, sample} per channel
  tx_word_t   txq [$];
  int n_stall = 0, n_up = 0, n_down = 0, n_det = 0, n_batch_hold = 0, n_contend = 0;
  int n_ovf = 0, n_hdr = 0, n_dbg = 0, n_flush = 0, n_c9 = 0, n_wake = 0, n_bist = 0, n_apb_wait = 0;
  logic [N_CH-1:0] hb_q = '0;
  longint ch0_t [$];
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N_CH; c++) if (dut.f_rd[c]) begin
      pq[c].push_back({dut.f_det[c], dut.f_data[c]});
      if (dut.f_det[c]) n_det++;
      if (c == 0) ch0_t.push_back(cyc);
    end
    if (tx_valid && tx_ready) txq.push_back(tx_word);
    if (tx_valid && !tx_ready) n_stall++;
    for (int c = 0; c < N_CH; c++) begin
      if (hb_mode[c] && !hb_q[c]) n_up++;
      if (!hb_mode[c] && hb_q[c]) n_down++;
    end
    hb_q <= hb_mode;
    if (dut.u_cbpu.cfg.batch && dut.u_cbpu.tcnt != 0 && !tx_valid) n_batch_hold++;
    if ((p_req && !p_gnt) || (dut.mm_req && !dut.mm_gnt)) n_contend++;
    if (psel && penable && !pready) n_apb_wait++;
    if (dut.u_cbpu.u_flush) n_flush++;
  end
  bit rnd_stall = 1'b0;
  always @(negedge clk) tx_ready <= rnd_stall ? ($urandom % 4 != 0) : 1'b1;

  // ---------------- bus tasks ----------------
  task automatic apb_w(input int a, input logic [31:0] d);
    @(negedge clk); psel = 1'b1; penable = 1'b0; pwrite = 1'b1; paddr = 12'(a * 4); pwdata = d;
    @(negedge clk); penable = 1'b1;
    #1 while (!pready) begin @(negedge clk); #1; end
    @(negedge clk); psel = 1'b0; penable = 1'b0; pwrite = 1'b0;
  endtask
  task automatic apb_r(input int a, output logic [31:0] d);
    @(negedge clk); psel = 1'b1; penable = 1'b0; pwrite = 1'b0; paddr = 12'(a * 4);
    @(negedge clk); penable = 1'b1;
    #1 while (!pready) begin @(negedge clk); #1; end
    d = prdata;
    @(negedge clk); psel = 1'b0; penable = 1'b0;
  endtask
  task automatic mem_w(input int a, input logic [31:0] d);
    @(negedge clk); p_req = 1'b1; p_we = 1'b1; p_addr = 15'(a); p_wdata = d;
    do @(posedge clk); while (!p_gnt);
    @(negedge clk); p_req = 1'b0; p_we = 1'b0;
  endtask
  task automatic mem_r(input int a, output logic [31:0] d);
    @(negedge clk); p_req = 1'b1; p_we = 1'b0; p_addr = 15'(a);
    do @(posedge clk); while (!p_gnt);
    @(negedge clk); p_req = 1'b0;
    d = p_rdata;
  endtask

  task automatic clear_obs();
    for (int c = 0; c < N_CH; c++) pq[c].delete();
    txq.delete(); ch0_t.delete();
  endtask
  // program and run one command; cmdw is the CMD register value
  task automatic run(input logic [31:0] cmdw, input int frames, input logic [67:0] chen);
    int t;
    apb_w(2, cmdw); apb_w(11, frames);
    apb_w(4, chen[31:0]); apb_w(5, chen[63:32]); apb_w(6, 32'(chen[67:64]));
    clear_obs();
    apb_w(0, 1);
    t = 0;
    while (!cbpu_irq && t < 400000) begin @(posedge clk); t++; end
    chk(cbpu_irq, $sformatf("command %0d completes", cmdw[3:0]));
    apb_w(1, 1);
  endtask

  // ---------------- sequence ----------------
  initial begin
    logic [31:0] d;
    int nraw, bad, nfir, nsr, nw, nate;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    // detector thresholds and ADW settings
    for (int c = 0; c < N_CH; c++) begin apb_w(128 + c, 60); apb_w(256 + c, 3000); end
    apb_w(16, {16'd0, 8'd20, 6'd0, 2'(HPF_300HZ)});
    apb_w(3, 4);                                   // frame header every 4 frames
    // idle: nobody reads the FIFOs -> overflow reported
    repeat (256 * 40) @(negedge clk);
    apb_r(1, d);
    chk(d[3], "idle FIFO overflow flagged"); if (d[3]) n_ovf++;
    apb_w(20, 0);

    // ---- C2 raw streaming with random stalls
    rnd_stall = 1'b1;
    run({28'd0, 4'(CMD_C2_RAW)}, 80, '1);
    rnd_stall = 1'b0;
    nraw = 0; bad = 0;
    begin
      int fexp; fexp = 0;
      foreach (txq[i]) begin
        if (txq[i].tag == TAG_FRAME) begin
          n_hdr++;
          if (txq[i].payload != 26'(fexp)) bad++;
          fexp += 4;
        end else if (txq[i].tag == TAG_RAW) begin
          logic [9:0] e;
          nraw++;
          if (pq[txq[i].idx].size() == 0) bad++;
          else begin e = pq[txq[i].idx].pop_front(); if (txq[i].payload[9:0] != e) bad++; end
        end else bad++;
      end
    end
    chk(bad == 0, $sformatf("C2 raw words match delivered samples (%0d bad)", bad));
    chk(nraw == 80 * N_CH, $sformatf("C2 raw word count %0d", nraw));
    chk(n_hdr == 20, $sformatf("C2 frame headers %0d", n_hdr));
    bad = 0;
    for (int i = ch0_t.size() - 10; i < ch0_t.size(); i++) if (ch0_t[i] - ch0_t[i-1] != 256) bad++;
    chk(bad == 0, "one frame per 256 cycles (19.53 kHz at 5 MHz)");

    // ---- C1 record 4 channels, 10 frames
    apb_w(7, 'h100); apb_w(8, 40);
    run({28'd0, 4'(CMD_C1_REC)}, 0, 68'hF);
    bad = 0;
    for (int f = 0; f < 10; f++) for (int c = 0; c < 4; c++) begin
      mem_r('h100 + 4 * f + c, d);
      if (d[9:0] != pq[c][f]) bad++;
    end
    chk(bad == 0, $sformatf("C1 recorded samples (%0d bad)", bad));

    // ---- debug mode: replay the recording
    apb_w(9, 'h100); apb_w(10, 128);
    run({27'd0, 1'b1, 4'(CMD_C2_RAW)}, 10, 68'hF);
    bad = 0; nraw = 0;
    foreach (txq[i]) if (txq[i].tag == TAG_RAW) begin
      mem_r('h100 + nraw, d);
      if (txq[i].idx != 7'(nraw % 4) || txq[i].payload[9:0] != d[9:0]) bad++;
      nraw++;
    end
    chk(bad == 0 && nraw == 40, $sformatf("debug replay %0d words, %0d bad", nraw, bad));
    if (nraw == 40) n_dbg++;

    // ---- C3 ICE, Golomb slots 8 and 9, lossless then near-lossless
    apb_w(56, 5); apb_w(57, 0);
    apb_w(32, {16'h0300, 8'h00, 6'd0, 1'b0, 1'b0});
    run({28'd0, 4'(CMD_C3_ICE)}, 64, '1);
    nw = 0; bad = 0;
    foreach (txq[i]) begin
      nw++;
      if (txq[i].tag != TAG_ICE || !(txq[i].idx inside {8, 9})) begin
        bad++; if (bad < 4) $display("ICE word tag %0d idx %0d", txq[i].tag, txq[i].idx);
      end
    end
    chk(nw > 10 && bad == 0, $sformatf("ICE lossless words %0d bad %0d", nw, bad));
    apb_w(32, {16'h0300, 8'h00, 6'd0, 1'b0, 1'b1});
    run({28'd0, 4'(CMD_C3_ICE)}, 100, '1);
    nw = 0; foreach (txq[i]) if (txq[i].tag == TAG_ICE) nw++;
    chk(nw > 0, $sformatf("ICE near-lossless words %0d", nw));

    // ---- C4 CCE, lanes 0..7
    apb_w(64, {24'd0, 4'd3, 1'b0, 3'd0});
    run({28'd0, 4'(CMD_C4_CCE)}, 32, '1);
    nw = 0; bad = 0;
    foreach (txq[i]) begin nw++; if (txq[i].tag != TAG_CCE) bad++; end
    chk(nw > 10 && bad == 0, $sformatf("CCE words %0d bad %0d", nw, bad));

    // ---- C5 FIR on channels 7 and 22
    begin
      int cf [16];
      for (int t = 0; t < 16; t++) begin cf[t] = int'($urandom % 201) - 100; apb_w(80 + t, 32'(cf[t])); end
      apb_w(96, {23'd0, 1'b1, 1'b0, 7'd7}); apb_w(97, {23'd0, 1'b1, 1'b0, 7'd22});
      apb_w(112, 32'h0004_0811);                   // FIR clear, NEO on, window 2^8, LPF 4
      run({28'd0, 4'(CMD_C5_FIR)}, 40, '1);
      nfir = 0; bad = 0;
      begin
        int hist [2][16];
        int k [2];
        for (int j = 0; j < 2; j++) begin k[j] = 0; for (int t = 0; t < 16; t++) hist[j][t] = 0; end
        foreach (txq[i]) if (txq[i].tag == TAG_FIR) begin
          int j, y;
          j = (txq[i].idx == 7'd7) ? 0 : 1;
          for (int t = 15; t > 0; t--) hist[j][t] = hist[j][t-1];
          hist[j][0] = int'(signed'(pq[txq[i].idx][k[j]][8:0])); k[j]++;
          y = 0; for (int t = 0; t < 16; t++) y += cf[t] * hist[j][t];
          if (int'(signed'(txq[i].payload)) != y) bad++;
          nfir++;
        end
      end
      chk(nfir == 80 && bad == 0, $sformatf("FIR outputs %0d bad %0d", nfir, bad));
    end

    // ---- C7 spike raster
    run({28'd0, 4'(CMD_C7_SR)}, 120, '0);
    nsr = 0; bad = 0;
    begin
      int i, f;
      i = 0; f = 0;
      while (i < txq.size()) begin
        logic [N_CH-1:0] m;
        m = '0;
        for (int c = 0; c < N_CH; c++) if (pq[c].size() > f) m[c] = pq[c][f][9];
        if (txq[i].payload[15:12] == 4'hA) begin
          logic [79:0] got;
          nsr++;
          for (int w = 0; w < 5; w++) got[16*w +: 16] = txq[i+1+w].payload[15:0];
          if (got[N_CH-1:0] != m) bad++;
          i += 6;
        end else begin
          if (m != '0 || txq[i].payload[15:12] != 4'hE) bad++;
          i += 1;
        end
        f++;
      end
      chk(f == 120, $sformatf("raster packets %0d", f));
    end
    chk(nsr > 0 && bad == 0, $sformatf("raster spike packets %0d bad %0d", nsr, bad));

    // ---- C8 ATE threshold stream of channel 5 (window 16, 4 windows)
    apb_w(112, 32'h0001_4412);                     // ATE clear, NEO on, 2^4, LPF 4, b 1
    run({1'b0, 7'd5, 7'd0, 1'b0, 12'd0, 4'(CMD_C8_ATE)}, 200, '0);
    nate = 0; foreach (txq[i]) if (txq[i].tag == TAG_ATE && txq[i].idx == 7'd5) nate++;
    chk(nate >= 2, $sformatf("ATE thresholds streamed %0d", nate));
    // ---- C9 ATE -> NEO threshold of channel 5
    apb_w(256 + 5, 20'hFFFFF);
    apb_w(112, 32'h0001_4412);
    run({1'b0, 7'd5, 7'd0, 1'b0, 12'd0, 4'(CMD_C9_ATESD)}, 200, '0);
    apb_r(256 + 5, d);
    chk(d != 32'hFFFFF, $sformatf("C9 updated NEO threshold to %0d", d));
    if (d != 32'hFFFFF) n_c9++;
    apb_w(256 + 5, 3000);

    // ---- batch mode: C2 on 4 channels, batches of 16 words
    apb_w(3, 0);
    run({18'd0, 6'd16, 2'd0, 1'b1, 1'b0, 4'(CMD_C2_RAW)}, 20, 68'hF0);
    nraw = 0; bad = 0;
    foreach (txq[i]) if (txq[i].tag == TAG_RAW) begin
      nraw++;
      if (txq[i].payload[9:0] != pq[txq[i].idx].pop_front()) bad++;
    end
    chk(nraw == 80 && bad == 0, $sformatf("batch words %0d bad %0d", nraw, bad));

    // ---- stop: unlimited C2 ended by the stop bit
    fork
      run({28'd0, 4'(CMD_C2_RAW)}, 0, 68'h1);
      begin repeat (256 * 12) @(negedge clk); apb_w(0, 2); end
    join
    nraw = 0; foreach (txq[i]) if (txq[i].tag == TAG_RAW) nraw++;
    chk(nraw >= 10 && nraw <= 14, $sformatf("stop after ~12 frames: %0d", nraw));

    // ---- MAC accelerator: F=4, L=16, S=3, with processor contention
    begin
      int A [4][16], B [3][16];
      for (int f = 0; f < 4; f++) for (int l = 0; l < 16; l++) begin
        A[f][l] = int'($urandom % 65536) - 32768; mem_w('h2000 + 16 * f + l, 32'(A[f][l]));
      end
      for (int s = 0; s < 3; s++) for (int l = 0; l < 16; l++) begin
        B[s][l] = int'($urandom % 512) - 256; mem_w('h2100 + 16 * s + l, 32'(B[s][l]));
      end
      apb_w(512 + 2, 4); apb_w(512 + 3, 16); apb_w(512 + 4, 3);
      apb_w(512 + 5, 'h2000); apb_w(512 + 6, 'h2100); apb_w(512 + 7, 'h4000);
      apb_w(512 + 0, 3);
      while (!mac_irq) mem_r('h2100 + int'($urandom % 48), d);
      bad = 0;
      for (int s = 0; s < 3; s++) for (int f = 0; f < 4; f++) begin
        int e; e = 0;
        for (int l = 0; l < 16; l++) e += A[f][l] * B[s][l];
        mem_r('h4000 + 4 * s + f, d);
        if (d != 32'(e)) bad++;
      end
      chk(bad == 0, $sformatf("MAC results %0d bad", bad));
      apb_w(512 + 1, 2);
    end

    // ---- processor sleeps during a C2 run and is woken by the CBPU interrupt
    apb_w(581, '1); apb_w(580, 32'h004);          // clear pending, wake on CBPU done
    apb_w(3, 0);
    apb_w(2, {28'd0, 4'(CMD_C2_RAW)}); apb_w(11, 3);
    apb_w(4, 1); apb_w(5, 0); apb_w(6, 0);
    apb_w(0, 1);
    @(negedge clk); sleep_req = 1'b1; @(negedge clk); sleep_req = 1'b0;
    chk(!core_clk_en, "core asleep");
    begin
      int t; t = 0;
      while (!core_clk_en && t < 5000) begin @(posedge clk); t++; end
      chk(core_clk_en && core_irq && cbpu_irq, $sformatf("woken by CBPU done after %0d", t));
      if (core_clk_en) n_wake++;
    end
    apb_w(1, 1); apb_w(581, '1); apb_w(580, 0);
    // ---- memory self test over 256 words of bank 3
    apb_w(585, 'h6000); apb_w(586, 256); apb_w(584, 1);
    // ---- APB window into SRAM while the self test occupies bank 3
    begin
      logic [31:0] wv [8];
      logic [31:0] rv;
      int nbad; nbad = 0;
      foreach (wv[i]) wv[i] = $urandom;
      apb_w(588, 'h6100);
      foreach (wv[i]) apb_w(589, wv[i]);
      apb_r(588, rv);
      chk(rv == 'h6108, $sformatf("window address advanced to %0h", rv));
      apb_w(588, 'h6100);
      foreach (wv[i]) begin apb_r(589, rv); if (rv != wv[i]) nbad++; end
      foreach (wv[i]) begin mem_r('h6100 + i, rv); if (rv != wv[i]) nbad++; end
      chk(nbad == 0, $sformatf("APB window data, %0d mismatches", nbad));
    end
    begin
      int t; t = 0;
      do begin apb_r(587, d); t++; end while (!d[1] && t < 2000);
      chk(d[1] && !d[2], $sformatf("MBIST done %0d fail %0d", d[1], d[2]));
      if (d[1] && !d[2]) n_bist++;
    end

    // ---- mechanisms
    chk(n_stall > 0,  $sformatf("TX stalls %0d", n_stall));
    chk(n_ovf > 0,    "FIFO overflow");
    chk(n_up > 0,     $sformatf("LB->HB switches %0d", n_up));
    chk(n_down > 0,   $sformatf("HB->LB switches %0d", n_down));
    chk(n_det > 0,    $sformatf("spike detections %0d", n_det));
    chk(n_hdr > 0,    "frame headers");
    chk(n_dbg > 0,    "debug replay");
    chk(n_batch_hold > 0, $sformatf("batch holds %0d", n_batch_hold));
    chk(n_contend > 0, $sformatf("SRAM contention %0d", n_contend));
    chk(n_flush > 0,  "flush");
    chk(n_c9 > 0,     "C9 threshold update");
    chk(n_wake > 0,   "sleep and wake-up");
    chk(n_bist > 0,   "memory self test");
    chk(n_apb_wait > 0, "APB wait states at the SRAM window");
    $display("mechanisms: stall=%0d ovf=%0d up=%0d down=%0d det=%0d hdr=%0d dbg=%0d batch=%0d contend=%0d flush=%0d c9=%0d wake=%0d bist=%0d apbwait=%0d",
             n_stall, n_ovf, n_up, n_down, n_det, n_hdr, n_dbg, n_batch_hold, n_contend, n_flush, n_c9, n_wake, n_bist, n_apb_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
