// cbpu_ctrl: command controller of the central bio-signal processing unit.
// On 'start' it runs the command in cfg.cmd (C1..C9) until cfg.n_frames
// frames are done, C1/C6 have written cfg.mem_len words, or 'stop'.
// Frame scan: channels 0..N_CH-1 are visited in order. Normal mode pops
// one sample from every channel FIFO (waiting for it), so all channels stay
// aligned in time; debug mode instead reads the samples of the selected
// channels from PE SRAM (one word per sample: bit 9 = detection flag, bits
// 8:0 = sample, frames of cfg.dbg_period cycles). A sample of a selected
// channel is broadcast to the functional units (u_*) with the unit enable
// of the command; C7 passes all channels, C8/C9 only cfg.ate_ch.
// Routing of results (paper Fig. 3):
//   C1 sample -> PE SRAM         C2 sample -> TX (frame header every
//   C3 ICE    -> TX                 cfg.pkt_period frames)
//   C4 CCE    -> TX              C5 FIR -> TX      C6 FIR -> PE SRAM
//   C7 SR     -> TX              C8 ATE -> TX      C9 ATE -> spike detector
// PE SRAM port: request/grant, word address, read data valid one cycle
// after the grant. TX: a 32-entry FIFO of tagged words; in batch mode
// words leave only in groups of cfg.batch_len (the rest at the end).
// The scan pauses while the TX FIFO has fewer than 8 free places or an
// SRAM write is pending, which is how back-pressure reaches the FIFOs.
// At the end it flushes ICE/CCE, drains TX and pulses 'done' (an
// interrupt that can wake the processor). The command set, channel scan
// order, debug mode and destinations follow the paper; encodings, word
// formats and the handshakes are this design's choices.
// Lint note: the TX-overflow assertion at the end uses rst_n in its
// 'disable iff', which the linter reports as rst_n being used both
// asynchronously and synchronously; it is a simulation-only check and
// adds no logic.
module cbpu_ctrl
  import psoc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  cbpu_cfg_t        cfg,
  input  logic             start,
  input  logic             stop,
  output logic             busy,
  output logic             done,
  // ADW FIFOs
  input  logic [N_CH-1:0]  f_valid,
  input  logic [8:0]       f_data [N_CH],
  input  logic [N_CH-1:0]  f_det,
  output logic [N_CH-1:0]  f_rd,
  // sample broadcast to functional units
  output logic             u_valid,
  output logic [6:0]       u_ch,
  output logic [8:0]       u_data,
  output logic             u_det,
  output logic             ice_en, cce_en, fir_en, sr_en, ate_en,
  output logic             u_flush,
  // unit results
  input  logic             ice_valid,
  output logic             ice_ready,
  input  logic [3:0]       ice_slot,
  input  logic [15:0]      ice_word,
  input  logic             ice_flush_done,
  input  logic             cce_valid,
  output logic             cce_ready,
  input  logic [15:0]      cce_word,
  input  logic             cce_idle,
  input  logic             fir_valid,
  input  logic [6:0]       fir_ch,
  input  logic [25:0]      fir_y,
  input  logic             sr_valid,
  output logic             sr_ready,
  input  logic [15:0]      sr_word,
  input  logic             ate_valid,
  input  logic [27:0]      ate_thr,
  // spike-detector parameter update (C9)
  output logic             sd_we,
  output logic [6:0]       sd_ch,
  output logic             sd_amp,
  output logic [19:0]      sd_val,
  // PE SRAM port
  output logic             m_req,
  output logic             m_we,
  output logic [14:0]      m_addr,
  output logic [31:0]      m_wdata,
  input  logic             m_gnt,
  input  logic             m_rvalid,
  input  logic [31:0]      m_rdata,
  // off-chip stream
  output logic             tx_valid,
  input  logic             tx_ready,
  output tx_word_t         tx_word
);
  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_RD, S_RDW, S_FLUSH, S_DRAIN, S_DONE} st_e;
  st_e st;
  cmd_e cmd;
  logic [6:0]  ch;
  logic [15:0] frame;
  logic [15:0] fcyc;
  logic [14:0] mcnt, dptr;
  logic        stop_req;

  // ---------------- TX FIFO ----------------
  localparam int unsigned TD = 32;
  tx_word_t tq [TD];
  logic [4:0] twp, trp;
  logic [5:0] tcnt;
  logic       t_push;
  tx_word_t   t_in;
  logic       t_pop, draining;
  assign draining = (st == S_DRAIN);
  assign tx_valid = (tcnt != 0) && (!cfg.batch || tcnt >= 6'(cfg.batch_len) || draining);
  assign tx_word  = tq[trp];
  assign t_pop    = tx_valid && tx_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin twp <= '0; trp <= '0; tcnt <= '0; end
    else begin
      if (t_push) begin tq[twp] <= t_in; twp <= twp + 1'b1; end
      if (t_pop) trp <= trp + 1'b1;
      tcnt <= tcnt + (t_push ? 6'd1 : 6'd0) - (t_pop ? 6'd1 : 6'd0);
    end
  logic room;
  assign room = (tcnt <= 6'(TD - 8));

  // ---------------- unit enables ----------------
  logic running;
  assign running = (st == S_SCAN) || (st == S_RD) || (st == S_RDW) || (st == S_FLUSH);
  assign ice_en = running && cmd == CMD_C3_ICE;
  assign cce_en = running && cmd == CMD_C4_CCE;
  assign fir_en = running && (cmd == CMD_C5_FIR || cmd == CMD_C6_FIRS);
  assign sr_en  = running && cmd == CMD_C7_SR;
  assign ate_en = running && (cmd == CMD_C8_ATE || cmd == CMD_C9_ATESD);
  assign u_flush = (st == S_FLUSH);

  // ---------------- SRAM write holding register ----------------
  logic        wpend;
  logic [31:0] wdata_q;
  logic        wr_fir;   // C6 result captured

  // ---------------- scan ----------------
  logic        ch_sel, take_fifo, smp_v;
  logic [8:0]  smp_d;
  logic        smp_det;
  logic        frame_go;
  assign ch_sel  = cfg.ch_en[ch];
  assign frame_go = !cfg.debug || ch != 0 || fcyc == 0;
  // C2 frame header: sent in its own cycle before channel 0 of the frame
  logic hdr_sent, hdr_due, hdr_now;
  assign hdr_due = cmd == CMD_C2_RAW && ch == 0 && cfg.pkt_period != 0 &&
                   (frame % 16'(cfg.pkt_period)) == 0 && !hdr_sent;
  assign hdr_now = st == S_SCAN && room && !wpend && !stop_req && hdr_due;
  // a sample becomes available this cycle
  always_comb begin
    take_fifo = 1'b0; smp_v = 1'b0; smp_d = f_data[ch]; smp_det = f_det[ch];
    if (st == S_SCAN && room && !wpend && !stop_req && !hdr_due) begin
      if (!cfg.debug) begin
        if (f_valid[ch]) begin take_fifo = 1'b1; smp_v = 1'b1; end
      end else if (frame_go && !ch_sel) begin
        smp_v = 1'b1; smp_d = '0; smp_det = 1'b0;
      end
    end else if (st == S_RDW && m_rvalid) begin
      smp_v = 1'b1; smp_d = m_rdata[8:0]; smp_det = m_rdata[9];
    end
  end
  always_comb begin
    f_rd = '0;
    if (take_fifo) f_rd[ch] = 1'b1;
  end
  logic use_smp;
  always_comb begin
    use_smp = ch_sel;
    if (cmd == CMD_C7_SR) use_smp = 1'b1;
    if (cmd == CMD_C8_ATE || cmd == CMD_C9_ATESD) use_smp = (ch == cfg.ate_ch);
  end
  assign u_valid = smp_v && use_smp;
  assign u_ch    = ch;
  assign u_data  = smp_d;
  assign u_det   = smp_det;

  // ---------------- result collection ----------------
  always_comb begin
    t_push = 1'b0; t_in = '0;
    ice_ready = 1'b0; cce_ready = 1'b0; sr_ready = 1'b0;
    sd_we = 1'b0; sd_ch = cfg.ate_ch; sd_amp = cfg.ate_to_amp;
    sd_val = (ate_thr > 28'hFFFFF) ? 20'hFFFFF : 20'(ate_thr);
    if (cfg.ate_to_amp && ate_thr > 28'h1FF) sd_val = 20'h1FF;
    wr_fir = 1'b0;
    unique case (cmd)
      CMD_C2_RAW: begin
        if (hdr_now) begin t_push = 1'b1; t_in = '{tag: TAG_FRAME, idx: '0, payload: 26'(frame)}; end
        else if (u_valid) begin
          t_push = 1'b1; t_in = '{tag: TAG_RAW, idx: ch, payload: {16'd0, u_det, u_data}};
        end
      end
      CMD_C3_ICE: begin
        ice_ready = (tcnt != 6'(TD));
        if (ice_valid && ice_ready) begin
          t_push = 1'b1; t_in = '{tag: TAG_ICE, idx: 7'(ice_slot), payload: 26'(ice_word)};
        end
      end
      CMD_C4_CCE: begin
        cce_ready = (tcnt != 6'(TD));
        if (cce_valid && cce_ready) begin
          t_push = 1'b1; t_in = '{tag: TAG_CCE, idx: '0, payload: 26'(cce_word)};
        end
      end
      CMD_C5_FIR: if (fir_valid) begin
        t_push = 1'b1; t_in = '{tag: TAG_FIR, idx: fir_ch, payload: fir_y};
      end
      CMD_C6_FIRS: wr_fir = fir_valid;
      CMD_C7_SR: begin
        sr_ready = (tcnt != 6'(TD));
        if (sr_valid && sr_ready) begin
          t_push = 1'b1; t_in = '{tag: TAG_SR, idx: '0, payload: 26'(sr_word)};
        end
      end
      CMD_C8_ATE: if (ate_valid) begin
        t_push = 1'b1;
        t_in = '{tag: TAG_ATE, idx: cfg.ate_ch, payload: (ate_thr > 28'h3FFFFFF) ? '1 : 26'(ate_thr)};
      end
      CMD_C9_ATESD: sd_we = ate_valid;
      default: ;
    endcase
  end

  // SRAM port: pending write has priority over debug reads
  logic mem_full;
  assign mem_full = (mcnt == cfg.mem_len);
  assign m_req   = wpend || (st == S_RD);
  assign m_we    = wpend;
  assign m_addr  = wpend ? cfg.mem_base + mcnt : dptr;
  assign m_wdata = wdata_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; cmd <= CMD_NONE; ch <= '0; frame <= '0; fcyc <= '0; mcnt <= '0;
      dptr <= '0; stop_req <= 1'b0; wpend <= 1'b0; wdata_q <= '0; done <= 1'b0; hdr_sent <= 1'b0;
    end else begin
      done <= 1'b0;
      if (hdr_now) hdr_sent <= 1'b1;
      if (stop && st != S_IDLE) stop_req <= 1'b1;
      // frame pacing in debug mode
      if (st == S_SCAN || st == S_RD || st == S_RDW)
        fcyc <= (fcyc == cfg.dbg_period - 1'b1) ? '0 : fcyc + 1'b1;
      // SRAM writes
      if (wpend && m_gnt) begin wpend <= 1'b0; mcnt <= mcnt + 1'b1; end
      if (cmd == CMD_C1_REC && u_valid && !mem_full) begin
        wpend <= 1'b1; wdata_q <= {22'd0, u_det, u_data};
      end
      if (wr_fir && !mem_full) begin wpend <= 1'b1; wdata_q <= 32'(signed'(fir_y)); end
      unique case (st)
        S_IDLE:
          if (start) begin
            st <= S_SCAN; cmd <= cfg.cmd; ch <= '0; frame <= '0; fcyc <= '0; mcnt <= '0;
            dptr <= cfg.dbg_base; stop_req <= 1'b0; hdr_sent <= 1'b0;
          end
        S_SCAN: begin
          if (stop_req || ((cmd == CMD_C1_REC || cmd == CMD_C6_FIRS) && mem_full && !wpend))
            st <= S_FLUSH;
          else if (cfg.debug && room && !wpend && !hdr_due && frame_go && ch_sel) st <= S_RD;
          else if (smp_v) begin
            ch <= (ch == 7'(N_CH-1)) ? '0 : ch + 1'b1;
            if (ch == 7'(N_CH-1)) begin
              frame <= frame + 1'b1; hdr_sent <= 1'b0;
              if (cfg.n_frames != 0 && frame + 1'b1 == cfg.n_frames) stop_req <= 1'b1;
            end
          end
        end
        S_RD: if (!wpend && m_gnt) begin st <= S_RDW; dptr <= dptr + 1'b1; end
        S_RDW: if (m_rvalid) begin
          st <= S_SCAN;
          ch <= (ch == 7'(N_CH-1)) ? '0 : ch + 1'b1;
          if (ch == 7'(N_CH-1)) begin
            frame <= frame + 1'b1; hdr_sent <= 1'b0;
            if (cfg.n_frames != 0 && frame + 1'b1 == cfg.n_frames) stop_req <= 1'b1;
          end
        end
        S_FLUSH:
          if (!wpend && (cmd != CMD_C3_ICE || ice_flush_done) && (cmd != CMD_C4_CCE || cce_idle))
            st <= S_DRAIN;
        S_DRAIN: if (tcnt == 0 && !(cmd == CMD_C7_SR && sr_valid)) st <= S_DONE;
        S_DONE: begin done <= 1'b1; st <= S_IDLE; cmd <= CMD_NONE; end
        default: st <= S_IDLE;
      endcase
    end
  assign busy = (st != S_IDLE);

  // a word must never be lost at the TX FIFO
  a_tx_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                     !(t_push && tcnt == 6'(TD) && !t_pop));
endmodule
