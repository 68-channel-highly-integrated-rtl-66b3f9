// psoc_top: digital core of the 68-channel neural-recording PSoC.
// Structure (one clock domain, the 5 MHz system clock):
//   68 x adw_channel: per channel, the delta-sigma bit stream is decimated
//     to 9-bit samples (CIC + two half-band stages, optional HPF), a
//     spike detector raises the channel into high-bandwidth mode while
//     spikes are present (activity-dependent wake-up, ADW), and samples
//     wait in a small FIFO. The modulator clock enable and bandwidth mode
//     go out to the analog front end (mod_en / hb_mode).
//   cbpu_ctrl: the bio-signal processing unit's controller. It scans the
//     FIFOs frame by frame, broadcasts samples to the functional units
//     (ICE, CCE, FIR, spike raster, ATE) according to the command, and
//     sends results to the off-chip stream (tx_*) or to PE SRAM.
//   pe_sram: 4 x 32 KiB banks shared by the processor port (p_*), the
//     MAC accelerator, the CBPU, the MBIST and an APB window
//     (apb_mem_window, APB words 588/589) through a crossbar.
//   mac_unit: matrix multiply-accumulate accelerator for feature
//     extraction, programmed over APB; interrupt mac_irq.
//   apb_regs: APB register file holding every setting; C9 (ATE -> spike
//     detector) writes thresholds into it.
//   pe_timer, wakeup_ctrl, mbist: timer, wake-up/interrupt controller
//     (gates the processor clock while it sleeps) and memory self test.
// The RISC-V core, the delta-sigma modulators, clock generation, body
// bias/power management and the serial interface are outside this
// module: their connections are the ports. Processor instruction and
// data accesses arrive on the p_* request/grant port (read data one cycle
// after the grant); configuration on the APB port; the serial link takes
// 37-bit tagged words on a valid/ready stream.
// The block set and connections follow the paper's system and CBPU
// diagrams; bus protocols, word formats and the register map are this
// design's choices. The linter's note that rst_n is used both as an
// asynchronous reset and synchronously comes from the 'disable iff' of
// an assertion in cbpu_ctrl (simulation only, no logic).
module psoc_top
  import psoc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // analog front end (delta-sigma modulators)
  input  logic [N_CH-1:0] dsm_bit,
  output logic [N_CH-1:0] mod_en,
  output logic [N_CH-1:0] hb_mode,
  // processor memory port
  input  logic        p_req,
  input  logic        p_we,
  input  logic [3:0]  p_be,
  input  logic [14:0] p_addr,
  input  logic [31:0] p_wdata,
  output logic        p_gnt,
  output logic        p_rvalid,
  output logic [31:0] p_rdata,
  // processor APB port
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [11:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr,
  // interrupts and sleep control of the processor
  output logic        cbpu_irq,
  output logic        mac_irq,
  input  logic [3:0]  ext_irq,
  input  logic        sleep_req,
  output logic        core_irq,
  output logic        core_clk_en,
  // off-chip stream
  output logic        tx_valid,
  input  logic        tx_ready,
  output tx_word_t    tx_word,
  // raster timer (for time-stamping by the host)
  output logic [31:0] sr_timer
);
  // configuration
  cbpu_cfg_t   cfg;
  logic        start, stop, busy, done;
  hpf_sel_e    hpf_sel;
  logic [7:0]  hold_len;
  logic [N_CH-1:0] force_hb;
  logic [8:0]  amp_thr [N_CH];
  logic [19:0] neo_thr [N_CH];
  logic        sd_we, sd_amp;
  logic [6:0]  sd_ch;
  logic [19:0] sd_val;
  logic        ice_nll, ice_rle3, ice_tbl_we;
  logic [7:0]  ice_ac_tbl;
  logic [15:0] ice_slot_en, ice_tbl_wdata, ice_ovf;
  logic [6:0]  ice_slot_ch [16];
  logic [9:0]  ice_tbl_waddr;
  logic [6:0]  cce_lane_ch [8];
  logic [2:0]  cce_parent [8];
  logic [2:0]  cce_root;
  logic signed [11:0] cce_gamma [8];
  logic [3:0]  cce_k;
  logic        cce_ovf;
  logic        fir_clr;
  logic signed [15:0] fir_coef [16];
  logic [15:0] fir_tap_en;
  logic [6:0]  fir_tap_ch [16];
  logic        ate_clr, ate_neo_en;
  logic [3:0]  ate_win_log2, ate_lpf_sh;
  logic [2:0]  ate_b_sh;
  logic        sr_overrun;
  logic        mac_we;
  logic [2:0]  mac_addr;
  logic [31:0] mac_wdata, mac_rdata;

  // ADW channels
  logic [N_CH-1:0] f_valid, f_det, f_rd, adw_ovf;
  logic [8:0]  f_data [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    adw_channel u_ch (
      .clk, .rst_n, .hpf_sel, .force_hb(force_hb[c]), .amp_thr(amp_thr[c]),
      .neo_thr(neo_thr[c]), .hold_len, .mod_en(mod_en[c]), .hb_mode(hb_mode[c]),
      .dsm_bit(dsm_bit[c]), .f_valid(f_valid[c]), .rd_en(f_rd[c]), .f_data(f_data[c]),
      .f_det(f_det[c]), .ovf(adw_ovf[c]));
  end

  // CBPU
  logic        u_valid, u_det, u_flush;
  logic [6:0]  u_ch;
  logic [8:0]  u_data;
  logic        ice_en, cce_en, fir_en, sr_en, ate_en;
  logic        ice_valid, ice_ready, ice_flush_done;
  logic [3:0]  ice_slot;
  logic [15:0] ice_word;
  logic        cce_valid, cce_ready, cce_idle;
  logic [15:0] cce_word;
  logic        fir_valid;
  logic [6:0]  fir_ch;
  logic signed [25:0] fir_y;
  logic        sr_valid, sr_ready;
  logic [15:0] sr_word;
  logic        ate_valid;
  logic [27:0] ate_thr;
  logic        cm_req, cm_we, cm_gnt, cm_rvalid;
  logic [14:0] cm_addr;
  logic [31:0] cm_wdata, cm_rdata;

  cbpu_ctrl u_cbpu (
    .clk, .rst_n, .cfg, .start, .stop, .busy, .done,
    .f_valid, .f_data, .f_det, .f_rd,
    .u_valid, .u_ch, .u_data, .u_det, .ice_en, .cce_en, .fir_en, .sr_en, .ate_en, .u_flush,
    .ice_valid, .ice_ready, .ice_slot, .ice_word, .ice_flush_done,
    .cce_valid, .cce_ready, .cce_word, .cce_idle,
    .fir_valid, .fir_ch, .fir_y(fir_y), .sr_valid, .sr_ready, .sr_word,
    .ate_valid, .ate_thr, .sd_we, .sd_ch, .sd_amp, .sd_val,
    .m_req(cm_req), .m_we(cm_we), .m_addr(cm_addr), .m_wdata(cm_wdata),
    .m_gnt(cm_gnt), .m_rvalid(cm_rvalid), .m_rdata(cm_rdata),
    .tx_valid, .tx_ready, .tx_word);

  // functional units
  ice u_ice (
    .clk, .rst_n, .nll(ice_nll), .rle3(ice_rle3), .slot_en(ice_slot_en), .slot_ch(ice_slot_ch),
    .ac_tbl(ice_ac_tbl), .s_valid(u_valid && ice_en), .s_ch(u_ch), .s_data(u_data), .s_det(u_det),
    .flush(u_flush), .flush_done(ice_flush_done), .overflow(ice_ovf),
    .tbl_we(ice_tbl_we), .tbl_waddr(ice_tbl_waddr), .tbl_wdata(ice_tbl_wdata),
    .o_valid(ice_valid), .o_ready(ice_ready), .o_slot(ice_slot), .o_word(ice_word));

  cce u_cce (
    .clk, .rst_n, .en(cce_en), .lane_ch(cce_lane_ch), .parent(cce_parent), .root(cce_root),
    .gamma(cce_gamma), .k(cce_k), .s_valid(u_valid && cce_en), .s_ch(u_ch), .s_data(u_data),
    .flush(u_flush), .overflow(cce_ovf), .w_valid(cce_valid), .w_ready(cce_ready),
    .w_data(cce_word), .idle(cce_idle));

  fir u_fir (
    .clk, .rst_n, .clr(fir_clr), .coef(fir_coef), .tap_en(fir_tap_en), .tap_ch(fir_tap_ch),
    .s_valid(u_valid && fir_en), .s_ch(u_ch), .s_data(u_data),
    .o_valid(fir_valid), .o_ch(fir_ch), .o_y(fir_y));

  spike_raster u_sr (
    .clk, .rst_n, .en(sr_en), .d_valid(u_valid && sr_en), .d_ch(u_ch), .d_det(u_det),
    .o_valid(sr_valid), .o_ready(sr_ready), .o_word(sr_word), .timer(sr_timer),
    .overrun(sr_overrun));

  logic ate_win_valid;
  logic [3:0]  ate_zc;
  logic [23:0] ate_ne;
  ate u_ate (
    .clk, .rst_n, .clr(ate_clr), .neo_en(ate_neo_en), .win_log2(ate_win_log2),
    .lpf_sh(ate_lpf_sh), .b_sh(ate_b_sh), .x_valid(u_valid && ate_en), .x(u_data),
    .win_valid(ate_win_valid), .zc(ate_zc), .ne(ate_ne), .thr_valid(ate_valid), .thr(ate_thr));

  // processing element memory and MAC accelerator
  logic        mm_req, mm_we, mm_gnt, mm_rvalid;
  logic [14:0] mm_addr;
  logic [31:0] mm_wdata, mm_rdata;
  logic [4:0]        x_gnt, x_rvalid;
  logic [4:0][31:0]  x_rdata;
  // APB window into the SRAM (crossbar master 4)
  logic        wm_req, wm_we, wm_gnt, wm_rvalid, win_sel, win_pready, r_pready;
  logic [14:0] wm_addr;
  logic [31:0] wm_wdata, win_prdata, r_prdata;
  apb_mem_window u_win (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata,
    .sel(win_sel), .pready(win_pready), .prdata(win_prdata),
    .m_req(wm_req), .m_we(wm_we), .m_addr(wm_addr), .m_wdata(wm_wdata),
    .m_gnt(wm_gnt), .m_rvalid(wm_rvalid), .m_rdata(x_rdata[4]));
  assign pready = win_sel ? win_pready : r_pready;
  assign prdata = win_sel ? win_prdata : r_prdata;
  logic        bm_req, bm_we, bm_gnt, bm_rvalid;
  logic [14:0] bm_addr;
  logic [31:0] bm_wdata;

  mac_unit u_mac (
    .clk, .rst_n, .reg_we(mac_we), .reg_addr(mac_addr), .reg_wdata(mac_wdata),
    .reg_rdata(mac_rdata), .irq(mac_irq),
    .m_req(mm_req), .m_we(mm_we), .m_addr(mm_addr), .m_wdata(mm_wdata),
    .m_gnt(mm_gnt), .m_rvalid(mm_rvalid), .m_rdata(mm_rdata));

  pe_sram #(.NM(5)) u_sram (
    .clk, .rst_n,
    .m_req({wm_req, bm_req, cm_req, mm_req, p_req}), .m_we({wm_we, bm_we, cm_we, mm_we, p_we}),
    .m_be({4'hF, 4'hF, 4'hF, 4'hF, p_be}), .m_addr({wm_addr, bm_addr, cm_addr, mm_addr, p_addr}),
    .m_wdata({wm_wdata, bm_wdata, cm_wdata, mm_wdata, p_wdata}),
    .m_gnt(x_gnt), .m_rvalid(x_rvalid), .m_rdata(x_rdata));
  assign {wm_gnt, bm_gnt, cm_gnt, mm_gnt, p_gnt}                = x_gnt;
  assign {wm_rvalid, bm_rvalid, cm_rvalid, mm_rvalid, p_rvalid} = x_rvalid;
  assign p_rdata  = x_rdata[0];
  assign mm_rdata = x_rdata[1];
  assign cm_rdata = x_rdata[2];

  // PE timer, wake-up / interrupt controller, MBIST
  logic [2:0]  per_we;
  logic [1:0]  per_addr;
  logic [31:0] per_wdata, tmr_rdata, wku_rdata, bist_rdata;
  logic        tmr_irq, apb_access, bist_done;
  pe_timer u_timer (
    .clk, .rst_n, .reg_we(per_we[0]), .reg_addr(per_addr), .reg_wdata(per_wdata),
    .reg_rdata(tmr_rdata), .irq(tmr_irq));
  wakeup_ctrl #(.NSRC(9)) u_wakeup (
    .clk, .rst_n, .src({bist_done, ext_irq, apb_access, cbpu_irq, mac_irq, tmr_irq}), .sleep_req,
    .reg_we(per_we[1]), .reg_addr(per_addr), .reg_wdata(per_wdata), .reg_rdata(wku_rdata),
    .core_irq, .core_clk_en);
  mbist u_mbist (
    .clk, .rst_n, .reg_we(per_we[2]), .reg_addr(per_addr), .reg_wdata(per_wdata),
    .reg_rdata(bist_rdata), .done(bist_done),
    .m_req(bm_req), .m_we(bm_we), .m_addr(bm_addr), .m_wdata(bm_wdata),
    .m_gnt(bm_gnt), .m_rvalid(bm_rvalid), .m_rdata(x_rdata[3]));

  // register file
  logic done_irq;
  assign cbpu_irq = done_irq;
  apb_regs u_regs (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata(r_prdata), .pready(r_pready), .pslverr,
    .cfg, .start, .stop, .busy, .done, .done_irq,
    .hpf_sel, .hold_len, .force_hb, .amp_thr, .neo_thr, .adw_ovf,
    .sd_we, .sd_ch, .sd_amp, .sd_val,
    .ice_nll, .ice_rle3, .ice_ac_tbl, .ice_slot_en, .ice_slot_ch, .ice_tbl_we, .ice_tbl_waddr,
    .ice_tbl_wdata, .ice_ovf,
    .cce_lane_ch, .cce_parent, .cce_root, .cce_gamma, .cce_k, .cce_ovf,
    .fir_clr, .fir_coef, .fir_tap_en, .fir_tap_ch,
    .ate_clr, .ate_neo_en, .ate_win_log2, .ate_lpf_sh, .ate_b_sh,
    .sr_overrun, .mac_we, .mac_addr, .mac_wdata, .mac_rdata,
    .per_we, .per_addr, .per_wdata, .tmr_rdata, .wku_rdata, .bist_rdata, .apb_access);
endmodule
