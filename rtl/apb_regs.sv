// apb_regs: APB (v3) slave register file through which the processor
// configures the bio-signal processing unit, the ADW channels, the
// functional units and the MAC accelerator. Zero-wait-state: PREADY is
// always 1, writes take effect on the access phase (PSEL & PENABLE &
// PWRITE), reads return combinationally. Command C9 updates the
// per-channel spike-detector thresholds directly through the sd_* port
// (it wins over a simultaneous bus write to the same register).
// Word map (PADDR[11:2]):
//   0 CTRL   w: b0 start, b1 stop (pulses)            r: b0 busy
//   1 STATUS r: b0 done (sticky, w1 clears), b1 CCE overflow, b2 raster
//            overrun, b3 any ADW FIFO overflow, [31:16] ICE slot overflow
//   2 CMD    [3:0] command, b4 debug, b5 batch, [13:8] batch length,
//            b16 ATE->amplitude threshold, [30:24] ATE channel
//   3 [11:0] packet period   4..6 channel enable [31:0],[63:32],[67:64]
//   7 mem base  8 mem length  9 debug base  10 debug period  11 frames
//   16 ADW: [1:0] HPF select, [15:8] hold length
//   17..19 force high-bandwidth mask   20 any write clears ADW overflows
//   32 ICE: b0 near-lossless, b1 3-part RLE, [15:8] AC table select of
//      the AC slots, [31:16] slot enable
//   33 ICE table write [25:16] address, [15:0] value (write pulse)
//   48..63 ICE slot channel   64 CCE: [2:0] root lane, [7:4] Golomb k
//   72..79 CCE lane: [6:0] channel, [10:8] parent, [27:16] gamma (Q4.8)
//   80..95 FIR coefficient   96..111 FIR tap: [6:0] channel, b8 enable
//   112 FIR/ATE: b0 FIR clear, b1 ATE clear (pulses), b4 NEO enable,
//       [11:8] window log2, [15:12] LPF shift, [18:16] threshold shift
//   128..195 amplitude threshold per channel   256..323 NEO threshold
//   512..519 MAC accelerator registers
//   576..579 PE timer   580..583 wake-up controller   584..587 MBIST
//   (588/589, the SRAM window, are decoded by apb_mem_window beside this
//   register file in psoc_top; they read 0 here)
// The register map and reset values are this design's choice; which
// settings exist follows the functions the paper gives each block.
module apb_regs
  import psoc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // APB slave
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [11:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr,
  // CBPU
  output cbpu_cfg_t   cfg,
  output logic        start,
  output logic        stop,
  input  logic        busy,
  input  logic        done,
  output logic        done_irq,
  // ADW channels
  output hpf_sel_e    hpf_sel,
  output logic [7:0]  hold_len,
  output logic [N_CH-1:0] force_hb,
  output logic [8:0]  amp_thr [N_CH],
  output logic [19:0] neo_thr [N_CH],
  input  logic [N_CH-1:0] adw_ovf,
  input  logic        sd_we,
  input  logic [6:0]  sd_ch,
  input  logic        sd_amp,
  input  logic [19:0] sd_val,
  // ICE
  output logic        ice_nll,
  output logic        ice_rle3,
  output logic [7:0]  ice_ac_tbl,
  output logic [15:0] ice_slot_en,
  output logic [6:0]  ice_slot_ch [16],
  output logic        ice_tbl_we,
  output logic [9:0]  ice_tbl_waddr,
  output logic [15:0] ice_tbl_wdata,
  input  logic [15:0] ice_ovf,
  // CCE
  output logic [6:0]  cce_lane_ch [8],
  output logic [2:0]  cce_parent  [8],
  output logic [2:0]  cce_root,
  output logic signed [11:0] cce_gamma [8],
  output logic [3:0]  cce_k,
  input  logic        cce_ovf,
  // FIR
  output logic        fir_clr,
  output logic signed [15:0] fir_coef [16],
  output logic [15:0] fir_tap_en,
  output logic [6:0]  fir_tap_ch [16],
  // ATE
  output logic        ate_clr,
  output logic        ate_neo_en,
  output logic [3:0]  ate_win_log2,
  output logic [3:0]  ate_lpf_sh,
  output logic [2:0]  ate_b_sh,
  // spike raster
  input  logic        sr_overrun,
  // MAC accelerator register port
  output logic        mac_we,
  output logic [2:0]  mac_addr,
  output logic [31:0] mac_wdata,
  input  logic [31:0] mac_rdata,
  // PE timer, wake-up controller and MBIST register ports
  output logic [2:0]  per_we,      // one-hot: timer, wake-up, MBIST
  output logic [1:0]  per_addr,
  output logic [31:0] per_wdata,
  input  logic [31:0] tmr_rdata,
  input  logic [31:0] wku_rdata,
  input  logic [31:0] bist_rdata,
  output logic        apb_access   // any completed APB transfer (wake-up source)
);
  logic [9:0] a;
  logic       wr;
  logic       cce_ovf_s, sr_ovr_s;
  logic [15:0] ice_ovf_s;
  logic [N_CH-1:0] adw_ovf_s;
  assign a       = paddr[11:2];
  assign wr      = psel && penable && pwrite;
  assign pready  = 1'b1;
  assign pslverr = 1'b0;
  assign mac_we    = wr && a[9:3] == 7'd64;
  assign mac_addr  = a[2:0];
  assign mac_wdata = pwdata;
  assign per_addr  = a[1:0];
  assign per_wdata = pwdata;
  always_comb
    for (int i = 0; i < 3; i++) per_we[i] = wr && a[9:2] == 8'(144 + i);
  assign apb_access = psel && penable;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cfg <= '0; cfg.pkt_period <= 12'd1; cfg.dbg_period <= 16'd256; cfg.n_frames <= 16'd1;
      start <= 1'b0; stop <= 1'b0; done_irq <= 1'b0;
      hpf_sel <= HPF_300HZ; hold_len <= 8'd64; force_hb <= '0;
      for (int c = 0; c < N_CH; c++) begin amp_thr[c] <= 9'h1FF; neo_thr[c] <= 20'hFFFFF; end
      ice_nll <= 1'b0; ice_rle3 <= 1'b0; ice_ac_tbl <= '0; ice_slot_en <= '0;
      for (int s = 0; s < 16; s++) ice_slot_ch[s] <= 7'(s);
      ice_tbl_we <= 1'b0; ice_tbl_waddr <= '0; ice_tbl_wdata <= '0;
      for (int l = 0; l < 8; l++) begin
        cce_lane_ch[l] <= 7'(l); cce_parent[l] <= (l == 0) ? 3'd0 : 3'(l - 1); cce_gamma[l] <= 12'sd256;
      end
      cce_root <= 3'd0; cce_k <= 4'd2;
      fir_clr <= 1'b0; fir_tap_en <= '0;
      for (int t = 0; t < 16; t++) begin fir_coef[t] <= '0; fir_tap_ch[t] <= 7'(t); end
      ate_clr <= 1'b0; ate_neo_en <= 1'b1; ate_win_log2 <= 4'd8; ate_lpf_sh <= 4'd4; ate_b_sh <= 3'd1;
      cce_ovf_s <= 1'b0; sr_ovr_s <= 1'b0; ice_ovf_s <= '0; adw_ovf_s <= '0;
    end else begin
      start <= 1'b0; stop <= 1'b0; ice_tbl_we <= 1'b0; fir_clr <= 1'b0; ate_clr <= 1'b0;
      if (done) done_irq <= 1'b1;
      cce_ovf_s <= cce_ovf_s | cce_ovf;
      sr_ovr_s  <= sr_ovr_s | sr_overrun;
      ice_ovf_s <= ice_ovf_s | ice_ovf;
      adw_ovf_s <= adw_ovf_s | adw_ovf;
      if (wr) begin
        if (a >= 10'd128 && a < 10'd128 + 10'(N_CH)) amp_thr[a - 10'd128] <= pwdata[8:0];
        if (a >= 10'd256 && a < 10'd256 + 10'(N_CH)) neo_thr[a - 10'd256] <= pwdata[19:0];
        if (a >= 10'd48 && a < 10'd64) ice_slot_ch[a[3:0]] <= pwdata[6:0];
        if (a >= 10'd72 && a < 10'd80) begin
          cce_lane_ch[a[2:0]] <= pwdata[6:0]; cce_parent[a[2:0]] <= pwdata[10:8];
          cce_gamma[a[2:0]] <= pwdata[27:16];
        end
        if (a >= 10'd80 && a < 10'd96) fir_coef[a[3:0]] <= pwdata[15:0];
        if (a >= 10'd96 && a < 10'd112) begin
          fir_tap_ch[a[3:0]] <= pwdata[6:0]; fir_tap_en[a[3:0]] <= pwdata[8];
        end
        unique case (a)
          10'd0: begin start <= pwdata[0]; stop <= pwdata[1]; end
          10'd1: if (pwdata[0]) done_irq <= 1'b0;
          10'd2: begin
            cfg.cmd <= cmd_e'(pwdata[3:0]); cfg.debug <= pwdata[4]; cfg.batch <= pwdata[5];
            cfg.batch_len <= pwdata[13:8]; cfg.ate_to_amp <= pwdata[16]; cfg.ate_ch <= pwdata[30:24];
          end
          10'd3:  cfg.pkt_period <= pwdata[11:0];
          10'd4:  cfg.ch_en[31:0] <= pwdata;
          10'd5:  cfg.ch_en[63:32] <= pwdata;
          10'd6:  cfg.ch_en[N_CH-1:64] <= pwdata[N_CH-65:0];
          10'd7:  cfg.mem_base <= pwdata[14:0];
          10'd8:  cfg.mem_len <= pwdata[14:0];
          10'd9:  cfg.dbg_base <= pwdata[14:0];
          10'd10: cfg.dbg_period <= pwdata[15:0];
          10'd11: cfg.n_frames <= pwdata[15:0];
          10'd16: begin hpf_sel <= hpf_sel_e'(pwdata[1:0]); hold_len <= pwdata[15:8]; end
          10'd17: force_hb[31:0] <= pwdata;
          10'd18: force_hb[63:32] <= pwdata;
          10'd19: force_hb[N_CH-1:64] <= pwdata[N_CH-65:0];
          10'd20: begin adw_ovf_s <= '0; cce_ovf_s <= 1'b0; sr_ovr_s <= 1'b0; ice_ovf_s <= '0; end
          10'd32: begin
            ice_nll <= pwdata[0]; ice_rle3 <= pwdata[1]; ice_ac_tbl <= pwdata[15:8];
            ice_slot_en <= pwdata[31:16];
          end
          10'd33: begin ice_tbl_we <= 1'b1; ice_tbl_waddr <= pwdata[25:16]; ice_tbl_wdata <= pwdata[15:0]; end
          10'd64: begin cce_root <= pwdata[2:0]; cce_k <= pwdata[7:4]; end
          10'd112: begin
            fir_clr <= pwdata[0]; ate_clr <= pwdata[1]; ate_neo_en <= pwdata[4];
            ate_win_log2 <= pwdata[11:8]; ate_lpf_sh <= pwdata[15:12]; ate_b_sh <= pwdata[18:16];
          end
          default: ;
        endcase
      end
      // C9: the ATE result updates the detector threshold of its channel
      if (sd_we && int'(sd_ch) < int'(N_CH)) begin
        if (sd_amp) amp_thr[sd_ch] <= sd_val[8:0];
        else neo_thr[sd_ch] <= sd_val;
      end
    end

  always_comb begin
    prdata = '0;
    if (a >= 10'd128 && a < 10'd128 + 10'(N_CH)) prdata = 32'(amp_thr[a - 10'd128]);
    else if (a >= 10'd256 && a < 10'd256 + 10'(N_CH)) prdata = 32'(neo_thr[a - 10'd256]);
    else if (a[9:3] == 7'd64) prdata = mac_rdata;
    else if (a[9:2] == 8'd144) prdata = tmr_rdata;
    else if (a[9:2] == 8'd145) prdata = wku_rdata;
    else if (a[9:2] == 8'd146) prdata = bist_rdata;
    else if (a >= 10'd48 && a < 10'd64) prdata = 32'(ice_slot_ch[a[3:0]]);
    else if (a >= 10'd72 && a < 10'd80)
      prdata = {4'd0, cce_gamma[a[2:0]], 5'd0, cce_parent[a[2:0]], 1'b0, cce_lane_ch[a[2:0]]};
    else if (a >= 10'd80 && a < 10'd96) prdata = 32'(unsigned'(fir_coef[a[3:0]]));
    else if (a >= 10'd96 && a < 10'd112) prdata = {23'd0, fir_tap_en[a[3:0]], 1'b0, fir_tap_ch[a[3:0]]};
    else unique case (a)
      10'd0:  prdata = {31'd0, busy};
      10'd1:  prdata = {ice_ovf_s, 12'd0, |adw_ovf_s, sr_ovr_s, cce_ovf_s, done_irq};
      10'd2:  prdata = {1'b0, cfg.ate_ch, 7'd0, cfg.ate_to_amp, 2'd0, cfg.batch_len,
                        2'd0, cfg.batch, cfg.debug, cfg.cmd};
      10'd3:  prdata = 32'(cfg.pkt_period);
      10'd4:  prdata = cfg.ch_en[31:0];
      10'd5:  prdata = cfg.ch_en[63:32];
      10'd6:  prdata = 32'(cfg.ch_en[N_CH-1:64]);
      10'd7:  prdata = 32'(cfg.mem_base);
      10'd8:  prdata = 32'(cfg.mem_len);
      10'd9:  prdata = 32'(cfg.dbg_base);
      10'd10: prdata = 32'(cfg.dbg_period);
      10'd11: prdata = 32'(cfg.n_frames);
      10'd16: prdata = {16'd0, hold_len, 6'd0, hpf_sel};
      10'd17: prdata = force_hb[31:0];
      10'd18: prdata = force_hb[63:32];
      10'd19: prdata = 32'(force_hb[N_CH-1:64]);
      10'd20: prdata = adw_ovf_s[31:0];
      10'd32: prdata = {ice_slot_en, ice_ac_tbl, 6'd0, ice_rle3, ice_nll};
      10'd64: prdata = {24'd0, cce_k, 1'b0, cce_root};
      10'd112: prdata = {13'd0, ate_b_sh, ate_lpf_sh, ate_win_log2, 3'd0, ate_neo_en, 4'd0};
      default: prdata = '0;
    endcase
  end
endmodule
