// decim_filter: digital decimation filter of one delta-sigma ADC channel.
// Input: the modulator's 1-bit stream (bit_valid at the modulator rate,
// 1 = +full scale, 0 = -full scale). Chain (paper Sec. 2.5):
//  1. third-order CIC decimator, ratio 64 in high-bandwidth mode (5 MHz
//     modulator clock) or 16 in low-bandwidth mode (1.25 MHz), so both
//     modes give the same 78.125 kHz intermediate rate; the output is
//     scaled to about +-256 full scale;
//  2. two half-band FIRs [-1 0 9 16 9 0 -1]/32, each computing only every
//     second output (decimation by 2, the polyphase saving) -> 19.53 kHz;
//  3. high-pass selection: off, ~1 Hz (offset removal) or ~300 Hz (LFP
//     removal), y = x - d, d += (x - d) / 2^s with s = 12 or 3;
//  4. in low-bandwidth mode a one-pole low-pass, lp += (x - lp) / 2, which
//     limits the band to about 2.2 kHz (-3 dB; the paper's low-bandwidth
//     mode is 2.4 kHz, its high-bandwidth mode 10 kHz, which the
//     19.53 kHz output rate already gives);
//  5. saturation to a 9-bit signed sample.
// A mode change (hb) is taken at the next CIC output so the decimation
// never mixes ratios; the next three CIC outputs repeat the last one
// while the comb stages refill at the new ratio. Paper: CIC first stage, two decimate-by-2 polyphase
// FIRs, 1 Hz / 300 Hz / no high-pass, 1.25 / 5 MHz rates, 2.4 / 10 kHz
// bandwidths. Design choices:
// CIC order and ratios, FIR coefficients, the one-pole high- and low-pass, a
// synchronous (not asynchronous) integrator.
module decim_filter
  import psoc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       hb,          // requested high-bandwidth mode
  input  hpf_sel_e   hpf_sel,
  input  logic       bit_valid,
  input  logic       bit_in,
  output logic       hb_active,   // mode the CIC is running in
  output logic       y_valid,
  output logic signed [8:0] y
);
  localparam int unsigned IW = 22;   // 3*log2(64) + 2 sign/magnitude bits + margin
  logic signed [IW-1:0] i1, i2, i3, d1, d2, d3;
  logic [5:0] rc;
  logic [1:0] settle;   // CIC outputs still held after a ratio change
  logic signed [IW-1:0] xin;
  assign xin = bit_in ? IW'(1) : -IW'(1);
  // ---- CIC ----
  logic cic_v;
  logic signed [IW-1:0] cic_o;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      i1 <= '0; i2 <= '0; i3 <= '0; d1 <= '0; d2 <= '0; d3 <= '0; rc <= '0;
      cic_v <= 1'b0; cic_o <= '0; hb_active <= 1'b0; settle <= '0;
    end else begin
      cic_v <= 1'b0;
      if (bit_valid) begin
        logic signed [IW-1:0] n1, n2, n3, c1, c2, c3;
        n1 = i1 + xin; n2 = i2 + n1; n3 = i3 + n2;
        i1 <= n1; i2 <= n2; i3 <= n3;
        if (rc == (hb_active ? 6'd63 : 6'd15)) begin
          rc <= '0;
          c1 = n3 - d1;  d1 <= n3;
          c2 = c1 - d2;  d2 <= c1;
          c3 = c2 - d3;  d3 <= c2;
          // gain R^3: 2^18 (hb) or 2^12 (lb) -> scale to 2^8
          // after a ratio change the comb delays hold differences over the
          // old ratio: the previous output is repeated until they refilled
          if (settle == 0) cic_o <= hb_active ? (c3 >>> 10) : (c3 >>> 4);
          else settle <= settle - 1'b1;
          cic_v <= 1'b1;
          hb_active <= hb;
          if (hb != hb_active) settle <= 2'd3;
        end else rc <= rc + 1'b1;
      end
    end
  // ---- two half-band decimate-by-2 stages ----
  logic signed [IW-1:0] h1_o, h2_o;
  logic h1_v, h2_v;
  hb_decim2 #(.W(IW)) u_h1 (.clk, .rst_n, .x_valid(cic_v), .x(cic_o), .y_valid(h1_v), .y(h1_o));
  hb_decim2 #(.W(IW)) u_h2 (.clk, .rst_n, .x_valid(h1_v), .x(h1_o), .y_valid(h2_v), .y(h2_o));
  // ---- high-pass selection ----
  logic signed [IW+11:0] dc;   // 12 fractional bits
  logic signed [IW+11:0] xs, hp;
  logic signed [IW+11:0] lp;   // low-bandwidth low-pass state
  logic [3:0] sh;
  assign sh = (hpf_sel == HPF_1HZ) ? 4'd12 : 4'd3;
  assign xs = (IW+12)'(h2_o) <<< 12;
  assign hp = xs - dc;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin dc <= '0; lp <= '0; y <= '0; y_valid <= 1'b0; end
    else begin
      y_valid <= h2_v;
      if (h2_v) begin
        logic signed [IW+11:0] o;
        if (hpf_sel == HPF_OFF) begin o = xs; dc <= '0; end
        else begin o = hp; dc <= dc + (hp >>> sh); end
        // low-bandwidth mode: one-pole low-pass, lp += (o - lp) / 2
        // (-3 dB near 2.2 kHz at 19.53 kHz); in high bandwidth lp follows o
        if (!hb_active) o = lp + ((o - lp) >>> 1);
        lp <= o;
        o = o >>> 12;
        y <= (o > 255) ? 9'sd255 : (o < -256) ? -9'sd256 : 9'(o);
      end
    end
endmodule
