// cce: cross-channel compression engine for local field potentials.
// Eight lanes take the samples of eight selected channels (lane_ch, sorted
// ascending). Align: the lane buffers start accepting only once a sample of
// the lowest selected channel arrives, so every buffered frame holds the
// same time instant for all lanes. Each lane buffer holds up to DEPTH
// samples. When all eight buffers hold a sample, one frame is taken out:
// each lane is first decorrelated in time (first-order DPCM,
// e = x(n) - x(n-1)), then every lane except the root is decorrelated in
// space against its parent lane (paper Eq. 1):
//     r_c = e_c - round(gamma_c * e_parent),  gamma in signed Q(GW-GF).GF
// and the root lane sends r = e. The residuals, lane 0 first, are zig-zag
// mapped and coded by one shared Golomb-Rice encoder with parameter k from
// the register file, then packed into 16-bit words (CCE data wrap).
// The parent/root chain and gamma come from training on the processor.
// Paper: align module, eight tiny buffers, DPCM, one-tap spatial
// decorrelation and a shared GC encoder. This design's choices: buffer
// depth 8 (the "x8" of the block diagram), gamma format Q4.8 with rounding,
// first-order DPCM, k from the register file, escape coding.
module cce #(
  parameter int unsigned NL    = 8,
  parameter int unsigned DEPTH = 8,
  parameter int unsigned GW    = 12,
  parameter int unsigned GF    = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [6:0]           lane_ch [NL],
  input  logic [2:0]           parent  [NL],
  input  logic [2:0]           root,
  input  logic signed [GW-1:0] gamma   [NL],
  input  logic [3:0]           k,
  input  logic                 s_valid,
  input  logic [6:0]           s_ch,
  input  logic [8:0]           s_data,
  input  logic                 flush,
  output logic                 overflow,
  output logic                 w_valid,
  input  logic                 w_ready,
  output logic [15:0]          w_data,
  output logic                 idle
);
  localparam int unsigned RW = 13;
  localparam int unsigned PW = $clog2(DEPTH);
  // ---------------- align + data buffers ----------------
  logic started;
  logic [8:0]  dbuf [NL][DEPTH];
  logic [PW:0] cnt  [NL];
  logic [PW-1:0] rdp [NL], wrp [NL];
  logic frame_rdy, take;
  always_comb begin
    frame_rdy = 1'b1;
    for (int l = 0; l < NL; l++) if (cnt[l] == 0) frame_rdy = 1'b0;
  end
  logic start_now;
  assign start_now = en && s_valid && s_ch == lane_ch[0];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      started <= 1'b0; overflow <= 1'b0;
      for (int l = 0; l < NL; l++) begin cnt[l] <= '0; rdp[l] <= '0; wrp[l] <= '0; end
    end else begin
      if (!en) started <= 1'b0;
      else if (start_now) started <= 1'b1;
      for (int l = 0; l < NL; l++) begin
        logic wr;
        wr = en && s_valid && (started || start_now) && s_ch == lane_ch[l];
        if (wr && cnt[l] == (PW+1)'(DEPTH)) begin overflow <= 1'b1; wr = 1'b0; end
        if (wr) begin dbuf[l][wrp[l]] <= s_data; wrp[l] <= wrp[l] + 1'b1; end
        if (take) rdp[l] <= rdp[l] + 1'b1;
        cnt[l] <= cnt[l] + (wr ? 1'b1 : 1'b0) - (take ? 1'b1 : 1'b0);
      end
    end

  // ---------------- DPCM + spatial decorrelation ----------------
  logic signed [9:0] e [NL];
  logic [8:0] xprev [NL];
  logic busy;
  logic [2:0] lane;
  logic signed [RW-1:0] resid;
  logic signed [GW+9:0] prod;
  logic signed [GW+9:0] prod_r;
  assign take = frame_rdy && !busy;
  always_comb begin
    prod   = gamma[lane] * e[parent[lane]];
    prod_r = (prod + (GW+10)'(1 << (GF-1))) >>> GF;
    resid  = (lane == root) ? RW'(e[lane]) : RW'(e[lane]) - RW'(prod_r);
  end

  logic [RW-1:0] u;
  assign u = resid[RW-1] ? ~(RW'(resid) << 1) : (RW'(resid) << 1);
  logic [31:0] cw_bits;
  logic [5:0]  cw_len;
  logic        cw_ready;
  golomb_enc #(.UW(RW), .QMAX(16)) u_gc (.u, .k, .code(cw_bits), .len(cw_len));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; lane <= '0;
      for (int l = 0; l < NL; l++) begin xprev[l] <= '0; e[l] <= '0; end
    end else begin
      if (take) begin
        for (int l = 0; l < NL; l++) begin
          e[l]     <= 10'(signed'(dbuf[l][rdp[l]])) - 10'(signed'(xprev[l]));
          xprev[l] <= dbuf[l][rdp[l]];
        end
        busy <= 1'b1; lane <= '0;
      end else if (busy && cw_ready) begin
        lane <= lane + 1'b1;
        if (lane == 3'(NL-1)) busy <= 1'b0;
      end
      if (!en) for (int l = 0; l < NL; l++) xprev[l] <= '0;
    end

  logic pk_empty;
  bit_packer u_pack (
    .clk, .rst_n, .cw_valid(busy), .cw_ready, .cw_bits, .cw_len,
    .flush(flush && !busy && !frame_rdy), .w_valid, .w_ready, .w_data, .empty(pk_empty)
  );
  assign idle = !busy && pk_empty && !frame_rdy;
endmodule
