// ate: adaptive threshold estimator (second stage of spike detection).
// Shared by all channels; it processes the samples of the one channel the
// CBPU selects, at the sample rate. Pipeline (paper Fig. 4D):
//  HPF-NEO: h(n) = x(n) - x(n-1) (first-difference high-pass, this
//    design's choice), then the nonlinear energy operator
//    psi(n-1) = h(n-1)^2 - h(n)*h(n-2) (paper Eq. 5); 'neo_en' selects psi
//    or h as the signal s.
//  ZC: counts sign changes between consecutive s over a window of
//    2^win_log2 samples; at the window end zc = floor(log2(count))
//    (0 for count 0), the logarithm compressing the count.
//  NE: s is low-pass filtered, lp += (s - lp) >>> lpf_sh; over the window
//    the maximum, minimum and mean of lp are kept; ne = mean + 2*|max-min|.
//  Thr. cal.: the products ne*zc of 4^b_sh windows are accumulated and
//    divided by b^2 = 4^b_sh (a shift), giving the threshold 'thr'.
// Outputs: per window zc/ne (win_valid), per averaging period thr
// (thr_valid). Blocks and their order follow the paper; the HPF and LPF
// forms, the NE combination read from the diagram (Max-min, |.|, x2, +Avg),
// power-of-two windows and b are this design's choices.
module ate #(
  parameter int unsigned XW = 9
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        neo_en,
  input  logic [3:0]  win_log2,   // window 2^win_log2 samples (1..15)
  input  logic [3:0]  lpf_sh,
  input  logic [2:0]  b_sh,
  input  logic        x_valid,
  input  logic signed [XW-1:0] x,
  output logic        win_valid,
  output logic [3:0]  zc,
  output logic [23:0] ne,
  output logic        thr_valid,
  output logic [27:0] thr
);
  localparam int unsigned HW = XW + 1;
  localparam int unsigned SW = 2*HW + 1;
  logic signed [XW-1:0] x1;
  logic signed [HW-1:0] h, h1, h2;
  logic signed [SW-1:0] psi, s, s_prev, lp, mx, mn;
  logic signed [SW+15:0] lsum;
  logic [15:0] zcnt, n;
  logic [2:0]  prime;
  logic        s_v;
  logic [27:0] prod;
  logic [41:0] acc;
  logic [13:0] wcnt;

  assign h   = HW'(x) - HW'(x1);
  assign psi = SW'(h1) * SW'(h1) - SW'(h) * SW'(h2);
  assign s   = neo_en ? psi : SW'(h1);

  function automatic logic [3:0] flog2(input logic [15:0] v);
    flog2 = '0;
    for (int i = 0; i < 16; i++) if (v[i]) flog2 = 4'(i);
  endfunction

  logic signed [SW-1:0] lp_n;
  logic signed [SW+1:0] rng;
  logic [SW+1:0] arng;
  logic signed [SW-1:0] avg;
  assign lp_n = lp + ((s - lp) >>> lpf_sh);
  always_comb begin
    logic signed [SW-1:0] mxn, mnn;
    logic signed [SW+15:0] sn;
    mxn = (n == 0 || lp_n > mx) ? lp_n : mx;
    mnn = (n == 0 || lp_n < mn) ? lp_n : mn;
    sn  = lsum + (SW+16)'(lp_n);
    rng  = (SW+2)'(mxn) - (SW+2)'(mnn);
    arng = rng[SW+1] ? (SW+2)'(-rng) : (SW+2)'(rng);
    avg  = SW'(sn >>> win_log2);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      x1 <= '0; h1 <= '0; h2 <= '0; s_prev <= '0; lp <= '0; mx <= '0; mn <= '0;
      lsum <= '0; zcnt <= '0; n <= '0; prime <= '0; win_valid <= 1'b0; zc <= '0;
      ne <= '0; thr_valid <= 1'b0; thr <= '0; acc <= '0; wcnt <= '0; prod <= '0;
    end else begin
      win_valid <= 1'b0; thr_valid <= 1'b0;
      if (clr) begin
        x1 <= '0; h1 <= '0; h2 <= '0; prime <= '0; n <= '0; zcnt <= '0; lsum <= '0;
        acc <= '0; wcnt <= '0; lp <= '0;
      end else if (x_valid) begin
        x1 <= x; h1 <= h; h2 <= h1;
        if (prime != 3'd3) prime <= prime + 1'b1;   // history filling
        else begin
          s_prev <= s;
          lp <= lp_n;
          if (n == 16'((1 << win_log2) - 1)) begin
            // window end
            logic [3:0] zcv;
            logic [23:0] nev;
            zcv = flog2(zcnt + ((s[SW-1] != s_prev[SW-1] && n != 0) ? 16'd1 : 16'd0));
            nev = 24'(avg) + 24'(arng << 1);
            zc <= zcv; ne <= nev; win_valid <= 1'b1;
            prod <= 28'(nev) * 28'(zcv);
            acc  <= acc + 42'(28'(nev) * 28'(zcv));
            n <= '0; zcnt <= '0; lsum <= '0;
            if (wcnt == 14'((1 << (2*b_sh)) - 1)) begin
              thr <= 28'((acc + 42'(28'(nev) * 28'(zcv))) >> (2*b_sh));
              thr_valid <= 1'b1; acc <= '0; wcnt <= '0;
            end else wcnt <= wcnt + 1'b1;
          end else begin
            n <= n + 1'b1;
            lsum <= lsum + (SW+16)'(lp_n);
            mx <= (n == 0 || lp_n > mx) ? lp_n : mx;
            mn <= (n == 0 || lp_n < mn) ? lp_n : mn;
            if (n != 0 && s[SW-1] != s_prev[SW-1]) zcnt <= zcnt + 1'b1;
          end
        end
      end
    end
endmodule
