// gc_adapt: adaptation of the Golomb parameter k for one GC engine.
// It keeps, over a window of up to WIN symbols, the sum A of the mapped
// values, the count N and the number Z of zero symbols. k is the smallest
// value with N*2^k >= A; when more than half of the symbols were zero
// (the paper: the adaptation "tracks the proportion of zero samples") k is
// forced to 0. When N reaches WIN, A, N and Z are halved. The statistics
// rule and the window are this design's choices. k is valid combinationally
// from the state; 'upd' adds one symbol.
module gc_adapt #(
  parameter int unsigned UW   = 9,
  parameter int unsigned WIN  = 32,
  parameter int unsigned KMAX = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          upd,
  input  logic [UW-1:0] u,
  output logic [3:0]    k
);
  localparam int unsigned AW = UW + $clog2(WIN) + 1;
  logic [AW-1:0] a_sum;
  logic [$clog2(WIN):0] n_cnt, z_cnt;
  always_comb begin
    k = 4'(KMAX);
    for (int i = KMAX; i >= 0; i--)
      if ((AW'(n_cnt) << i) >= a_sum) k = 4'(i);
    if ((z_cnt << 1) > n_cnt) k = '0;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin a_sum <= '0; n_cnt <= '0; z_cnt <= '0; end
    else if (clr) begin a_sum <= '0; n_cnt <= '0; z_cnt <= '0; end
    else if (upd) begin
      if (n_cnt == WIN) begin
        a_sum <= (a_sum >> 1) + AW'(u);
        n_cnt <= (n_cnt >> 1) + 1'b1;
        z_cnt <= (z_cnt >> 1) + (u == '0);
      end else begin
        a_sum <= a_sum + AW'(u);
        n_cnt <= n_cnt + 1'b1;
        z_cnt <= z_cnt + (u == '0);
      end
    end
endmodule
