// golomb_enc: combinational Golomb-Rice encoder (divisor 2^k).
// Codeword = q ones, a terminating zero, then the k low bits of u, where
// q = u >> k. If q reaches QMAX the code is QMAX ones followed by u in raw
// UW bits (escape), bounding the codeword length. The codeword is returned
// right-aligned in 'code' with its length in 'len', first bit at the MSB of
// the valid part. Golomb coding follows the paper; the Rice restriction and
// the escape are this design's choices.
module golomb_enc #(
  parameter int unsigned UW   = 9,
  parameter int unsigned QMAX = 16,
  parameter int unsigned KW   = 4
) (
  input  logic [UW-1:0] u,
  input  logic [KW-1:0] k,
  output logic [31:0]   code,
  output logic [5:0]    len
);
  logic [UW-1:0] q;
  logic [31:0] ones, rem;
  always_comb begin
    q = u >> k;
    if (q < QMAX) begin
      ones = ((32'd1 << q) - 32'd1) << (k + 1);
      rem  = 32'(u) & ((32'd1 << k) - 32'd1);
      code = ones | rem;
      len  = 6'(q) + 6'd1 + 6'(k);
    end else begin
      ones = ((32'd1 << QMAX) - 32'd1) << UW;
      rem  = 32'(u);
      code = ones | rem;
      len  = 6'(QMAX + UW);
    end
  end
endmodule
