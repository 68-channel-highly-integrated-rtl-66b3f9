// bit_packer: packs variable-length codewords into 16-bit stream words.
// A codeword (right-aligned bits, length 1..32) is accepted when the 64-bit
// staging register has room; a word leaves as soon as 16 bits are staged,
// first bit at word bit 15. 'flush' pads a partial word with zeros and
// sends it; 'empty' reports that nothing is staged. Valid/ready on both
// sides; one codeword and one word per cycle at most. Generic helper of
// the compression engines' data wraps (this design's own structure).
module bit_packer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cw_valid,
  output logic        cw_ready,
  input  logic [31:0] cw_bits,
  input  logic [5:0]  cw_len,
  input  logic        flush,
  output logic        w_valid,
  input  logic        w_ready,
  output logic [15:0] w_data,
  output logic        empty
);
  logic [63:0] acc;
  logic [6:0]  cnt;
  logic take, give;
  logic [6:0] cnt_after;
  logic [63:0] acc_pad;
  assign acc_pad  = acc << (7'd16 - cnt);
  assign w_valid  = (cnt >= 7'd16) || (flush && cnt != 0);
  assign w_data   = (cnt >= 7'd16) ? acc[cnt-7'd16 +: 16] : acc_pad[15:0];
  assign give     = w_valid && w_ready;
  assign cnt_after = give ? ((cnt >= 7'd16) ? cnt - 7'd16 : 7'd0) : cnt;
  assign cw_ready = (cnt_after + 7'(cw_len) <= 7'd64) && !flush;
  assign take     = cw_valid && cw_ready;
  assign empty    = (cnt == 0);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin acc <= '0; cnt <= '0; end
    else begin
      if (take) acc <= (acc << cw_len) | 64'(cw_bits & ((32'd1 << cw_len) - 32'd1));
      cnt <= cnt_after + (take ? 7'(cw_len) : 7'd0);
    end
endmodule
