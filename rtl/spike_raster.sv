// spike_raster: spike raster packet generator (command C7).
// The CBPU hands over the spike-detection bit of every channel in order
// 0..NCH-1 (d_valid, d_ch, d_det). The decision wrap collects them into an
// NCH-bit mask and ORs them; the timer counts completed rounds (one per
// 20 kHz sample period). At the end of each round (channel NCH-1) a packet
// is emitted on a 16-bit stream:
//   no spike : one word {4'hE, time[11:0]}                 (empty packet)
//   spikes   : {4'hA, time[11:0]} then ceil(NCH/16) words of the mask,
//              channels 0..15 first, bit i = channel 16*w+i.
// Paper: OR over the 68 detection bits, empty packet with its own header,
// otherwise firing channels with timing, timer and time wrap. The header
// codes, the 12-bit time field and the word order are this design's
// choices. A new round may start while a packet is still being sent; the
// packet is latched, and a round that ends before the previous packet left
// sets 'overrun'.
module spike_raster
  import psoc_pkg::*;
#(
  parameter int unsigned NCH = 68
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        d_valid,
  input  logic [6:0]  d_ch,
  input  logic        d_det,
  output logic        o_valid,
  input  logic        o_ready,
  output logic [15:0] o_word,
  output logic [31:0] timer,
  output logic        overrun
);
  localparam int unsigned NW = (NCH + 15) / 16;
  logic [NCH-1:0]     mask;
  logic [NW*16-1:0]   pkt_mask;
  logic [11:0]        pkt_time;
  logic               pkt_spk;
  logic [$clog2(NW+1):0] idx;   // words left to send incl. header
  logic busy;
  logic [NCH-1:0] mask_n;
  always_comb begin
    mask_n = mask;
    if (d_valid) mask_n[d_ch] = d_det;
  end
  logic round_end;
  assign round_end = en && d_valid && d_ch == 7'(NCH-1);

  assign o_valid = busy;
  always_comb begin
    if (idx == ($clog2(NW+1)+1)'(NW + 1) || !pkt_spk)
      o_word = {pkt_spk ? HDR_SR_SPIKE : HDR_SR_EMPTY, pkt_time};
    else
      o_word = pkt_mask[16*(NW - 32'(idx)) +: 16];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      mask <= '0; timer <= '0; busy <= 1'b0; idx <= '0; pkt_mask <= '0;
      pkt_time <= '0; pkt_spk <= 1'b0; overrun <= 1'b0;
    end else begin
      if (en && d_valid) mask <= mask_n;
      if (busy && o_ready) begin
        if (idx == 1 || !pkt_spk) busy <= 1'b0;
        idx <= idx - 1'b1;
      end
      if (round_end) begin
        if (busy && !(o_ready && (idx == 1 || !pkt_spk))) overrun <= 1'b1;
        pkt_spk  <= |mask_n;
        pkt_mask <= (NW*16)'(mask_n);
        pkt_time <= timer[11:0];
        idx      <= ($clog2(NW+1)+1)'(NW + 1);
        busy     <= 1'b1;
        timer    <= timer + 1'b1;
        mask     <= '0;
      end
      if (!en) timer <= '0;
    end
endmodule
