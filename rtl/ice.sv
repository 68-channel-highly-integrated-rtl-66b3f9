// ice: intra-channel compression engine for action potentials.
// Sixteen compression slots: slots 0..7 use arithmetic coding (AC), slots
// 8..15 Golomb coding (GC), so any of the 68 channels can be given to AC or
// GC by assigning it to a slot (slot_ch/slot_en, from the register file).
// A tagged sample {channel, data, spike flag} from the CBPU goes to every
// enabled slot whose channel matches. The eight AC slots share one 2 KiB
// distribution SRAM (ac_freq_sram). The multi-channel data wrap collects
// the 16-bit words of all slots round-robin and emits {slot, word}. Mode
// 'nll' selects near-lossless (spike windows plus run lengths) instead of
// lossless coding. Slot counts, the AC/GC split, the buffer of 32 and the
// shared SRAM follow the paper; tagging and arbitration are this design's.
module ice #(
  parameter int unsigned NSLOT = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        nll,
  input  logic        rle3,
  input  logic [NSLOT-1:0] slot_en,
  input  logic [6:0]  slot_ch  [NSLOT],
  input  logic [NSLOT/2-1:0] ac_tbl,
  input  logic        s_valid,
  input  logic [6:0]  s_ch,
  input  logic [8:0]  s_data,
  input  logic        s_det,
  input  logic        flush,
  output logic        flush_done,
  output logic [NSLOT-1:0] overflow,
  // distribution SRAM load
  input  logic        tbl_we,
  input  logic [9:0]  tbl_waddr,
  input  logic [15:0] tbl_wdata,
  // output stream
  output logic        o_valid,
  input  logic        o_ready,
  output logic [3:0]  o_slot,
  output logic [15:0] o_word
);
  localparam int unsigned NAC = NSLOT / 2;
  logic [NSLOT-1:0] wv, wr, fd;
  logic [15:0] wd [NSLOT];
  logic [NAC-1:0] mreq, mgnt;
  logic [9:0] maddr [NAC];
  logic [15:0] mrdata;

  for (genvar i = 0; i < NSLOT; i++) begin : g_slot
    logic req_i, gnt_i;
    logic [9:0] addr_i;
    ice_slot #(.IS_AC(i < NAC)) u_slot (
      .clk, .rst_n, .nll, .rle3, .tbl(i < NAC ? ac_tbl[i % NAC] : 1'b0),
      .s_valid(s_valid && slot_en[i] && s_ch == slot_ch[i]), .s_data, .s_det,
      .flush(flush && slot_en[i]), .flush_done(fd[i]), .overflow(overflow[i]),
      .mem_req(req_i), .mem_addr(addr_i), .mem_gnt(gnt_i), .mem_rdata(mrdata),
      .w_valid(wv[i]), .w_ready(wr[i]), .w_data(wd[i])
    );
    if (i < NAC) begin : g_m
      assign mreq[i]  = req_i;
      assign maddr[i] = addr_i;
      assign gnt_i    = mgnt[i];
    end else begin : g_nm
      assign gnt_i = 1'b0;
    end
  end

  ac_freq_sram #(.NREQ(NAC)) u_sram (
    .clk, .rst_n, .we(tbl_we), .waddr(tbl_waddr), .wdata(tbl_wdata),
    .req(mreq), .addr(maddr), .gnt(mgnt), .rdata(mrdata)
  );

  // flush completes when every enabled slot has reported done
  logic [NSLOT-1:0] fd_seen;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) fd_seen <= '0;
    else if (!flush) fd_seen <= '0;
    else fd_seen <= fd_seen | fd;
  assign flush_done = flush && ((fd_seen | fd | ~slot_en) == '1);

  // multi-channel data wrap: round-robin word collection
  logic [3:0] last, sel;
  logic any;
  always_comb begin
    any = 1'b0; sel = last;
    for (int i = 1; i <= NSLOT; i++) begin
      logic [3:0] j;
      j = 4'((32'(last) + i) % NSLOT);
      if (!any && wv[j]) begin any = 1'b1; sel = j; end
    end
    wr = '0;
    if (any && o_ready) wr[sel] = 1'b1;
  end
  assign o_valid = any;
  assign o_slot  = sel;
  assign o_word  = wd[sel];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last <= '0;
    else if (any && o_ready) last <= sel;
endmodule
