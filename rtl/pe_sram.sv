// pe_sram: the processing element's 128 KiB data/instruction memory,
// organised as NBANK = 4 banks of 32 KiB (8192 x 32 bit) behind a
// crossbar with NM masters (top level: 0 = processor port, 1 = MAC
// accelerator, 2 = CBPU / debug-sample path). Word address m_addr[14:0]:
// bits [14:13] select the bank (bank b covers bytes b*32K .. b*32K+32K-1).
// Each bank has its own round-robin arbiter, so masters hitting different
// banks are served in the same cycle; a master that loses waits with
// m_req held (m_gnt low). Granted reads return m_rdata with m_rvalid one
// cycle after the grant. Writes use byte enables m_be.
// Paper: 128 KiB total in four 32 KiB banks shared by the processor, the
// MAC and the CBPU. Crossbar/arbitration scheme is this design's choice.
module pe_sram #(
  parameter int unsigned NBANK = 4,
  parameter int unsigned BANK_WORDS = 8192,
  parameter int unsigned NM = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [NM-1:0]       m_req,
  input  logic [NM-1:0]       m_we,
  input  logic [NM-1:0][3:0]  m_be,
  input  logic [NM-1:0][14:0] m_addr,
  input  logic [NM-1:0][31:0] m_wdata,
  output logic [NM-1:0]       m_gnt,
  output logic [NM-1:0]       m_rvalid,
  output logic [NM-1:0][31:0] m_rdata
);
  localparam int unsigned AW = $clog2(BANK_WORDS);
  localparam int unsigned BW = (NBANK > 1) ? $clog2(NBANK) : 1;
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NBANK-1:0]        b_en;
  logic [NBANK-1:0]        b_we;
  logic [NBANK-1:0][3:0]   b_be;
  logic [NBANK-1:0][AW-1:0] b_addr;
  logic [NBANK-1:0][31:0]  b_wdata, b_rdata;
  logic [NBANK-1:0][MW-1:0] b_sel;   // granted master per bank
  logic [NBANK-1:0][MW-1:0] rr;      // round-robin pointer per bank
  logic [NM-1:0][BW-1:0]   m_bank;
  logic [NM-1:0]           rd_pend;
  logic [NM-1:0][BW-1:0]   rd_bank;

  always_comb
    for (int m = 0; m < NM; m++) m_bank[m] = BW'(m_addr[m] >> AW);

  // per-bank arbitration: first requester at or after the pointer
  always_comb begin
    b_en = '0; b_sel = '0; m_gnt = '0;
    for (int b = 0; b < NBANK; b++) begin
      for (int k = NM - 1; k >= 0; k--) begin
        int m;
        m = (int'(rr[b]) + k) % NM;
        if (m_req[m] && m_bank[m] == BW'(b)) begin
          b_en[b] = 1'b1; b_sel[b] = MW'(m);
        end
      end
      if (b_en[b]) m_gnt[b_sel[b]] = 1'b1;
    end
  end

  always_comb
    for (int b = 0; b < NBANK; b++) begin
      b_we[b]    = m_we[b_sel[b]];
      b_be[b]    = m_be[b_sel[b]];
      b_addr[b]  = AW'(m_addr[b_sel[b]]);
      b_wdata[b] = m_wdata[b_sel[b]];
    end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk(clk), .en(b_en[b]), .we(b_we[b]), .be(b_be[b]), .addr(b_addr[b]),
      .wdata(b_wdata[b]), .rdata(b_rdata[b]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rr <= '0; rd_pend <= '0; rd_bank <= '0;
    end else begin
      for (int b = 0; b < NBANK; b++)
        if (b_en[b]) rr[b] <= (b_sel[b] == MW'(NM - 1)) ? '0 : b_sel[b] + 1'b1;
      for (int m = 0; m < NM; m++) begin
        rd_pend[m] <= m_gnt[m] && !m_we[m];
        rd_bank[m] <= m_bank[m];
      end
    end

  always_comb
    for (int m = 0; m < NM; m++) begin
      m_rvalid[m] = rd_pend[m];
      m_rdata[m]  = b_rdata[rd_bank[m]];
    end
endmodule
