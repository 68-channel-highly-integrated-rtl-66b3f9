// ac_freq_sram: 2 KiB symbol-distribution memory shared by the AC engines.
// 1024 words of 16 bit hold two cumulative-frequency tables of 512 symbols
// (address {table, symbol}). A write port loads the trained tables (from the
// register file / processor). NREQ engines request reads; a round-robin
// arbiter grants one request per cycle when no write is pending, and the
// read word appears on 'rdata' in the cycle after the grant (synchronous
// single-port SRAM). The 2 KiB size and the sharing among the eight AC
// engines follow the paper; the table layout and the arbitration are this
// design's choices.
module ac_freq_sram #(
  parameter int unsigned NREQ  = 8,
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [15:0]              wdata,
  input  logic [NREQ-1:0]          req,
  input  logic [$clog2(WORDS)-1:0] addr [NREQ],
  output logic [NREQ-1:0]          gnt,
  output logic [15:0]              rdata
);
  logic [15:0] mem [WORDS];
  logic [$clog2(NREQ)-1:0] last;
  logic [$clog2(NREQ)-1:0] sel;
  logic any;
  always_comb begin
    gnt = '0; sel = last; any = 1'b0;
    for (int i = 1; i <= NREQ; i++) begin
      logic [$clog2(NREQ)-1:0] j;
      j = $clog2(NREQ)'((32'(last) + i) % NREQ);
      if (!any && req[j] && !we) begin any = 1'b1; sel = j; end
    end
    if (any) gnt[sel] = 1'b1;
  end
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    else if (any) rdata <= mem[addr[sel]];
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last <= '0;
    else if (any) last <= sel;
endmodule
