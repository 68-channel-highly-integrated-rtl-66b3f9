// sram_bank: one single-port 32-bit SRAM macro model with byte enables.
// One access per cycle; a read returns data on the next clock edge
// (registered output), a write updates the selected bytes. Used by
// pe_sram as one of the four 32 KiB banks. Behavioural stand-in for the
// foundry macro; the size follows the paper (32 KiB per bank).
module sram_bank #(
  parameter int unsigned WORDS = 8192
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [3:0]               be,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [31:0]              wdata,
  output logic [31:0]              rdata
);
  logic [31:0] mem [WORDS];
  initial for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;
  always_ff @(posedge clk)
    if (en) begin
      if (we) begin
        for (int b = 0; b < 4; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else rdata <= mem[addr];
    end
endmodule
