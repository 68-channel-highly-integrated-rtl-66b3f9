// apb_mem_window: access to the PE SRAM from the APB bus.
// Two APB words form an indirect window into the memory:
//   BASE_WORD     MEMADDR  word address of the next access (read/write)
//   BASE_WORD + 1 MEMDATA  a write stores pwdata at MEMADDR, a read returns
//                          the word at MEMADDR; both then advance MEMADDR
// so a block of words is moved by one address write followed by a burst
// of data accesses. The window is a master of the SRAM crossbar
// (request/grant, read data one cycle after the grant). A MEMDATA access
// holds PREADY low until the crossbar granted a write or returned the read
// word, so the bus simply waits while another master owns the bank.
// 'sel' marks an access to the window so the top level can route PREADY
// and PRDATA from here instead of from the register file.
// The paper states that the SRAM can be reached by other chip components
// over the APB bus; the indirect two-word window and its auto-increment
// are this design's choice.
module apb_mem_window #(
  parameter int unsigned AW        = 15,
  parameter logic [9:0]  BASE_WORD = 10'd588
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          psel,
  input  logic          penable,
  input  logic          pwrite,
  input  logic [11:0]   paddr,
  input  logic [31:0]   pwdata,
  output logic          sel,
  output logic          pready,
  output logic [31:0]   prdata,
  output logic          m_req,
  output logic          m_we,
  output logic [AW-1:0] m_addr,
  output logic [31:0]   m_wdata,
  input  logic          m_gnt,
  input  logic          m_rvalid,
  input  logic [31:0]   m_rdata
);
  logic [9:0]    a;
  logic          acc, is_data, rd_wait;
  logic [AW-1:0] ptr;

  assign a       = paddr[11:2];
  assign is_data = (a == BASE_WORD + 10'd1);
  assign sel     = psel && (a == BASE_WORD || is_data);
  assign acc     = psel && penable;

  assign m_req   = acc && is_data && !rd_wait;
  assign m_we    = pwrite;
  assign m_addr  = ptr;
  assign m_wdata = pwdata;

  always_comb begin
    if (!is_data)    pready = 1'b1;
    else if (pwrite) pready = m_gnt;
    else             pready = rd_wait && m_rvalid;
    prdata = is_data ? m_rdata : 32'(ptr);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ptr <= '0; rd_wait <= 1'b0;
    end else begin
      if (acc && pwrite && a == BASE_WORD) ptr <= pwdata[AW-1:0];
      if (m_req && m_gnt) begin
        if (pwrite) ptr <= ptr + 1'b1;
        else        rd_wait <= 1'b1;
      end
      if (rd_wait && m_rvalid) begin
        rd_wait <= 1'b0;
        ptr     <= ptr + 1'b1;
      end
    end
endmodule
