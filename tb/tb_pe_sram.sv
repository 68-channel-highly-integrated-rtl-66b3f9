// tb_pe_sram: self-checking test of the banked PE memory and its crossbar.
// Three masters issue random reads/writes (with random byte enables) to
// addresses concentrated in a few words of each bank so that bank
// conflicts are frequent. A reference memory in the testbench is updated
// at every grant; each granted read must return the reference value one
// cycle later. Also checks that at most one master is granted per bank
// per cycle, that a waiting master is granted within NM cycles (round
// robin), and that reads hitting different banks proceed in parallel.
// Reduced bank size (256 words) keeps the run short; arbitration logic
// is identical at the default size.
module tb_pe_sram;
  localparam int NM = 3, BW = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NM-1:0] m_req = '0, m_we = '0, m_gnt, m_rvalid;
  logic [NM-1:0][3:0] m_be = '0;
  logic [NM-1:0][14:0] m_addr = '0;
  logic [NM-1:0][31:0] m_wdata = '0, m_rdata;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [4*BW];
  logic [31:0] exp_rd [NM];
  logic        exp_v [NM];
  int wait_cnt [NM];
  int par_cycles = 0;

  pe_sram #(.NBANK(4), .BANK_WORDS(BW), .NM(NM)) dut (.*);

  always #5 clk = ~clk;
  initial begin #5ms; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic logic [14:0] mk_addr(int bank);
    return 15'(bank * BW + ($urandom % 4) * 37);
  endfunction

  // reference update and checks at the clock edge
  always @(posedge clk) if (rst_n) begin
    int nb [4];
    for (int b = 0; b < 4; b++) nb[b] = 0;
    for (int m = 0; m < NM; m++) begin
      if (exp_v[m]) begin
        chk(m_rvalid[m] && m_rdata[m] === exp_rd[m], $sformatf("read data m%0d", m));
      end else chk(!m_rvalid[m], "spurious rvalid");
      exp_v[m] = 1'b0;
    end
    for (int m = 0; m < NM; m++)
      if (m_req[m] && m_gnt[m]) begin
        int a, bk;
        a = int'(m_addr[m]) % (4 * BW);
        bk = int'(m_addr[m]) / BW;
        nb[bk]++;
        if (!m_we[m]) begin exp_rd[m] = ref_mem[a]; exp_v[m] = 1'b1; end
      end
    // writes after reads: no two grants share a bank, so order is irrelevant
    for (int m = 0; m < NM; m++)
      if (m_req[m] && m_gnt[m] && m_we[m])
        for (int by = 0; by < 4; by++)
          if (m_be[m][by]) ref_mem[int'(m_addr[m]) % (4 * BW)][8*by +: 8] = m_wdata[m][8*by +: 8];
    for (int b = 0; b < 4; b++) chk(nb[b] <= 1, "one grant per bank");
    begin
      int ng; ng = 0;
      for (int m = 0; m < NM; m++) if (m_gnt[m]) ng++;
      if (ng > 1) par_cycles++;
    end
    for (int m = 0; m < NM; m++) begin
      if (m_req[m] && !m_gnt[m]) wait_cnt[m]++;
      else wait_cnt[m] = 0;
      chk(wait_cnt[m] < NM, "round-robin wait bound");
    end
  end

  initial begin
    for (int i = 0; i < 4 * BW; i++) ref_mem[i] = '0;
    for (int m = 0; m < NM; m++) begin exp_v[m] = 1'b0; exp_rd[m] = '0; wait_cnt[m] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (4000) begin
      @(negedge clk);
      for (int m = 0; m < NM; m++)
        if (!m_req[m] || m_gnt[m]) begin
          m_req[m]   = ($urandom % 4) != 0;
          m_we[m]    = ($urandom % 2) != 0;
          m_be[m]    = ($urandom % 3 == 0) ? 4'($urandom) : 4'hF;
          m_addr[m]  = mk_addr(($urandom % 3 == 0) ? int'($urandom % 4) : m % 2);
          m_wdata[m] = $urandom;
        end
    end
    @(negedge clk); m_req = '0;
    repeat (3) @(negedge clk);
    chk(par_cycles > 100, $sformatf("parallel bank access seen %0d", par_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
