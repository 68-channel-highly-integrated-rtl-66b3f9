// tb_mac_unit: self-checking test of the MAC accelerator working through
// the banked PE memory. The testbench acts as the processor on crossbar
// port 0: it writes a random FE matrix A (F x L, 16-bit signed) and random
// 9-bit signed sample vectors B (S x L) into SRAM, programs the MAC
// registers, starts it, and while it runs keeps issuing random reads to
// the same bank to create stalls. After the interrupt it reads C back and
// compares every element with a reference product computed here. Runs
// with reload=1 (FE matrix fetched and cached) and reload=0 (cached matrix
// reused with new samples), and checks the throughput: with no
// contention one sample is consumed per cycle.
module tb_mac_unit;
  localparam int NM = 3, BW = 2048;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NM-1:0] m_req, m_we, m_gnt, m_rvalid;
  logic [NM-1:0][3:0] m_be;
  logic [NM-1:0][14:0] m_addr;
  logic [NM-1:0][31:0] m_wdata, m_rdata;
  logic        reg_we = 1'b0;
  logic [2:0]  reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic        irq;
  // processor-side port (master 0) driven by the testbench
  logic        p_req = 1'b0, p_we = 1'b0;
  logic [14:0] p_addr = '0;
  logic [31:0] p_wdata = '0;
  int checks = 0, failures = 0;
  int A [8][64];
  int B [8][64];
  bit contend = 1'b0;

  assign m_req[0] = p_req;  assign m_we[0] = p_we;  assign m_be[0] = 4'hF;
  assign m_addr[0] = p_addr; assign m_wdata[0] = p_wdata;
  assign m_req[2] = 1'b0;   assign m_we[2] = 1'b0;  assign m_be[2] = 4'h0;
  assign m_addr[2] = '0;    assign m_wdata[2] = '0;
  assign m_be[1] = 4'hF;

  pe_sram #(.NBANK(4), .BANK_WORDS(BW), .NM(NM)) u_mem (.*);
  mac_unit #(.NCELL(8), .LMAX(64)) dut (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .irq,
    .m_req(m_req[1]), .m_we(m_we[1]), .m_addr(m_addr[1]), .m_wdata(m_wdata[1]),
    .m_gnt(m_gnt[1]), .m_rvalid(m_rvalid[1]), .m_rdata(m_rdata[1]));

  always #5 clk = ~clk;
  initial begin #20ms; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); p_req = 1'b1; p_we = 1'b1; p_addr = 15'(a); p_wdata = d;
    do @(posedge clk); while (!m_gnt[0]);
    @(negedge clk); p_req = 1'b0; p_we = 1'b0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk); p_req = 1'b1; p_we = 1'b0; p_addr = 15'(a);
    do @(posedge clk); while (!m_gnt[0]);
    @(negedge clk); p_req = 1'b0;
    d = m_rdata[0];
  endtask
  task automatic reg_w(input int a, input int d);
    @(negedge clk); reg_we = 1'b1; reg_addr = 3'(a); reg_wdata = d;
    @(negedge clk); reg_we = 1'b0;
  endtask

  // random contention on the sample bank while the MAC runs
  always @(negedge clk) if (contend && !p_req) begin
    if ($urandom % 2 == 0) begin p_req <= 1'b1; p_we <= 1'b0; p_addr <= 15'(BW + ($urandom % 64)); end
  end else if (contend && p_req) p_req <= 1'b0;

  task automatic run(input int F, input int L, input int S, input bit reload, input bit cont,
                     input int abase, input int bbase, input int cbase);
    int cyc;
    logic [31:0] d;
    if (reload)
      for (int f = 0; f < F; f++) for (int l = 0; l < L; l++) begin
        A[f][l] = int'($urandom % 65536) - 32768;
        wr(abase + f * L + l, 32'(A[f][l]));
      end
    for (int s = 0; s < S; s++) for (int l = 0; l < L; l++) begin
      B[s][l] = int'($urandom % 512) - 256;
      wr(bbase + s * L + l, 32'(B[s][l]));
    end
    reg_w(2, F); reg_w(3, L); reg_w(4, S); reg_w(5, abase); reg_w(6, bbase); reg_w(7, cbase);
    reg_w(0, reload ? 3 : 1);
    contend = cont;
    cyc = 0;
    while (!irq && cyc < 100000) begin @(posedge clk); cyc++; end
    contend = 1'b0;
    @(negedge clk); p_req = 1'b0;
    chk(irq, "irq raised");
    if (!cont) chk(cyc <= (reload ? F * L + 3 : 0) + S * (L + F + 4) + 4,
                   $sformatf("cycle budget %0d", cyc));
    for (int s = 0; s < S; s++) for (int f = 0; f < F; f++) begin
      longint exp;
      exp = 0;
      for (int l = 0; l < L; l++) exp += longint'(A[f][l]) * longint'(B[s][l]);
      rd(cbase + s * F + f, d);
      chk(d === 32'(exp), $sformatf("C[%0d][%0d] got %0d exp %0d", s, f, $signed(d), exp));
    end
    reg_w(1, 2);
    @(negedge clk);
    chk(!irq, "irq cleared");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(8, 64, 3, 1'b1, 1'b0, 0, BW, 3 * BW);
    run(8, 64, 4, 1'b0, 1'b1, 0, BW, 3 * BW);
    for (int t = 0; t < 6; t++) begin
      int F, L;
      F = 1 + int'($urandom % 8); L = 4 + int'($urandom % 61);
      run(F, L, 1 + int'($urandom % 5), 1'b1, t % 2 == 1, 0, BW, 3 * BW);
      run(F, L, 2, 1'b0, t % 2 == 0, 0, BW + 400, 3 * BW + 100);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
