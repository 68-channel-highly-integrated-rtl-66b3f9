// tb_pe_ctrl: self-checking test of the PE timer, the wake-up/interrupt
// controller and the memory self test (MBIST) on a small PE memory.
//  - timer: compare match after COMPARE+1 cycles, auto-reload period,
//    flag clear;
//  - wake-up: the core sleeps (clock enable low) until an enabled source
//    rises; a disabled source does not wake it; pending bits clear;
//  - MBIST: March C- over a memory range passes on a good memory, takes
//    10*LEN accesses (checked against the cycle count), and reports the
//    failing address when a word is corrupted during the test.
module tb_pe_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  logic [2:0]  we = '0;
  logic [1:0]  addr = '0;
  logic [31:0] wdata = '0, t_rd, w_rd, b_rd;
  logic        t_irq, core_irq, core_clk_en, b_done;
  logic [8:0]  src = '0;
  logic        sleep_req = 1'b0;
  logic [3:0]        m_req, m_we, m_gnt, m_rvalid;
  logic [3:0][3:0]   m_be;
  logic [3:0][14:0]  m_addr;
  logic [3:0][31:0]  m_wdata, m_rdata;

  pe_timer u_tmr (.clk, .rst_n, .reg_we(we[0]), .reg_addr(addr), .reg_wdata(wdata),
                  .reg_rdata(t_rd), .irq(t_irq));
  wakeup_ctrl #(.NSRC(9)) u_wku (.clk, .rst_n, .src({src[8:1], t_irq}), .sleep_req,
                  .reg_we(we[1]), .reg_addr(addr), .reg_wdata(wdata), .reg_rdata(w_rd),
                  .core_irq, .core_clk_en);
  mbist u_bist (.clk, .rst_n, .reg_we(we[2]), .reg_addr(addr), .reg_wdata(wdata),
                .reg_rdata(b_rd), .done(b_done),
                .m_req(m_req[3]), .m_we(m_we[3]), .m_addr(m_addr[3]), .m_wdata(m_wdata[3]),
                .m_gnt(m_gnt[3]), .m_rvalid(m_rvalid[3]), .m_rdata(m_rdata[3]));
  assign m_req[2:0] = '0; assign m_we[2:0] = '0; assign m_addr[2:0] = '0;
  assign m_wdata[2:0] = '0; assign m_be = '1;
  pe_sram #(.NBANK(4), .BANK_WORDS(256), .NM(4)) u_mem (.*);

  initial begin repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic rw(input int unit, input int a, input logic [31:0] d);
    @(negedge clk); we = '0; we[unit] = 1'b1; addr = 2'(a); wdata = d;
    @(negedge clk); we = '0;
  endtask
  function automatic logic [31:0] rr(input int unit);
    return unit == 0 ? t_rd : unit == 1 ? w_rd : b_rd;
  endfunction
  task automatic rd(input int unit, input int a, output logic [31:0] d);
    @(negedge clk); addr = 2'(a); #1 d = rr(unit);
  endtask

  initial begin
    logic [31:0] d;
    int n;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    // ---- timer
    rw(0, 2, 99); rw(0, 1, 0); rw(0, 0, 1);
    n = 0; while (!t_irq && n < 1000) begin @(posedge clk); n++; end
    chk(n >= 99 && n <= 101, $sformatf("timer match after %0d cycles", n));
    rw(0, 3, 1); @(negedge clk); chk(!t_irq, "timer flag cleared");
    rw(0, 0, 3); rw(0, 1, 0);                       // auto reload, period 100
    while (!t_irq) @(posedge clk);
    rw(0, 3, 1);
    n = 0; while (!t_irq && n < 1000) begin @(posedge clk); n++; end
    chk(n >= 96 && n <= 100, $sformatf("reload period %0d", n));
    rw(0, 0, 0); rw(0, 3, 1);
    // ---- wake-up: only source 3 enabled
    rw(1, 1, '1); rw(1, 0, 32'h008);
    @(negedge clk); sleep_req = 1'b1; @(negedge clk); sleep_req = 1'b0;
    chk(!core_clk_en, "core clock gated while asleep");
    src[1] = 1'b1; repeat (5) @(negedge clk);
    chk(!core_clk_en && !core_irq, "disabled source does not wake");
    rd(1, 1, d); chk(d[1] == 1'b1, "disabled source still pending");
    src[3] = 1'b1; @(negedge clk); @(negedge clk);
    chk(core_clk_en && core_irq, "enabled source wakes the core");
    rw(1, 1, '1); src = '0; @(negedge clk);
    chk(!core_irq, "pending cleared");
    // timer as wake source
    rw(1, 0, 32'h001); rw(1, 2, 1);
    chk(!core_clk_en, "sleep by register");
    rw(0, 2, 49); rw(0, 1, 0); rw(0, 0, 1);
    n = 0; while (!core_clk_en && n < 1000) begin @(posedge clk); n++; end
    chk(core_clk_en && n > 40 && n < 60, $sformatf("timer wake after %0d", n));
    rw(0, 0, 0); rw(0, 3, 1); rw(1, 1, '1);
    // ---- MBIST on a good memory: 64 words in bank 1
    rw(2, 1, 256); rw(2, 2, 64); rw(2, 0, 1);
    n = 0; while (!b_done && n < 10000) begin @(posedge clk); n++; end
    rd(2, 3, d);
    chk(b_done && !d[2], "MBIST passes on good memory");
    // 10 accesses per word, reads cost one extra cycle (5 reads per word)
    chk(n >= 10 * 64 && n <= 15 * 64 + 8, $sformatf("MBIST cycles %0d", n));
    // ---- MBIST with a corrupted word (bank 2, offset 17) during element 2
    rw(2, 1, 512); rw(2, 2, 32); rw(2, 0, 1);
    wait (u_bist.elem == 3'd2);
    u_mem.g_bank[2].u_bank.mem[17] = 32'h0000_0100;
    n = 0; while (!b_done && n < 10000) begin @(posedge clk); n++; end
    rd(2, 3, d);
    chk(d[2] && d[30:16] == 15'(512 + 17), $sformatf("MBIST fail flag %0d addr %0d", d[2], d[30:16]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
