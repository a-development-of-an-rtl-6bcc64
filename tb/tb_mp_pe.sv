// tb_mp_pe: one processing element.  Loads registers through the load port,
// then issues multiply, add, subtract and rsq instructions, with operands from
// registers and from the broadcast word, including a multiply and an add in
// the same instruction.  Results are read back and compared with the exact
// reference; the write must land exactly 4 cycles after issue, busy must
// cover the flight, and a dependent add issued 4 cycles after its producer
// must see the new value through the bypass.
module tb_mp_pe;
  import mp_pkg::*;
  import mp_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic issue = 1'b0;
  pe_instr_t instr = '0;
  word_t bm_data = '0, xw_data = '0, ro_data;
  logic xw_en = 1'b0; logic [RAW-1:0] xw_reg = '0, ro_reg = '0;
  logic busy;
  int checks = 0, failures = 0;
  word_t r [8];

  mp_pe #(.MW(MW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(int rg, word_t e, string what);
    @(negedge clk); ro_reg = RAW'(rg); #1;
    checks++;
    if (ro_data !== e) begin failures++; $display("FAIL %s: %h vs %h", what, ro_data, e); end
  endtask

  task automatic go(pe_instr_t p);
    @(negedge clk); instr = p; issue = 1;
    @(negedge clk); issue = 0; instr = '0;
  endtask

  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    pe_instr_t p;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < 8; i++) begin
        r[i] = rand_word(100);
        @(negedge clk); xw_en = 1; xw_reg = RAW'(i); xw_data = r[i];
      end
      @(negedge clk); xw_en = 0;
      bm_data = rand_word(100);
      // dual issue: r10 = r0 * r1, r11 = r2 + r3
      p = '0; p.mop = M_MUL; p.m_dst = 10; p.m_a = 0; p.m_b = 1;
      p.aop = A_ADD; p.a_dst = 11; p.a_a = 2; p.a_b = 3;
      go(p);
      // r12 = rsq(r4), r13 = r5 - bcast
      p = '0; p.mop = M_RSQ; p.m_dst = 12; p.m_a = 4;
      p.aop = A_SUB; p.a_dst = 13; p.a_a = 5; p.a_b_bm = 1;
      go(p);
      // r14 = r6 * bcast
      p = '0; p.mop = M_MUL; p.m_dst = 14; p.m_a = 6; p.m_b_bm = 1;
      go(p);
      checks++; if (!busy) failures++;
      repeat (5) @(negedge clk);
      checks++; if (busy) failures++;
      chk(10, ref_mul(r[0], r[1]), "mul");
      chk(11, ref_add(r[2], r[3], 1'b0), "add");
      chk(13, ref_add(r[5], bm_data, 1'b1), "sub bcast");
      chk(14, ref_mul(r[6], bm_data), "mul bcast");
      begin
        real e;
        e = to_real(r[4]); if (e < 0) e = -e;
        @(negedge clk); ro_reg = 12; #1;
        e = to_real(ro_data) * $sqrt(e) - 1.0; if (e < 0) e = -e;
        checks++; if (e > 2.0 ** -30) failures++;
      end
    end
    // timing and bypass: r20 = r0 * r1 issued in cycle t, r21 = r20 + r2 in t+4
    p = '0; p.mop = M_MUL; p.m_dst = 20; p.m_a = 0; p.m_b = 1;
    @(negedge clk); instr = p; issue = 1; ro_reg = 20;
    @(negedge clk); issue = 0; instr = '0;
    repeat (2) @(negedge clk);
    p = '0; p.aop = A_ADD; p.a_dst = 21; p.a_a = 20; p.a_b = 2;
    @(negedge clk); instr = p; issue = 1; #1;
    checks++; if (ro_data === ref_mul(r[0], r[1])) failures++;   // not yet written in t+4
    @(negedge clk); issue = 0; instr = '0; #1;
    checks++; if (ro_data !== ref_mul(r[0], r[1])) failures++;   // written at end of t+4
    repeat (5) @(negedge clk);
    chk(21, ref_add(ref_mul(r[0], r[1]), r[2], 1'b0), "bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
