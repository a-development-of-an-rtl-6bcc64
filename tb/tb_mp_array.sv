// tb_mp_array: a 5-PE array.  Each PE gets its own X_i, the broadcast memory
// is filled with several Y words, and SIMD instructions multiply X_i by a
// broadcast Y and add X_i to it in the same instruction.  Every PE's results
// are read out through the shared read-out port and compared with the
// reference; busy must rise with the issue and fall after the latency.
module tb_mp_array;
  import mp_pkg::*;
  import mp_ref_pkg::*;
  localparam int NPE = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic issue = 0; pe_instr_t instr = '0;
  logic bm_we = 0; logic [BAW-1:0] bm_wa = '0; word_t bm_wd = '0;
  logic xw_en = 0; logic [2:0] xw_pe = '0, ro_pe = '0; logic [RAW-1:0] xw_reg = '0, ro_reg = '0;
  word_t xw_data = '0, ro_data;
  logic busy;
  int checks = 0, failures = 0;
  word_t x [NPE], y [8];

  mp_array #(.MW(MW), .NPE(NPE)) dut (.*);
  always #5 clk = ~clk;

  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    pe_instr_t p;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NPE; i++) begin
      x[i] = rand_word(50);
      @(negedge clk); xw_en = 1; xw_pe = 3'(i); xw_reg = 6'd0; xw_data = x[i];
    end
    @(negedge clk); xw_en = 0;
    for (int k = 0; k < 8; k++) begin
      y[k] = rand_word(50);
      @(negedge clk); bm_we = 1; bm_wa = BAW'(k); bm_wd = y[k];
    end
    @(negedge clk); bm_we = 0;
    for (int k = 0; k < 8; k++) begin
      p = '0; p.mop = M_MUL; p.m_dst = 6'(1 + 2 * k); p.m_a = 0; p.m_b_bm = 1;
      p.aop = A_ADD; p.a_dst = 6'(2 + 2 * k); p.a_a = 0; p.a_b_bm = 1; p.bm_addr = BAW'(k);
      @(negedge clk); issue = 1; instr = p;
    end
    @(negedge clk); issue = 0; instr = '0;
    checks++; if (!busy) failures++;
    repeat (5) @(negedge clk);
    checks++; if (busy) failures++;
    for (int i = 0; i < NPE; i++)
      for (int k = 0; k < 8; k++) begin
        @(negedge clk); ro_pe = 3'(i); ro_reg = 6'(1 + 2 * k); #1;
        checks++; if (ro_data !== ref_mul(x[i], y[k])) failures++;
        ro_reg = 6'(2 + 2 * k); #1;
        checks++; if (ro_data !== ref_add(x[i], y[k], 1'b0)) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
