// tb_cp_ctrl: the control-processor sequencer driving a 3-PE array, with the
// on-chip instruction memory and the data memory.  The program loads X_i,
// zeroes an accumulator, loops 4 times over Y values placed with a stride of
// 2 words, multiplies and accumulates, then stores the sums and X_i - Y_3.
// Checks: the stored words (exact), that consecutive PE instructions issue one
// per clock, that the number of broadcast-memory writes equals the loop
// count, that done pulses once, and the cycle count of the whole run
// (a regression value).
module tb_cp_ctrl;
  import mp_pkg::*;
  import mp_ref_pkg::word_t;
  import mp_ref_pkg::from_int;
  localparam int NPE = 3;
  localparam int PW  = 2;
  logic clk = 1'b0, rst_n = 1'b0, start = 0, cut_exp = 0, busy, done;
  logic fetch_req, fetch_ready, inst_valid; logic [24:0] fetch_addr; logic [63:0] inst;
  logic dm_en, dm_we; logic [14:0] dm_addr; logic [127:0] dm_wdata, dm_rdata;
  logic pe_issue, bm_we, xw_en, pe_busy; pe_instr_t pe_instr;
  logic [BAW-1:0] bm_wa; word_t bm_wd, xw_data, ro_data;
  logic [PW-1:0] xw_pe, ro_pe; logic [RAW-1:0] xw_reg, ro_reg;
  logic h_we = 0; logic [11:0] h_addr = '0; logic [63:0] h_wdata = '0;
  logic ha_en = 0, ha_we = 0; logic [14:0] ha_addr = '0; logic [127:0] ha_wdata = '0, ha_rdata;
  logic dram_req; logic [23:0] dram_addr;
  int checks = 0, failures = 0;

  cp_ctrl #(.MW(112), .NPE(NPE), .DMAW(15), .PCW(25)) dut (.*);
  cp_inst_mem #(.IW(64), .ONCHIP(4096), .DRAMW(24)) u_im (
    .clk, .rst_n, .h_we, .h_addr, .h_wdata, .fetch_req, .fetch_addr, .ready(fetch_ready),
    .inst_valid, .inst, .dram_req, .dram_addr, .dram_rvalid(1'b0), .dram_rdata(64'h0));
  cp_data_mem #(.HW(128), .DEPTH(32768)) u_dm (
    .clk, .a_en(ha_en), .a_we(ha_we), .a_addr(ha_addr), .a_wdata(ha_wdata), .a_rdata(ha_rdata),
    .b_en(dm_en), .b_we(dm_we), .b_addr(dm_addr), .b_wdata(dm_wdata), .b_rdata(dm_rdata));
  mp_array #(.MW(112), .NPE(NPE)) u_mp (
    .clk, .rst_n, .issue(pe_issue), .instr(pe_instr), .bm_we, .bm_wa, .bm_wd,
    .xw_en, .xw_pe, .xw_reg, .xw_data, .ro_pe, .ro_reg, .ro_data, .busy(pe_busy));

  always #5 clk = ~clk;

  int n_bm = 0, n_done = 0, run_issue = 0, max_run = 0;
  always @(posedge clk) if (rst_n) begin
    if (bm_we) n_bm++;
    if (done) n_done++;
    if (pe_issue) begin run_issue++; if (run_issue > max_run) max_run = run_issue; end
    else run_issue = 0;
  end

  function automatic logic [63:0] ci(cop_e op, logic [47:0] arg);
    return {op, 12'h0, arg};
  endfunction
  function automatic logic [63:0] mvi(cop_e op, int dm, int rg, int bm = 0, int cnt = 0, bit off = 0);
    cp_move_t m;
    m = '0; m.dm_addr = 16'(dm); m.rreg = RAW'(rg); m.bm_addr = BAW'(bm); m.count = 8'(cnt); m.use_off = off;
    return ci(op, m);
  endfunction
  function automatic logic [63:0] pei(mop_e mop, int md, int ma, int mb, bit mbm,
                                      aop_e aop, int ad, int aa, int ab, bit abm);
    pe_instr_t p;
    p = '0; p.mop = mop; p.m_dst = RAW'(md); p.m_a = RAW'(ma); p.m_b = RAW'(mb); p.m_b_bm = mbm;
    p.aop = aop; p.a_dst = RAW'(ad); p.a_a = RAW'(aa); p.a_b = RAW'(ab); p.a_b_bm = abm;
    return ci(C_PE, 48'(p));
  endfunction

  task automatic im(int a, logic [63:0] d);
    @(negedge clk); h_we = 1; h_addr = 12'(a); h_wdata = d; @(negedge clk); h_we = 0;
  endtask
  task automatic dmw(int a, word_t w);
    @(negedge clk); ha_en = 1; ha_we = 1; ha_addr = 15'(a); ha_wdata = w[131:4];
    @(negedge clk); ha_en = 0; ha_we = 0;
  endtask
  task automatic dmr(int a, output logic [127:0] d);
    @(negedge clk); ha_en = 1; ha_addr = 15'(a); @(negedge clk); ha_en = 0; d = ha_rdata;
  endtask

  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int pc; longint cycles; logic [127:0] d; word_t nop;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NPE; i++) begin dmw(i, from_int(10 * (i + 1))); dmw(50 + i, '0); end
    for (int j = 0; j < 4; j++) dmw(20 + 2 * j, from_int(j + 1));      // stride 2
    pc = 0;
    im(pc++, mvi(C_XLOAD, 0, 0));
    im(pc++, mvi(C_XLOAD, 50, 1));
    im(pc++, ci(C_LOOP, {16'd4, 16'd2, 16'd0}));
    im(pc++, mvi(C_BMLOAD, 20, 0, 0, 1, 1));
    im(pc++, pei(M_MUL, 2, 0, 0, 1, A_NOP, 0, 0, 0, 0));
    im(pc++, pei(M_NOP, 0, 0, 0, 0, A_NOP, 0, 0, 0, 0));
    im(pc++, pei(M_NOP, 0, 0, 0, 0, A_NOP, 0, 0, 0, 0));
    im(pc++, pei(M_NOP, 0, 0, 0, 0, A_NOP, 0, 0, 0, 0));
    im(pc++, pei(M_NOP, 0, 0, 0, 0, A_ADD, 1, 1, 2, 0));
    im(pc++, ci(C_ENDL, '0));
    im(pc++, pei(M_NOP, 0, 0, 0, 0, A_SUB, 3, 0, 0, 1));
    im(pc++, {4'hF, 60'h0});                                          // unused code: no-op
    im(pc++, mvi(C_STORE, 100, 1));
    im(pc++, mvi(C_STORE, 200, 3));
    im(pc++, ci(C_HALT, '0));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    for (int i = 0; i < NPE; i++) begin
      dmr(100 + i, d); checks++;
      if (d !== from_int(10 * (i + 1) * 10) >> 4) begin failures++; $display("FAIL sum %0d %h", i, d); end
      dmr(200 + i, d); checks++;
      if (d !== from_int(10 * (i + 1) - 4) >> 4) begin failures++; $display("FAIL sub %0d %h", i, d); end
    end
    checks += 4;
    if (n_bm != 4) begin failures++; $display("FAIL bm writes %0d", n_bm); end
    if (n_done != 1) failures++;
    if (max_run != 5) begin failures++; $display("FAIL PE issue run %0d", max_run); end
    // Regression value for this program: the sequencer's per-instruction
    // costs (one clock per PE/LOOP/ENDL/NOP word, plus the data-moving
    // instructions' word counts and refetch) give 82 clocks from start to done.
    if (cycles != 82) begin failures++; $display("FAIL cycles %0d", cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
