// tb_g9mpx_chip: end-to-end test of the accelerator chip at its default
// (MP4, 36 PEs, 32k-word data memory, 4k on-chip instruction words) size.
//
// The host side of this bench writes X_i = i+1 for every PE and Y_j = j+2
// (j = 0..5) into the data memory, loads a CP program and starts it.  The
// program runs the interaction-type sum f_i = sum_j X_i * Y_j with a hardware
// loop that copies one Y_j per pass into the broadcast memory, then issues a
// dual-slot instruction (rsq of X_i in the multiply slot, X_i - Y_5 in the
// adder slot) and stores three result vectors.  The on-chip instruction
// memory is padded with NOPs so that the program runs on into the
// DRAM-resident part, where the final stores and HALT sit (a behavioural
// DRAM model with a 3-cycle read latency answers the fetch port).  The run is
// repeated with the other format-cut mode.  Results are compared with values
// computed here: the exact sum (i+1)*27, the exact difference, and
// 1/sqrt(i+1) to 2^-30 relative.  Counters confirm that each mechanism
// occurred: register bypass, dual issue, rsq, drain stall, loop passes,
// DRAM fetches and both cut modes.
module tb_g9mpx_chip;
  import mp_pkg::*;
  import mp_ref_pkg::word_t;
  import mp_ref_pkg::from_int;
  import mp_ref_pkg::to_real;

  localparam int NPE = 36;
  localparam int NJ  = 6;
  localparam int HWD = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  logic h_dm_en = 0, h_dm_we = 0, h_im_we = 0, h_start = 0, h_cut_exp = 0;
  logic [14:0] h_dm_addr = '0;
  logic [HWD-1:0] h_dm_wdata = '0, h_dm_rdata;
  logic [11:0] h_im_addr = '0;
  logic [63:0] h_im_wdata = '0;
  logic busy, done;
  logic dram_req, dram_rvalid = 1'b0;
  logic [23:0] dram_addr;
  logic [63:0] dram_rdata = '0;

  g9mpx_chip dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- behavioural DRAM (instruction words) ----------------
  logic [63:0] dram [16];
  int dram_fetches = 0;
  initial begin
    forever begin
      @(posedge clk);
      if (dram_req) begin
        logic [23:0] a;
        a = dram_addr;
        dram_fetches++;
        repeat (2) @(posedge clk);
        @(negedge clk);
        dram_rdata  = dram[a[3:0]];
        dram_rvalid = 1'b1;
        @(negedge clk);
        dram_rvalid = 1'b0;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_bypass = 0, n_dual = 0, n_rsq = 0, n_drain = 0, n_loop = 0;
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < 4; r++)
      for (int p = 0; p < 2; p++)
        if (dut.u_mp.g_pe[0].u_pe.u_rf.we[p] && dut.u_mp.g_pe[0].u_pe.u_rf.wa[p] == dut.u_mp.g_pe[0].u_pe.u_rf.ra[r]
            && dut.pe_issue && ((r < 2 && dut.pe_instr.mop != M_NOP) || (r >= 2 && dut.pe_instr.aop != A_NOP)))
          n_bypass++;
    if (dut.pe_issue && dut.pe_instr.mop != M_NOP && dut.pe_instr.aop != A_NOP) n_dual++;
    if (dut.pe_issue && dut.pe_instr.mop == M_RSQ) n_rsq++;
    if (dut.u_ctrl.state == 3'd3 && dut.pe_busy) n_drain++;   // S_DRAIN
    if (dut.bm_we) n_loop++;
  end

  // ---------------- instruction encoders ----------------
  function automatic logic [63:0] ci(cop_e op, logic [47:0] arg);
    cp_instr_t c;
    c.op = op; c.rsv = '0; c.arg = arg;
    return c;
  endfunction
  function automatic logic [63:0] mvi(cop_e op, int dm, int rg, int bm = 0, int cnt = 0, bit off = 0);
    cp_move_t m;
    m = '0;
    m.dm_addr = 16'(dm); m.rreg = RAW'(rg); m.bm_addr = BAW'(bm); m.count = 8'(cnt); m.use_off = off;
    return ci(op, m);
  endfunction
  function automatic logic [63:0] lpi(int n, int stride);
    cp_loop_t l;
    l = '0; l.count = 16'(n); l.stride = 16'(stride);
    return ci(C_LOOP, l);
  endfunction
  function automatic logic [63:0] pei(mop_e mop, int md, int ma, int mb, bit mbm,
                                      aop_e aop, int ad, int aa, int ab, bit abm, int bm);
    pe_instr_t p;
    p.mop = mop; p.m_dst = RAW'(md); p.m_a = RAW'(ma); p.m_b = RAW'(mb); p.m_b_bm = mbm;
    p.aop = aop; p.a_dst = RAW'(ad); p.a_a = RAW'(aa); p.a_b = RAW'(ab); p.a_b_bm = abm;
    p.bm_addr = BAW'(bm);
    return ci(C_PE, 48'(p));
  endfunction
  function automatic logic [63:0] nopi();
    return pei(M_NOP, 0, 0, 0, 0, A_NOP, 0, 0, 0, 0, 0);
  endfunction

  // PE word -> host word in the selected cut mode
  function automatic logic [HWD-1:0] to_host(word_t w, bit cut_exp);
    int e;
    if (!cut_exp) return w[131:4];
    if (w[130:112] == '0) return {w[131], 127'b0};
    e = int'(w[130:112]) - mp_ref_pkg::BIAS + 16383;
    return {w[131], 15'(e), w[111:0]};
  endfunction

  // ---------------- host tasks ----------------
  task automatic dm_write(int a, logic [HWD-1:0] d);
    @(negedge clk);
    h_dm_en = 1; h_dm_we = 1; h_dm_addr = 15'(a); h_dm_wdata = d;
    @(negedge clk);
    h_dm_en = 0; h_dm_we = 0;
  endtask
  task automatic dm_read(int a, output logic [HWD-1:0] d);
    @(negedge clk);
    h_dm_en = 1; h_dm_we = 0; h_dm_addr = 15'(a);
    @(negedge clk);
    h_dm_en = 0;
    d = h_dm_rdata;
  endtask
  task automatic im_write(int a, logic [63:0] d);
    @(negedge clk);
    h_im_we = 1; h_im_addr = 12'(a); h_im_wdata = d;
    @(negedge clk);
    h_im_we = 0;
  endtask

  task automatic run_once(bit cut_exp, output longint cycles);
    logic [HWD-1:0] d;
    real xr, yr, err;
    h_cut_exp = cut_exp;
    for (int i = 0; i < NPE; i++) dm_write(i, to_host(from_int(i + 1), cut_exp));
    for (int i = 0; i < NPE; i++) dm_write(300 + i, '0);
    for (int j = 0; j < NJ; j++)  dm_write(100 + j, to_host(from_int(j + 2), cut_exp));
    @(negedge clk); h_start = 1; @(negedge clk); h_start = 0;
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
    for (int i = 0; i < NPE; i++) begin
      dm_read(1000 + i, d);
      checks++;
      if (d !== to_host(from_int(longint'(i + 1) * 27), cut_exp)) begin
        failures++; $display("FAIL sum pe%0d got %h", i, d);
      end
      dm_read(1200 + i, d);
      checks++;
      if (d !== to_host(from_int(longint'(i + 1) - NJ - 1), cut_exp)) begin
        failures++; $display("FAIL sub pe%0d got %h", i, d);
      end
      dm_read(1100 + i, d);
      // host word -> value (mode-dependent exponent field)
      if (!cut_exp) yr = to_real({d, 4'b0});
      else          yr = to_real({d[127], 19'(int'(d[126:112]) - 16383 + mp_ref_pkg::BIAS), d[111:0]});
      xr  = real'(i + 1);
      err = yr * $sqrt(xr) - 1.0;
      if (err < 0) err = -err;
      checks++;
      if (err > 2.0 ** -30) begin failures++; $display("FAIL rsq pe%0d got %h", i, d); end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pc;
    longint cyc0, cyc1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // ---- program ----
    pc = 0;
    im_write(pc++, mvi(C_XLOAD, 0, 0));                    // r0 <- X_i
    im_write(pc++, mvi(C_XLOAD, 300, 1));                  // r1 <- 0
    im_write(pc++, lpi(NJ, 1));
    im_write(pc++, mvi(C_BMLOAD, 100, 0, 0, 1, 1));        // BM[0] <- Y_j
    im_write(pc++, pei(M_MUL, 2, 0, 0, 1, A_NOP, 0, 0, 0, 0, 0));   // r2 = r0 * Y_j
    im_write(pc++, nopi());
    im_write(pc++, nopi());
    im_write(pc++, nopi());
    im_write(pc++, pei(M_NOP, 0, 0, 0, 0, A_ADD, 1, 1, 2, 0, 0));   // r1 += r2 (bypass)
    im_write(pc++, ci(C_ENDL, '0));
    im_write(pc++, pei(M_RSQ, 3, 0, 0, 0, A_SUB, 4, 0, 0, 1, 0));   // r3 = rsq(r0), r4 = r0 - Y_5
    im_write(pc++, mvi(C_STORE, 1000, 1));
    while (pc < 4096) im_write(pc++, ci(C_NOP, '0));
    dram[0] = mvi(C_STORE, 1100, 3);
    dram[1] = mvi(C_STORE, 1200, 4);
    dram[2] = ci(C_HALT, '0);
    run_once(1'b0, cyc0);
    run_once(1'b1, cyc1);
    // Both runs take the same number of cycles; each loop pass costs
    // BMLOAD (3) + 5 PE words + ENDL, so the run is a fixed, known length.
    checks++;
    if (cyc0 != cyc1) begin failures++; $display("FAIL cycle counts %0d %0d", cyc0, cyc1); end
    $display("cycles per run %0d; bypass=%0d dual=%0d rsq=%0d drain=%0d bm_writes=%0d dram=%0d",
             cyc0, n_bypass, n_dual, n_rsq, n_drain, n_loop, dram_fetches);
    checks += 6;
    if (n_bypass == 0) begin failures++; $display("FAIL no bypass"); end
    if (n_dual == 0)   begin failures++; $display("FAIL no dual issue"); end
    if (n_rsq == 0)    begin failures++; $display("FAIL no rsq"); end
    if (n_drain == 0)  begin failures++; $display("FAIL no drain stall"); end
    if (n_loop != 2 * NJ) begin failures++; $display("FAIL loop passes %0d", n_loop); end
    if (dram_fetches != 6) begin failures++; $display("FAIL dram fetches %0d", dram_fetches); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
