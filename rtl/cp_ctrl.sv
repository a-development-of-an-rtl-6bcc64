// cp_ctrl: control unit of the control processor (CP).
//
// The paper's CP sends data and instructions from the host to the MP
// processor and returns results; for an interaction-type sum
// f_i = sum_j f(X_i, Y_j) it sets X_i in the registers of PE i, then sends
// each Y_j to all PEs together with the instructions that evaluate f and
// accumulate.  This sequencer does that by executing a program of 64-bit CP
// instructions (mp_pkg::cp_instr_t, an encoding of this design's own):
//   C_PE      pass a PE instruction to all PEs (one per clock from on-chip
//             instruction memory)
//   C_XLOAD   PE i register r <- DM[addr + i] for every PE (host -> PE format)
//   C_BMLOAD  broadcast memory [bm + k] <- DM[addr (+ loop offset) + k]
//   C_STORE   DM[addr + i] <- PE i register r for every PE (PE -> host format,
//             cutting 4 bits from the mantissa or the exponent per cut_exp)
//   C_LOOP / C_ENDL  one level of hardware loop; the loop offset grows by the
//             stride each pass so C_BMLOAD walks through the Y_j in memory
//   C_NOP, C_HALT
// Before C_XLOAD and C_STORE the sequencer waits until no PE result is in
// flight (drain).  PE instructions are not checked for data hazards: a
// program must place a dependent instruction 4 or more cycles after its
// producer, as the units have a 4-clock latency.
// Interfaces: start begins execution at instruction address 0; done pulses
// for one cycle at C_HALT; busy is high in between.  The fetch, data-memory
// and PE-array ports follow cp_inst_mem, cp_data_mem and mp_array.
module cp_ctrl
  import mp_pkg::*;
#(
  parameter int MW    = MW_MP4,
  parameter int NPE   = 36,
  parameter int DMAW  = 15,                  // 32k-word data memory
  parameter int PCW   = 25,                  // 4k on-chip + 16M DRAM words
  localparam int W    = 1 + EW + MW,
  localparam int HW   = W - CUT,
  localparam int PW   = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            cut_exp,
  output logic            busy,
  output logic            done,
  // instruction fetch
  output logic            fetch_req,
  output logic [PCW-1:0]  fetch_addr,
  input  logic            fetch_ready,
  input  logic            inst_valid,
  input  logic [63:0]     inst,
  // data memory
  output logic            dm_en,
  output logic            dm_we,
  output logic [DMAW-1:0] dm_addr,
  output logic [HW-1:0]   dm_wdata,
  input  logic [HW-1:0]   dm_rdata,
  // MP processor
  output logic            pe_issue,
  output pe_instr_t       pe_instr,
  output logic            bm_we,
  output logic [BAW-1:0]  bm_wa,
  output logic [W-1:0]    bm_wd,
  output logic            xw_en,
  output logic [PW-1:0]   xw_pe,
  output logic [RAW-1:0]  xw_reg,
  output logic [W-1:0]    xw_data,
  output logic [PW-1:0]   ro_pe,
  output logic [RAW-1:0]  ro_reg,
  input  logic [W-1:0]    ro_data,
  input  logic            pe_busy
);

  typedef enum logic [2:0] {
    S_IDLE, S_FETCH, S_WAIT, S_DRAIN, S_XLOAD, S_BMLOAD, S_STORE
  } state_e;

  state_e          state;
  logic [PCW-1:0]  pc, loop_start;
  logic [15:0]     loop_cnt, loop_off, loop_stride;
  cop_e            cur_op;
  cp_move_t        mv;
  logic [8:0]      cnt;                      // words requested / written
  logic [8:0]      total;
  logic            rv;                       // data-memory read returning
  logic [8:0]      ridx;

  cp_instr_t ci;
  cp_move_t  ci_mv;
  cp_loop_t  ci_lp;
  assign ci    = cp_instr_t'(inst);
  assign ci_mv = cp_move_t'(ci.arg);
  assign ci_lp = cp_loop_t'(ci.arg);

  // format conversion between host words in DM and PE words
  logic [W-1:0]  from_dm;
  logic [HW-1:0] to_dm;
  mp_fmt_conv #(.MW(MW)) u_conv (
    .cut_exp, .pe_in(ro_data), .host_out(to_dm), .host_in(dm_rdata), .pe_out(from_dm)
  );

  // ---- next instruction address of a one-cycle instruction in S_WAIT ----
  logic           wait_next;                 // the arriving instruction completes now
  logic [PCW-1:0] next_pc;
  always_comb begin
    wait_next = 1'b0;
    next_pc   = pc + PCW'(1);
    if (state == S_WAIT && inst_valid) begin
      unique case (ci.op)
        C_NOP, C_PE, C_LOOP: wait_next = 1'b1;
        C_ENDL: begin
          wait_next = 1'b1;
          if (loop_cnt != 0) next_pc = loop_start;
        end
        C_XLOAD, C_STORE, C_BMLOAD, C_HALT: wait_next = 1'b0;
        default: wait_next = 1'b1;           // unused codes act as C_NOP
      endcase
    end
  end

  // ---- outputs ----
  always_comb begin
    fetch_req  = 1'b0;
    fetch_addr = pc;
    if (state == S_FETCH) begin
      fetch_req  = fetch_ready;
      fetch_addr = pc;
    end else if (wait_next) begin
      fetch_req  = fetch_ready;
      fetch_addr = next_pc;
    end

    pe_issue = (state == S_WAIT) && inst_valid && (ci.op == C_PE);
    pe_instr = pe_instr_t'(ci.arg);

    dm_en    = 1'b0;
    dm_we    = 1'b0;
    dm_addr  = mv.dm_addr[DMAW-1:0] + DMAW'(cnt);
    dm_wdata = to_dm;
    if ((state == S_XLOAD || state == S_BMLOAD) && cnt < total) dm_en = 1'b1;
    if (state == S_BMLOAD && mv.use_off) dm_addr = dm_addr + DMAW'(loop_off);
    if (state == S_STORE && cnt < total) begin
      dm_en = 1'b1;
      dm_we = 1'b1;
    end

    ro_pe   = PW'(cnt);
    ro_reg  = mv.rreg;

    xw_en   = (state == S_XLOAD) && rv;
    xw_pe   = PW'(ridx);
    xw_reg  = mv.rreg;
    xw_data = from_dm;

    bm_we   = (state == S_BMLOAD) && rv;
    bm_wa   = mv.bm_addr + BAW'(ridx);
    bm_wd   = from_dm;

    busy    = (state != S_IDLE);
  end

  // ---- sequencer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pc          <= '0;
      loop_start  <= '0;
      loop_cnt    <= '0;
      loop_off    <= '0;
      loop_stride <= '0;
      cur_op      <= C_NOP;
      mv          <= '0;
      cnt         <= '0;
      total       <= '0;
      rv          <= 1'b0;
      ridx        <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      rv   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pc    <= '0;
          state <= S_FETCH;
        end
        S_FETCH: if (fetch_ready) state <= S_WAIT;
        S_WAIT: if (inst_valid) begin
          if (wait_next) begin
            pc <= next_pc;
            if (!fetch_ready) state <= S_FETCH;
          end
          unique case (ci.op)
            C_LOOP: begin
              loop_start  <= pc + PCW'(1);
              loop_cnt    <= (ci_lp.count == 0) ? 16'd0 : ci_lp.count - 16'd1;
              loop_off    <= '0;
              loop_stride <= ci_lp.stride;
            end
            C_ENDL: if (loop_cnt != 0) begin
              loop_cnt <= loop_cnt - 16'd1;
              loop_off <= loop_off + loop_stride;
            end
            C_XLOAD, C_STORE: begin
              cur_op <= ci.op;
              mv     <= ci_mv;
              cnt    <= '0;
              total  <= 9'(NPE);
              state  <= S_DRAIN;
            end
            C_BMLOAD: begin
              cur_op <= ci.op;
              mv     <= ci_mv;
              cnt    <= '0;
              total  <= {1'b0, ci_mv.count};
              state  <= S_BMLOAD;
            end
            C_HALT: begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
            default: ;
          endcase
        end
        S_DRAIN: if (!pe_busy) state <= (cur_op == C_XLOAD) ? S_XLOAD : S_STORE;
        S_XLOAD, S_BMLOAD: begin
          if (cnt < total) begin
            cnt  <= cnt + 9'd1;
            rv   <= 1'b1;
            ridx <= cnt;
          end else if (!rv) begin
            pc    <= pc + PCW'(1);
            state <= S_FETCH;
          end
        end
        S_STORE: begin
          if (cnt < total) cnt <= cnt + 9'd1;
          else begin
            pc    <= pc + PCW'(1);
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A fetch is only requested when the instruction memory can take it, and
  // PE instructions are only issued while the array is not being loaded.
  a_fetch_ready: assert property (@(posedge clk) disable iff (!rst_n) fetch_req |-> fetch_ready);
  a_no_issue_in_load: assert property (@(posedge clk) disable iff (!rst_n) xw_en |-> !pe_busy);

endmodule
