// mp_pkg: shared number format, instruction encodings and sizes of the
// multi-precision SIMD accelerator.
//
// Number format.  Every PE works on a sign / exponent / mantissa word with a
// 19-bit exponent for all three precisions (the width IEEE binary256 uses) and
// 112 (MP4), 176 (MP6) or 240 (MP8) stored mantissa bits behind a hidden
// leading one.  The exponent is biased by 2^18-1.  These widths follow the
// paper's format table.  This design's own choices: an exponent field of zero
// encodes the value zero (there are no subnormals), there is no infinity or
// NaN, results round to nearest-even, results too small flush to zero and
// results too large saturate to the largest finite magnitude.
//
// Instructions.  The instruction set is this design's own: the paper gives
// none.  A PE instruction word carries one multiply-unit slot (multiply or
// inverse square root) and one adder-unit slot (add or subtract), so both
// arithmetic units can start an operation every clock.  The control
// processor's instructions wrap a PE instruction or move data between the
// data memory, the broadcast memory and the PE registers.
package mp_pkg;

  // ---- number format ----
  localparam int EW      = 19;                 // exponent bits, all precisions
  localparam int BIAS    = (1 << (EW - 1)) - 1;
  localparam int MW_MP4  = 112;                // stored mantissa bits
  localparam int MW_MP6  = 176;
  localparam int MW_MP8  = 240;
  localparam int CUT     = 4;                  // PE word is 4 bits wider than the host word
  localparam int EW_STD  = EW - CUT;           // host exponent when the exponent is cut (15)

  // Arithmetic-unit latency: every unit returns its result 4 clocks after issue.
  localparam int LAT     = 4;

  // ---- sizes chosen by this design ----
  localparam int NREG    = 64;                 // registers per PE
  localparam int RAW     = $clog2(NREG);
  localparam int BM_DEPTH = 64;                // broadcast-memory words
  localparam int BAW     = $clog2(BM_DEPTH);

  // ---- PE instruction ----
  typedef enum logic [1:0] {M_NOP = 2'd0, M_MUL = 2'd1, M_RSQ = 2'd2} mop_e;
  typedef enum logic [1:0] {A_NOP = 2'd0, A_ADD = 2'd1, A_SUB = 2'd2} aop_e;

  typedef struct packed {
    mop_e           mop;       // multiply-unit slot
    logic [RAW-1:0] m_dst;
    logic [RAW-1:0] m_a;
    logic [RAW-1:0] m_b;
    logic           m_b_bm;    // operand b from the broadcast word instead of m_b
    aop_e           aop;       // adder-unit slot
    logic [RAW-1:0] a_dst;
    logic [RAW-1:0] a_a;
    logic [RAW-1:0] a_b;
    logic           a_b_bm;    // operand b from the broadcast word instead of a_b
    logic [BAW-1:0] bm_addr;   // broadcast-memory word read this cycle
  } pe_instr_t;                // 48 bits

  localparam int PEI_W = $bits(pe_instr_t);

  // ---- control-processor instruction (64 bits) ----
  typedef enum logic [3:0] {
    C_NOP    = 4'd0,   // do nothing for one cycle
    C_PE     = 4'd1,   // issue the PE instruction in the low bits to all PEs
    C_XLOAD  = 4'd2,   // PE i register `reg` <- DM[addr + i], i = 0..NPE-1
    C_BMLOAD = 4'd3,   // BM[bm + k] <- DM[addr (+ loop offset) + k], k = 0..count-1
    C_STORE  = 4'd4,   // DM[addr + i] <- PE i register `reg`, i = 0..NPE-1
    C_LOOP   = 4'd5,   // run the body up to C_ENDL `count` times, offset += stride
    C_ENDL   = 4'd6,   // end of loop body
    C_HALT   = 4'd7    // stop and signal done
  } cop_e;

  typedef struct packed {
    cop_e        op;       // [63:60]
    logic [11:0] rsv;      // [59:48]
    logic [47:0] arg;      // [47:0]
  } cp_instr_t;

  // Argument layout of the data-moving instructions inside cp_instr_t.arg.
  typedef struct packed {
    logic [7:0]     rsv;
    logic [15:0]    dm_addr;   // data-memory start address
    logic [7:0]     count;     // words (C_BMLOAD)
    logic [BAW-1:0] bm_addr;   // broadcast-memory start (C_BMLOAD)
    logic           use_off;   // add the loop offset to dm_addr (C_BMLOAD)
    logic [RAW-1:0] rreg;      // PE register (C_XLOAD, C_STORE)
    logic [2:0]     rsv2;
  } cp_move_t;

  typedef struct packed {
    logic [15:0] count;        // iterations
    logic [15:0] stride;       // data-memory offset step per iteration
    logic [15:0] rsv;
  } cp_loop_t;

endpackage
