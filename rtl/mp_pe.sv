// mp_pe: one processing element of the SIMD MP processor.
//
// A PE holds a register file, a multiply unit, an adder unit and an
// inverse-square-root (rsq) seed unit, as the paper describes.  Each clock it
// may start one operation in the multiply slot (multiply or rsq) and one in
// the adder slot (add or subtract) of the PE instruction; every unit takes
// 4 clocks, so the PE completes up to two floating-point operations per
// clock, which is the rate behind the paper's peak figures (e.g. 36 PEs x
// 88 MHz x 2 = 6.3 Gflops for MP4).
//
// Operand b of either slot may come from the broadcast word (bm_data) that
// the broadcast memory drives to every PE in the same cycle; this is how a
// value Y_j reaches all PEs at once.  Register numbers, the instruction
// layout (mp_pkg::pe_instr_t), and the fact that the rsq unit shares the
// multiply slot and its write port are this design's choices.
//
// Timing: an instruction presented with issue = 1 in cycle t reads its
// operands in cycle t and writes its results at the end of cycle t+4; the
// register file forwards them, so a dependent instruction may issue in cycle
// t+4.  There is no interlock: the instruction stream must respect this
// spacing.  busy is high while any result is in flight.  The control
// processor writes registers through xw_* and reads them through ro_*.
module mp_pe
  import mp_pkg::*;
#(
  parameter int MW = MW_MP4,
  localparam int W = 1 + EW + MW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           issue,
  input  pe_instr_t      instr,
  input  logic [W-1:0]   bm_data,
  input  logic           xw_en,
  input  logic [RAW-1:0] xw_reg,
  input  logic [W-1:0]   xw_data,
  input  logic [RAW-1:0] ro_reg,
  output logic [W-1:0]   ro_data,
  output logic           busy
);

  logic [3:0][RAW-1:0] ra;
  logic [3:0][W-1:0]   rd;
  logic [2:0]          we;
  logic [2:0][RAW-1:0] wa;
  logic [2:0][W-1:0]   wd;

  mp_regfile #(.MW(MW), .NR(NREG)) u_rf (
    .clk, .ra, .rd, .ro_addr(ro_reg), .ro_data, .we, .wa, .wd
  );

  assign ra[0] = instr.m_a;
  assign ra[1] = instr.m_b;
  assign ra[2] = instr.a_a;
  assign ra[3] = instr.a_b;

  logic [W-1:0] mul_b, add_b;
  assign mul_b = instr.m_b_bm ? bm_data : rd[1];
  assign add_b = instr.a_b_bm ? bm_data : rd[3];

  logic mul_go, rsq_go, add_go;
  assign mul_go = issue && (instr.mop == M_MUL);
  assign rsq_go = issue && (instr.mop == M_RSQ);
  assign add_go = issue && (instr.aop == A_ADD || instr.aop == A_SUB);

  logic         mul_v, rsq_v, add_v;
  logic [W-1:0] mul_y, rsq_y, add_y;

  mp_fmul #(.MW(MW)) u_mul (
    .clk, .rst_n, .in_valid(mul_go), .a(rd[0]), .b(mul_b),
    .out_valid(mul_v), .y(mul_y)
  );

  mp_rsq #(.MW(MW)) u_rsq (
    .clk, .rst_n, .in_valid(rsq_go), .x(rd[0]),
    .out_valid(rsq_v), .y(rsq_y)
  );

  mp_fadd #(.MW(MW)) u_add (
    .clk, .rst_n, .in_valid(add_go), .sub(instr.aop == A_SUB), .a(rd[2]), .b(add_b),
    .out_valid(add_v), .y(add_y)
  );

  // Destination registers travel alongside the unit pipelines.
  logic [LAT-1:0][RAW-1:0] mdst, adst;
  logic [LAT-1:0]          mvld, avld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mdst <= '0; adst <= '0; mvld <= '0; avld <= '0;
    end else begin
      mdst <= {mdst[LAT-2:0], instr.m_dst};
      adst <= {adst[LAT-2:0], instr.a_dst};
      mvld <= {mvld[LAT-2:0], mul_go | rsq_go};
      avld <= {avld[LAT-2:0], add_go};
    end
  end

  assign we[0] = mvld[LAT-1];
  assign wa[0] = mdst[LAT-1];
  assign wd[0] = rsq_v ? rsq_y : mul_y;
  assign we[1] = avld[LAT-1];
  assign wa[1] = adst[LAT-1];
  assign wd[1] = add_y;
  assign we[2] = xw_en;
  assign wa[2] = xw_reg;
  assign wd[2] = xw_data;

  assign busy = |mvld || |avld;

  // The units and the destination pipelines must stay in step.
  a_mul_aligned: assert property (@(posedge clk) disable iff (!rst_n) mvld[LAT-1] == (mul_v | rsq_v));
  a_add_aligned: assert property (@(posedge clk) disable iff (!rst_n) avld[LAT-1] == add_v);

endmodule
