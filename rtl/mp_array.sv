// mp_array: the MP processor, a SIMD array of NPE processing elements and the
// broadcast memory.
//
// Every PE receives the same PE instruction in the same cycle and the same
// broadcast word, read from the broadcast memory at the address the
// instruction carries; each PE works on its own registers, so PE i evaluates
// f(X_i, Y_j) for the X_i held in its registers.  The paper gives this
// organisation and the PE counts per precision (36 for MP4, 19 for MP6, 11
// for MP8); NPE defaults to the MP4 count.
//
// The control processor reaches single PEs through a load port (xw_*: write
// register xw_reg of PE xw_pe) and a read-out port (ro_*: register ro_reg of
// PE ro_pe, combinational).  Selecting a PE by index with one shared port is
// this design's choice.  busy is high while any PE has a result in flight.
module mp_array
  import mp_pkg::*;
#(
  parameter int MW  = MW_MP4,
  parameter int NPE = 36,
  localparam int W  = 1 + EW + MW,
  localparam int PW = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // SIMD instruction stream
  input  logic           issue,
  input  pe_instr_t      instr,
  // broadcast-memory fill
  input  logic           bm_we,
  input  logic [BAW-1:0] bm_wa,
  input  logic [W-1:0]   bm_wd,
  // register load into one PE
  input  logic           xw_en,
  input  logic [PW-1:0]  xw_pe,
  input  logic [RAW-1:0] xw_reg,
  input  logic [W-1:0]   xw_data,
  // register read-out from one PE
  input  logic [PW-1:0]  ro_pe,
  input  logic [RAW-1:0] ro_reg,
  output logic [W-1:0]   ro_data,
  output logic           busy
);

  logic [W-1:0] bcast;

  mp_bm #(.MW(MW), .DEPTH(BM_DEPTH)) u_bm (
    .clk, .we(bm_we), .wa(bm_wa), .wd(bm_wd), .rd_addr(instr.bm_addr), .rd_data(bcast)
  );

  logic [NPE-1:0][W-1:0] pe_ro;
  logic [NPE-1:0]        pe_busy;

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    mp_pe #(.MW(MW)) u_pe (
      .clk, .rst_n, .issue, .instr, .bm_data(bcast),
      .xw_en(xw_en && xw_pe == PW'(i)), .xw_reg, .xw_data,
      .ro_reg, .ro_data(pe_ro[i]), .busy(pe_busy[i])
    );
  end

  assign ro_data = pe_ro[ro_pe];
  assign busy    = |pe_busy;

endmodule
