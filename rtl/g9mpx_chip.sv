// g9mpx_chip: one multi-precision accelerator processor, as placed on each
// FPGA board of the cluster: the control processor (CP) and the SIMD MP
// processor.
//
// CP = host link port + 32k-word data memory + instruction memory (4k words
// on-chip, 16M words in board DRAM) + control unit.  MP processor = NPE
// processing elements, each with multiply, add and rsq units and registers,
// fed by a broadcast memory.  The host writes X_i, Y_j and a CP program,
// pulses h_start, waits for done and reads the results back from the data
// memory.  Data in the data memory is in the host's standard width (4 bits
// narrower than the PE word); h_cut_exp chooses whether the 4 bits are cut
// from the mantissa or the exponent.
//
// Defaults follow the paper's MP4 configuration: MW = 112 mantissa bits and
// 36 PEs (the paper's MP6/MP8 builds use MW = 176 / 240 with 19 / 11 PEs).
// The PCIe link and the DRAM controller are vendor parts outside this
// design; their places are taken by the plain h_* host port and the dram_*
// fetch port.
module g9mpx_chip
  import mp_pkg::*;
#(
  parameter int MW        = MW_MP4,
  parameter int NPE       = 36,
  parameter int DM_DEPTH  = 32768,
  parameter int IM_ONCHIP = 4096,
  localparam int W        = 1 + EW + MW,
  localparam int HW       = W - CUT,
  localparam int DMAW     = $clog2(DM_DEPTH),
  localparam int IMAW     = $clog2(IM_ONCHIP),
  localparam int PW       = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // host link
  input  logic            h_dm_en,
  input  logic            h_dm_we,
  input  logic [DMAW-1:0] h_dm_addr,
  input  logic [HW-1:0]   h_dm_wdata,
  output logic [HW-1:0]   h_dm_rdata,
  input  logic            h_im_we,
  input  logic [IMAW-1:0] h_im_addr,
  input  logic [63:0]     h_im_wdata,
  input  logic            h_start,
  input  logic            h_cut_exp,
  output logic            busy,
  output logic            done,
  // DRAM controller (instruction words beyond the on-chip part)
  output logic            dram_req,
  output logic [23:0]     dram_addr,
  input  logic            dram_rvalid,
  input  logic [63:0]     dram_rdata
);

  logic            fetch_req, fetch_ready, inst_valid;
  logic [24:0]     fetch_addr;
  logic [63:0]     inst;
  logic            dm_en, dm_we;
  logic [DMAW-1:0] dm_addr;
  logic [HW-1:0]   dm_wdata, dm_rdata;
  logic            pe_issue, bm_we, xw_en, pe_busy;
  pe_instr_t       pe_instr;
  logic [BAW-1:0]  bm_wa;
  logic [W-1:0]    bm_wd, xw_data, ro_data;
  logic [PW-1:0]   xw_pe, ro_pe;
  logic [RAW-1:0]  xw_reg, ro_reg;

  cp_inst_mem #(.IW(64), .ONCHIP(IM_ONCHIP), .DRAMW(24)) u_im (
    .clk, .rst_n,
    .h_we(h_im_we), .h_addr(h_im_addr), .h_wdata(h_im_wdata),
    .fetch_req, .fetch_addr, .ready(fetch_ready), .inst_valid, .inst,
    .dram_req, .dram_addr, .dram_rvalid, .dram_rdata
  );

  cp_data_mem #(.HW(HW), .DEPTH(DM_DEPTH)) u_dm (
    .clk,
    .a_en(h_dm_en), .a_we(h_dm_we), .a_addr(h_dm_addr), .a_wdata(h_dm_wdata), .a_rdata(h_dm_rdata),
    .b_en(dm_en), .b_we(dm_we), .b_addr(dm_addr), .b_wdata(dm_wdata), .b_rdata(dm_rdata)
  );

  cp_ctrl #(.MW(MW), .NPE(NPE), .DMAW(DMAW), .PCW(25)) u_ctrl (
    .clk, .rst_n, .start(h_start), .cut_exp(h_cut_exp), .busy, .done,
    .fetch_req, .fetch_addr, .fetch_ready, .inst_valid, .inst,
    .dm_en, .dm_we, .dm_addr, .dm_wdata, .dm_rdata,
    .pe_issue, .pe_instr, .bm_we, .bm_wa, .bm_wd,
    .xw_en, .xw_pe, .xw_reg, .xw_data, .ro_pe, .ro_reg, .ro_data, .pe_busy
  );

  mp_array #(.MW(MW), .NPE(NPE)) u_mp (
    .clk, .rst_n, .issue(pe_issue), .instr(pe_instr),
    .bm_we, .bm_wa, .bm_wd,
    .xw_en, .xw_pe, .xw_reg, .xw_data,
    .ro_pe, .ro_reg, .ro_data, .busy(pe_busy)
  );

endmodule
