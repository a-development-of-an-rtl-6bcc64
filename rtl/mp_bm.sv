// mp_bm: broadcast memory of the SIMD MP processor.
//
// A small memory of words in the PE number format.  The control processor
// fills it with the Y_j data of an interaction-type loop (write port, one
// word per clock); in every cycle the PE instruction names one word
// (rd_addr), which is read combinationally and driven to all PEs at once as
// their broadcast operand.  The paper names broadcast memory units as part
// of the SIMD processor and says Y_j is sent from the control processor to
// all PEs; the depth (64 words), the single broadcast read per cycle and the
// asynchronous read are this design's choices.  A write and a read of the
// same word in one cycle return the old word.  The storage is not reset.
module mp_bm
  import mp_pkg::*;
#(
  parameter int MW    = MW_MP4,
  parameter int DEPTH = BM_DEPTH,
  localparam int W    = 1 + EW + MW,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  logic [W-1:0]  wd,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
  end

  assign rd_data = mem[rd_addr];

endmodule
