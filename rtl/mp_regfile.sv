// mp_regfile: register file of one processing element.
//
// NREG words of the PE number format.  Four combinational read ports serve
// the two operands of the multiply-unit slot and the two of the adder-unit
// slot of the instruction being issued; a fifth read port lets the control
// processor read results out.  Three write ports take the multiply-slot
// result, the adder result and words loaded by the control processor.
// Writes take effect at the rising edge; a read of a register being written
// in the same cycle returns the new value (write-through bypass), so an
// instruction issued in the cycle a result returns already sees it.  If two
// ports write the same register in one cycle, the higher-numbered port wins.
// The paper says only that a PE has register units and "registers enough to
// store data"; the number of registers, the port count and the bypass are
// this design's choices.  The storage is not reset: software writes a
// register before it reads it.
module mp_regfile
  import mp_pkg::*;
#(
  parameter int MW   = MW_MP4,
  parameter int NR   = NREG,
  localparam int W   = 1 + EW + MW,
  localparam int AW  = $clog2(NR)
) (
  input  logic                 clk,
  input  logic [3:0][AW-1:0]   ra,      // operand read addresses
  output logic [3:0][W-1:0]    rd,      // operand read data (combinational)
  input  logic [AW-1:0]        ro_addr, // read-out address
  output logic [W-1:0]         ro_data,
  input  logic [2:0]           we,      // write enables: mul slot, add slot, load
  input  logic [2:0][AW-1:0]   wa,
  input  logic [2:0][W-1:0]    wd
);

  logic [W-1:0] mem [NR];

  always_ff @(posedge clk) begin
    for (int p = 0; p < 3; p++)
      if (we[p]) mem[wa[p]] <= wd[p];
  end

  always_comb begin
    for (int r = 0; r < 4; r++) begin
      rd[r] = mem[ra[r]];
      for (int p = 0; p < 3; p++)
        if (we[p] && wa[p] == ra[r]) rd[r] = wd[p];
    end
    ro_data = mem[ro_addr];
  end

endmodule
