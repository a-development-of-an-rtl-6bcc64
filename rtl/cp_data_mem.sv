// cp_data_mem: on-chip data memory of the control processor.
//
// DEPTH words of host format (default 32k words, the paper's size; 128 bits
// wide for MP4).  It holds the X_i and Y_j inputs the host sends and the
// results the control processor stores back.  Two ports: port A for the
// host link, port B for the control-processor sequencer.  Each port reads
// synchronously (data valid in the cycle after the request) and writes at
// the rising edge.  A read returns the old word when the same port writes
// the same address in that cycle.  The dual-port organisation is this
// design's choice; the paper gives only the size and that it is on-chip.
module cp_data_mem #(
  parameter int HW    = 128,
  parameter int DEPTH = 32768,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [HW-1:0] a_wdata,
  output logic [HW-1:0] a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [HW-1:0] b_wdata,
  output logic [HW-1:0] b_rdata
);

  logic [HW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end

endmodule
