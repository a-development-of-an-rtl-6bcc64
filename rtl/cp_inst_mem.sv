// cp_inst_mem: instruction store of the control processor.
//
// The instruction address space holds ONCHIP words in on-chip memory
// (default 4k, the paper's size) followed by up to 16M words in the DRAM of
// the board (the paper's size); the sizes are the paper's, the address map
// (on-chip words first, DRAM words from address ONCHIP on) is this design's
// choice.  The host writes the on-chip part through h_*; the DRAM is filled
// by other means and read here through a request/response port to the DRAM
// controller, which is not part of this design.
//
// Fetch: a request (fetch_req, fetch_addr) made while ready is high returns
// inst_valid with the word one cycle later for on-chip addresses.  For DRAM
// addresses a single-cycle dram_req is raised with the DRAM word address and
// the word is returned in the cycle dram_rvalid arrives; ready is low in
// between and requests are ignored.
module cp_inst_mem #(
  parameter int IW     = 64,
  parameter int ONCHIP = 4096,
  parameter int DRAMW  = 24,                         // 16M DRAM words
  localparam int OAW   = $clog2(ONCHIP),
  localparam int PCW   = DRAMW + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // host write port to the on-chip part
  input  logic             h_we,
  input  logic [OAW-1:0]   h_addr,
  input  logic [IW-1:0]    h_wdata,
  // fetch port
  input  logic             fetch_req,
  input  logic [PCW-1:0]   fetch_addr,
  output logic             ready,
  output logic             inst_valid,
  output logic [IW-1:0]    inst,
  // DRAM controller port
  output logic             dram_req,
  output logic [DRAMW-1:0] dram_addr,
  input  logic             dram_rvalid,
  input  logic [IW-1:0]    dram_rdata
);

  logic [IW-1:0] mem [ONCHIP];
  logic [IW-1:0] on_rdata;
  logic          on_v, wait_dram;
  logic          is_dram;

  assign is_dram = fetch_addr >= PCW'(ONCHIP);
  assign ready   = !wait_dram;

  always_ff @(posedge clk) begin
    if (h_we) mem[h_addr] <= h_wdata;
    on_rdata <= mem[fetch_addr[OAW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      on_v      <= 1'b0;
      wait_dram <= 1'b0;
      dram_req  <= 1'b0;
      dram_addr <= '0;
    end else begin
      on_v     <= fetch_req && ready && !is_dram;
      dram_req <= 1'b0;
      if (fetch_req && ready && is_dram) begin
        wait_dram <= 1'b1;
        dram_req  <= 1'b1;
        dram_addr <= DRAMW'(fetch_addr - PCW'(ONCHIP));
      end else if (dram_rvalid) begin
        wait_dram <= 1'b0;
      end
    end
  end

  assign inst_valid = on_v || (wait_dram && dram_rvalid);
  assign inst       = on_v ? on_rdata : dram_rdata;

endmodule
