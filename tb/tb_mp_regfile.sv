// tb_mp_regfile: fills every register through the three write ports, reads
// them back through all four operand ports and the read-out port, and checks
// the same-cycle write-through bypass and the write-port priority.
module tb_mp_regfile;
  import mp_pkg::*;
  localparam int W = 1 + EW + MW_MP4;
  logic clk = 1'b0;
  logic [3:0][RAW-1:0] ra = '0;
  logic [3:0][W-1:0]   rd;
  logic [RAW-1:0]      ro_addr = '0;
  logic [W-1:0]        ro_data;
  logic [2:0]          we = '0;
  logic [2:0][RAW-1:0] wa = '0;
  logic [2:0][W-1:0]   wd = '0;
  int checks = 0, failures = 0;
  logic [W-1:0] model [NREG];

  mp_regfile #(.MW(MW_MP4), .NR(NREG)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [W-1:0] pat(int r, int k);
    return {4{32'(r * 7919 + k * 104729 + 1)}} ^ W'(r << 40);
  endfunction

  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int r = 0; r < NREG; r++) begin
      @(negedge clk);
      we = 3'b1 << (r % 3); wa[r % 3] = RAW'(r); wd[r % 3] = pat(r, 0); model[r] = pat(r, 0);
    end
    @(negedge clk); we = '0;
    for (int r = 0; r < NREG; r++) begin
      @(negedge clk);
      for (int p = 0; p < 4; p++) ra[p] = RAW'((r + p) % NREG);
      ro_addr = RAW'(NREG - 1 - r);
      #1;
      for (int p = 0; p < 4; p++) begin checks++; if (rd[p] !== model[(r + p) % NREG]) failures++; end
      checks++; if (ro_data !== model[NREG - 1 - r]) failures++;
    end
    // bypass: reading a register in the cycle it is written returns the new value
    @(negedge clk);
    we = 3'b011; wa[0] = 6'd5; wd[0] = pat(5, 1); wa[1] = 6'd9; wd[1] = pat(9, 1);
    ra[0] = 6'd5; ra[1] = 6'd9; ra[2] = 6'd10; ro_addr = 6'd5;
    #1;
    checks += 4;
    if (rd[0] !== pat(5, 1)) failures++;
    if (rd[1] !== pat(9, 1)) failures++;
    if (rd[2] !== model[10]) failures++;
    if (ro_data !== model[5]) failures++;              // read-out sees stored value
    // priority: load port over both unit ports
    @(negedge clk);
    we = 3'b111; wa = {6'd20, 6'd20, 6'd20}; wd = {pat(20, 3), pat(20, 2), pat(20, 1)};
    @(negedge clk); we = '0; ra[0] = 6'd20; ro_addr = 6'd9;
    #1;
    checks += 2;
    if (rd[0] !== pat(20, 3)) failures++;
    if (ro_data !== pat(9, 1)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
