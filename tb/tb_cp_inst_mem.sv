// tb_cp_inst_mem: fills on-chip words, fetches them back-to-back (one per
// clock, data one cycle after the request), then fetches addresses past the
// on-chip part and checks that they go to the DRAM port with the right word
// address, that ready drops while waiting, and that the DRAM word returns.
module tb_cp_inst_mem;
  logic clk = 1'b0, rst_n = 1'b0;
  logic h_we = 0; logic [11:0] h_addr = '0; logic [63:0] h_wdata = '0;
  logic fetch_req = 0; logic [24:0] fetch_addr = '0;
  logic ready, inst_valid; logic [63:0] inst;
  logic dram_req; logic [23:0] dram_addr;
  logic dram_rvalid = 0; logic [63:0] dram_rdata = '0;
  int checks = 0, failures = 0;
  cp_inst_mem #(.IW(64), .ONCHIP(4096), .DRAMW(24)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk); h_we = 1; h_addr = 12'(a); h_wdata = {32'(a), 32'(~a)};
    end
    @(negedge clk); h_we = 0;
    for (int a = 0; a < 200; a++) begin
      fetch_req = 1; fetch_addr = 25'(a * 19);
      @(negedge clk);
      checks++;
      if (!inst_valid || inst !== {32'(a * 19), 32'(~(a * 19))}) failures++;
    end
    fetch_req = 0;
    for (int k = 0; k < 5; k++) begin
      int lat;
      @(negedge clk); fetch_req = 1; fetch_addr = 25'(4096 + 1000 * k + 3);
      @(negedge clk); fetch_req = 0;
      checks += 3;
      if (!dram_req || dram_addr !== 24'(1000 * k + 3)) failures++;
      if (ready) failures++;
      if (inst_valid) failures++;
      lat = k + 1;
      repeat (lat) @(negedge clk);
      dram_rvalid = 1; dram_rdata = 64'hD000 + 64'(k); #1;
      checks++; if (!inst_valid || inst !== 64'hD000 + 64'(k)) failures++;
      @(negedge clk); dram_rvalid = 0;
      checks++; if (!ready) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
