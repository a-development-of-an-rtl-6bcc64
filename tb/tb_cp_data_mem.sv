// tb_cp_data_mem: writes patterns through both ports across the full
// 32k-word memory, reads them back through the other port with the one-cycle
// read latency, and checks read-before-write on a same-port collision.
module tb_cp_data_mem;
  logic clk = 1'b0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [14:0] a_addr = '0, b_addr = '0;
  logic [127:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  int checks = 0, failures = 0;
  cp_data_mem #(.HW(128), .DEPTH(32768)) dut (.*);
  always #5 clk = ~clk;
  function automatic logic [127:0] pat(int a);
    return {4{32'(a * 40503 + 17)}} ^ 128'(a);
  endfunction
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < 32768; a += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 15'(a); a_wdata = pat(a);
      b_en = 1; b_we = 1; b_addr = 15'(a + 1); b_wdata = pat(a + 1);
    end
    @(negedge clk); a_we = 0; b_we = 0;
    for (int a = 0; a < 32768; a += 97) begin
      @(negedge clk); a_addr = 15'(a + 1); b_addr = 15'(a);
      @(negedge clk);
      checks += 2;
      if (a_rdata !== pat(a + 1)) failures++;
      if (b_rdata !== pat(a)) failures++;
    end
    @(negedge clk); b_we = 1; b_addr = 15'd3; b_wdata = '1;
    @(negedge clk); b_we = 0;
    checks++; if (b_rdata !== pat(3)) failures++;      // old word on collision
    @(negedge clk);
    checks++; if (b_rdata !== '1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
