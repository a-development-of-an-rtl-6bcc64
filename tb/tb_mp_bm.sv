// tb_mp_bm: writes every broadcast-memory word and reads each back on the
// broadcast port, including a read of a word in the cycle it is rewritten
// (old value expected).
module tb_mp_bm;
  import mp_pkg::*;
  localparam int W = 1 + EW + MW_MP4;
  logic clk = 1'b0, we = 1'b0;
  logic [BAW-1:0] wa = '0, rd_addr = '0;
  logic [W-1:0] wd = '0, rd_data;
  int checks = 0, failures = 0;
  mp_bm #(.MW(MW_MP4), .DEPTH(BM_DEPTH)) dut (.*);
  always #5 clk = ~clk;
  function automatic logic [W-1:0] pat(int a, int k);
    return {5{32'(a * 2654435761 + k)}};
  endfunction
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < BM_DEPTH; a++) begin
      @(negedge clk); we = 1; wa = BAW'(a); wd = pat(a, 0);
    end
    @(negedge clk); we = 0;
    for (int a = BM_DEPTH - 1; a >= 0; a--) begin
      @(negedge clk); rd_addr = BAW'(a); #1;
      checks++; if (rd_data !== pat(a, 0)) failures++;
    end
    @(negedge clk); we = 1; wa = 6'd7; wd = pat(7, 1); rd_addr = 6'd7; #1;
    checks++; if (rd_data !== pat(7, 0)) failures++;
    @(negedge clk); we = 0; #1;
    checks++; if (rd_data !== pat(7, 1)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
