// tb_mp_rsq: self-checking test of the inverse-square-root seed unit (MP4).
// Streams one operand per clock and checks, 4 clocks later, that the result
// y satisfies |y*sqrt(|x|) - 1| < 2^-30 (computed in `real`), that only the
// top 32 mantissa bits are used, and exact results for even powers of two.
module tb_mp_rsq;
  import mp_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid;
  word_t x = '0, y;
  int checks = 0, failures = 0;
  longint cyc = 0;

  mp_rsq #(.MW(MW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  word_t  in_q[$];
  longint iss_q[$];

  always @(negedge clk) if (rst_n && out_valid) begin
    word_t xi; longint t; real err, xr;
    xi = in_q.pop_front(); t = iss_q.pop_front();
    checks++;
    xr  = to_real(xi);
    if (xr < 0.0) xr = -xr;
    err = to_real(y) * $sqrt(xr) - 1.0;
    if (err < 0.0) err = -err;
    if (err > 2.0 ** -30 || y[MW-33:0] != '0 || y[W-1] || cyc - t != 4) begin
      failures++;
      if (failures < 10) $display("FAIL x=%h y=%h err=%g", xi, y, err);
    end
  end

  task automatic issue(word_t v);
    @(negedge clk);
    x = v; in_valid = 1'b1;
    in_q.push_back(v); iss_q.push_back(cyc);   // cycle in which the operands are presented
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    issue(from_int(4)); issue(from_int(2)); issue(from_int(3)); issue(from_int(-9));
    issue(pack(0, BIAS - 1, '0));
    for (int i = 0; i < 2000; i++) issue(rand_word(300));
    @(negedge clk) in_valid = 1'b0;
    repeat (8) @(posedge clk);
    // exact cases: 1/sqrt(4) = 0.5, 1/sqrt(1/16) = 4, zero saturates
    begin
      word_t r;
      issue(from_int(4)); @(negedge clk) in_valid = 1'b0;
      repeat (4) @(negedge clk); r = y;
      checks++; if (r != pack(0, BIAS - 1, '0)) failures++;
      issue(pack(0, BIAS - 4, '0)); @(negedge clk) in_valid = 1'b0;
      repeat (4) @(negedge clk); r = y;
      checks++; if (r != pack(0, BIAS + 2, '0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
