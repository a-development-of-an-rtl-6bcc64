// tb_mp_fmul: self-checking test of the pipelined multiplier (MP4 format).
// A new random product enters every clock; each result is compared with an
// exact wide-integer reference rounded to nearest-even, and must appear
// exactly 4 clocks after its operands.  Directed cases cover zero operands,
// sign rules, exact halfway cases (ties to even), rounding carry-out, underflow to zero and overflow saturation.
module tb_mp_fmul;
  import mp_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid;
  word_t a = '0, b = '0, y;
  int checks = 0, failures = 0;
  longint cyc = 0;

  mp_fmul #(.MW(MW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  word_t  exp_q[$];
  longint iss_q[$];

  always @(negedge clk) if (rst_n && out_valid) begin
    word_t e; longint t;
    e = exp_q.pop_front(); t = iss_q.pop_front();
    checks++;
    if (y !== e || cyc - t != 4) begin
      failures++;
      if (failures < 10) $display("FAIL y=%h exp=%h latency=%0d", y, e, cyc - t);
    end
  end

  task automatic issue(word_t x, word_t z);
    @(negedge clk);
    a = x; b = z; in_valid = 1'b1;
    exp_q.push_back(ref_mul(x, z));
    iss_q.push_back(cyc);   // cycle in which the operands are presented
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t one, three;
    one   = from_int(1);
    three = from_int(3);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // directed
    issue(one, three);
    issue(from_int(-7), from_int(6));
    issue('0, three);
    issue(three, '0);
    issue({1'b0, {EW{1'b1}}, {MW{1'b1}}}, from_int(2));           // overflow
    issue(pack(0, 10, '0), pack(0, 10, '0));                       // underflow
    issue(pack(0, BIAS, {MW{1'b1}}), pack(0, BIAS, {MW{1'b1}}));   // rounding
    issue(pack(0, BIAS, {{(MW-1){1'b0}}, 1'b1}), pack(1, BIAS, {1'b1, {(MW-1){1'b0}}}));
    // exact halfway products: (1 + k ulp) * 1.5 with k odd leaves exactly half
    // an ulp; the truncated result is even for half of them, so round-half-up
    // and round-to-nearest-even differ there
    for (int k = 1; k < 128; k += 2)
      issue(pack(k[1], BIAS + k, MW'(k)), pack(0, BIAS - k, {1'b1, {(MW-1){1'b0}}}));
    // random stream, one per clock
    for (int i = 0; i < 3000; i++) issue(rand_word(200), rand_word(200));
    @(negedge clk) in_valid = 1'b0;
    repeat (8) @(posedge clk);
    // value check against real arithmetic
    begin
      real r;
      r = to_real(ref_mul(from_int(12345), from_int(-678)));
      checks++;
      if (r != -8369910.0) failures++;
    end
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
