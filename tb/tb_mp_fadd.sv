// tb_mp_fadd: self-checking test of the pipelined adder/subtractor (MP4).
// One random addition or subtraction enters every clock; each result is
// compared with an exact wide-integer reference rounded to nearest-even and
// must appear exactly 4 clocks after issue.  Directed cases cover zeros,
// exact cancellation, massive cancellation, far-apart exponents, carry-out,
// overflow saturation and underflow.
module tb_mp_fadd;
  import mp_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, sub = 1'b0, out_valid;
  word_t a = '0, b = '0, y;
  int checks = 0, failures = 0;
  longint cyc = 0;

  mp_fadd #(.MW(MW)) dut (.*);

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

  task automatic issue(word_t x, word_t z, logic s);
    @(negedge clk);
    a = x; b = z; sub = s; in_valid = 1'b1;
    exp_q.push_back(ref_add(x, z, s));
    iss_q.push_back(cyc);   // cycle in which the operands are presented
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t x;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    issue(from_int(1), from_int(2), 1'b0);
    issue(from_int(5), from_int(5), 1'b1);                         // exact zero
    issue('0, from_int(9), 1'b1);
    issue(from_int(9), '0, 1'b0);
    issue('0, '0, 1'b0);
    issue(pack(0, BIAS, {MW{1'b1}}), pack(0, BIAS - MW - 1, '0), 1'b0);  // carry-out by rounding
    issue(pack(0, BIAS + 1, '0), pack(0, BIAS - 300, 112'h5), 1'b1);     // far apart, below power of 2
    issue({1'b0, {EW{1'b1}}, {MW{1'b1}}}, {1'b0, {EW{1'b1}}, {MW{1'b1}}}, 1'b0); // overflow
    issue(pack(0, 1, 112'h1), pack(0, 1, 112'h0), 1'b1);           // underflow
    for (int i = 0; i < 3000; i++) begin
      x = rand_word(60);
      case (i % 4)
        0: issue(x, rand_word(60), i[3]);
        1: issue(x, {x[W-1:1], ~x[0]}, ~x[W-1]);                   // massive cancellation
        2: issue(x, pack(~x[W-1], expo(x) - int'($urandom_range(3)), rand_word(1)), 1'b0);
        default: issue(rand_word(2), rand_word(2), i[4]);
      endcase
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (8) @(posedge clk);
    checks++;
    if (to_real(ref_add(from_int(1000), from_int(24), 1'b1)) != 976.0) failures++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
