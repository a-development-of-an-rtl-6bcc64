// tb_mp_fmt_conv: checks both cut modes in both directions: truncation of
// the low mantissa bits, exponent re-biasing between 19 and 15 bits, and the
// zero, overflow-to-infinity, underflow and infinity-input cases; also that
// a value read in and written back unchanged survives the round trip.
module tb_mp_fmt_conv;
  import mp_ref_pkg::*;
  logic cut_exp = 1'b0;
  word_t pe_in = '0, pe_out;
  logic [127:0] host_in = '0, host_out;
  int checks = 0, failures = 0;
  mp_fmt_conv #(.MW(MW)) dut (.*);

  task automatic chk(logic [127:0] got, logic [127:0] exp);
    checks++; if (got !== exp) begin failures++; $display("FAIL %h vs %h", got, exp); end
  endtask

  initial begin
    word_t w;
    for (int i = 0; i < 500; i++) begin
      w = rand_word(2000);
      cut_exp = 0; pe_in = w; host_in = w[131:4]; #1;
      chk(host_out, w[131:4]);
      checks++; if (pe_out !== {w[131:4], 4'b0}) failures++;
      cut_exp = 1; #1;
      chk(host_out, {w[131], 15'(expo(w) - BIAS + 16383), w[111:0]});
      host_in = host_out; #1;
      checks++; if (pe_out !== w) failures++;
    end
    cut_exp = 1;
    pe_in = pack(1, BIAS + 20000, 112'h3); #1;
    chk(host_out, {1'b1, 15'h7fff, 112'h0});                 // overflow -> infinity
    pe_in = pack(0, BIAS - 20000, 112'h3); #1;
    chk(host_out, '0);                                       // underflow -> zero
    pe_in = '0; #1; chk(host_out, '0);
    host_in = {1'b1, 15'h7fff, 112'h0}; #1;
    checks++; if (pe_out !== {1'b1, {EW{1'b1}}, {MW{1'b1}}}) failures++;
    host_in = {1'b0, 15'h0, 112'h5}; #1;
    checks++; if (pe_out !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
