// mp_fmt_conv: conversion between the PE number format and the host format.
//
// A PE word (1 + 19 + MW bits) is 4 bits wider than the standard word the
// host uses (128, 192 or 256 bits).  The paper states that 4 bits are cut
// from either the mantissa or the exponent when data goes back to the host,
// chosen by a run-time setting; cut_exp selects which:
//   cut_exp = 0: host word = sign, 19-bit exponent, MW-4 mantissa bits.
//                PE -> host drops the 4 lowest mantissa bits (truncation);
//                host -> PE appends 4 zero bits.
//   cut_exp = 1: host word = sign, 15-bit exponent (bias 16383, as IEEE
//                binary128), MW mantissa bits.  PE -> host re-biases the
//                exponent; a value too large becomes infinity, one too small
//                becomes zero.  Host -> PE re-biases; zero and subnormal
//                inputs become zero, infinity and NaN become the largest PE
//                value of that sign.
// The direction host -> PE is the reverse the paper implies but does not
// spell out; truncation, infinity and subnormal handling are this design's
// choices.  Purely combinational.
module mp_fmt_conv
  import mp_pkg::*;
#(
  parameter int MW  = MW_MP4,
  localparam int W  = 1 + EW + MW,     // PE word
  localparam int HW = W - CUT          // host word
) (
  input  logic          cut_exp,
  input  logic [W-1:0]  pe_in,
  output logic [HW-1:0] host_out,
  input  logic [HW-1:0] host_in,
  output logic [W-1:0]  pe_out
);

  localparam int SBIAS = (1 << (EW_STD - 1)) - 1;   // 16383
  localparam int XW    = EW + 2;

  logic                 ps, hs;
  logic [EW-1:0]        pe_e;
  logic [EW_STD-1:0]    h_e;
  logic signed [XW-1:0] he, pe2;

  always_comb begin
    // ---- PE -> host ----
    ps   = pe_in[W-1];
    pe_e = pe_in[W-2 -: EW];
    he   = XW'(pe_e) - XW'(BIAS) + XW'(SBIAS);
    if (!cut_exp)
      host_out = pe_in[W-1:CUT];
    else if (pe_e == '0 || he <= 0)
      host_out = {ps, {(HW-1){1'b0}}};                          // zero
    else if (he >= XW'((1 << EW_STD) - 1))
      host_out = {ps, {EW_STD{1'b1}}, {MW{1'b0}}};              // infinity
    else
      host_out = {ps, he[EW_STD-1:0], pe_in[MW-1:0]};

    // ---- host -> PE ----
    hs  = host_in[HW-1];
    h_e = host_in[HW-2 -: EW_STD];
    pe2 = XW'(h_e) - XW'(SBIAS) + XW'(BIAS);
    if (!cut_exp)
      pe_out = {host_in, {CUT{1'b0}}};
    else if (h_e == '0)
      pe_out = '0;
    else if (h_e == '1)
      pe_out = {hs, {EW{1'b1}}, {MW{1'b1}}};
    else
      pe_out = {hs, pe2[EW-1:0], host_in[MW-1:0]};
  end

endmodule
