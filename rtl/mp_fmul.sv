// mp_fmul: pipelined multi-precision floating-point multiplier.
//
// Multiplies two words of the PE number format (sign, 19-bit biased exponent,
// MW stored mantissa bits; see mp_pkg) and rounds the product to nearest-even.
// The paper gives the unit's function, that it accepts an operation every
// clock and that its latency is 4 clocks; the four stages below are this
// design's own split:
//   stage 1  unpack the operands, add the exponents, detect zero operands
//   stage 2  full (MW+1) x (MW+1) significand product
//   stage 3  normalise by one bit, round to nearest-even
//   stage 4  flush to zero on underflow, saturate on overflow, pack
// Interface: in_valid/a/b presented in clock cycle t give the matching
// out_valid/y in cycle t+4 (LAT = 4, four register stages).  A new operation
// may start every clock.  The pipeline has no stall.
module mp_fmul
  import mp_pkg::*;
#(
  parameter int MW = MW_MP4,           // stored mantissa bits
  localparam int W = 1 + EW + MW       // word width
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         out_valid,
  output logic [W-1:0] y
);

  localparam int SW = MW + 1;          // significand width, hidden one included
  localparam int XW = EW + 3;          // signed exponent working width
  localparam logic signed [XW-1:0] EMAX = XW'((1 << EW) - 1);

  // ---------------- stage 1: unpack ----------------
  logic              s1_v, s1_sign, s1_zero;
  logic signed [XW-1:0] s1_e;
  logic [SW-1:0]     s1_ma, s1_mb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_sign <= 1'b0; s1_zero <= 1'b1; s1_e <= '0;
      s1_ma <= '0;  s1_mb <= '0;
    end else begin
      s1_v    <= in_valid;
      s1_sign <= a[W-1] ^ b[W-1];
      s1_zero <= (a[W-2 -: EW] == '0) || (b[W-2 -: EW] == '0);
      s1_e    <= XW'(a[W-2 -: EW]) + XW'(b[W-2 -: EW]) - XW'(BIAS);
      s1_ma   <= {1'b1, a[MW-1:0]};
      s1_mb   <= {1'b1, b[MW-1:0]};
    end
  end

  // ---------------- stage 2: significand product ----------------
  logic              s2_v, s2_sign, s2_zero;
  logic signed [XW-1:0] s2_e;
  logic [2*SW-1:0]   s2_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_sign <= 1'b0; s2_zero <= 1'b1; s2_e <= '0; s2_p <= '0;
    end else begin
      s2_v    <= s1_v;
      s2_sign <= s1_sign;
      s2_zero <= s1_zero;
      s2_e    <= s1_e;
      s2_p    <= (2*SW)'(s1_ma) * (2*SW)'(s1_mb);
    end
  end

  // ---------------- stage 3: normalise and round ----------------
  // The product of two significands in [1,2) lies in [1,4): at most one
  // normalising right shift is needed.
  logic [SW-1:0] n_mant;
  logic          n_guard, n_sticky, n_up;
  logic [SW:0]   n_rnd;
  logic signed [XW-1:0] n_e;

  always_comb begin
    if (s2_p[2*SW-1]) begin
      n_mant   = s2_p[2*SW-1 -: SW];
      n_guard  = s2_p[SW-1];
      n_sticky = |s2_p[SW-2:0];
      n_e      = s2_e + XW'(1);
    end else begin
      n_mant   = s2_p[2*SW-2 -: SW];
      n_guard  = s2_p[SW-2];
      n_sticky = |s2_p[SW-3:0];
      n_e      = s2_e;
    end
    n_up  = n_guard & (n_sticky | n_mant[0]);
    n_rnd = {1'b0, n_mant} + (SW+1)'(n_up);
    if (n_rnd[SW]) begin               // rounding carried out: 1.111.. -> 10.000..
      n_rnd = n_rnd >> 1;
      n_e   = n_e + XW'(1);
    end
  end

  logic              s3_v, s3_sign, s3_zero;
  logic signed [XW-1:0] s3_e;
  logic [MW-1:0]     s3_frac;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_v <= 1'b0; s3_sign <= 1'b0; s3_zero <= 1'b1; s3_e <= '0; s3_frac <= '0;
    end else begin
      s3_v    <= s2_v;
      s3_sign <= s2_sign;
      s3_zero <= s2_zero;
      s3_e    <= n_e;
      s3_frac <= n_rnd[MW-1:0];
    end
  end

  // ---------------- stage 4: range check and pack ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= s3_v;
      if (s3_zero || s3_e <= 0)
        y <= '0;                                       // zero or underflow
      else if (s3_e > EMAX)
        y <= {s3_sign, {EW{1'b1}}, {MW{1'b1}}};         // saturate
      else
        y <= {s3_sign, s3_e[EW-1:0], s3_frac};
    end
  end

endmodule
