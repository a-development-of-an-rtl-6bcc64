// mp_rsq: inverse-square-root seed unit.
//
// Returns an approximation of 1/sqrt(|x|) with a full 19-bit exponent and a
// 32-bit mantissa; the remaining mantissa bits of the result are zero.  The
// PE uses it as the starting value of a Newton-Raphson iteration for division
// and square root, which software runs on the full-precision multiplier and
// adder.  The accuracy (19-bit exponent, 32-bit mantissa) is the paper's; the
// method is this design's own and is exact integer arithmetic:
//   x = m * 2^u, m in [1,2).  Make the exponent even: m' = m (u even) or 2m
//   (u odd), so x = m' * 2^(2q) with m' in [1,4).  N = m' * 2^94 is taken
//   from the top 95 significand bits (MW >= 94 in all three precisions);
//   s = floor(sqrt(N)) ~ sqrt(m') * 2^47 and
//   Q = floor(2^80 / s) ~ (2/sqrt(m')) * 2^32, which lies in (2^32, 2^33].
//   The result is Q * 2^-32 * 2^(-q-1).  Both truncations err low, so the
//   result is within 2^-31 (relative) below the exact value.
// Pipeline (this design's choice, equal to the other units' latency of 4):
//   stage 1 unpack and exponent parity, stage 2 integer square root,
//   stage 3 reciprocal by integer division, stage 4 pack.
// x = 0 returns the largest finite value; the sign of x is ignored.
// in_valid/x presented in clock cycle t give out_valid/y in cycle t+4.
module mp_rsq
  import mp_pkg::*;
#(
  parameter int MW = MW_MP4,
  localparam int W = 1 + EW + MW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] x,
  output logic         out_valid,
  output logic [W-1:0] y
);

  localparam int RB = 32;              // result mantissa bits
  localparam int NW = 96;              // radicand width
  localparam int XW = EW + 3;

  // Integer square root by the restoring (digit-by-digit) method.
  function automatic logic [NW/2-1:0] isqrt(input logic [NW-1:0] n);
    logic [NW/2-1:0] r;
    logic [NW-1:0]   rem, trial;
    r   = '0;
    rem = n;
    for (int i = NW/2 - 1; i >= 0; i--) begin
      trial = (NW'(r) << (i + 1)) + (NW'(1) << (2 * i));
      if (rem >= trial) begin
        rem  = rem - trial;
        r[i] = 1'b1;
      end
    end
    return r;
  endfunction

  // ---------------- stage 1: unpack ----------------
  logic                 s1_v, s1_zero;
  logic signed [XW-1:0] s1_q;          // exponent of x divided by two (floor)
  logic [NW-1:0]        s1_n;          // m' * 2^94

  logic signed [XW-1:0] u;
  logic [NW-1:0]        sig;
  always_comb begin
    u   = XW'(x[W-2 -: EW]) - XW'(BIAS);
    // significand 1.f, top NW-2 fraction bits, hidden one at bit 94
    sig = {1'b0, 1'b1, x[MW-1 -: (NW-2)]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_zero <= 1'b1; s1_q <= '0; s1_n <= '0;
    end else begin
      s1_v    <= in_valid;
      s1_zero <= (x[W-2 -: EW] == '0);
      s1_q    <= u >>> 1;
      s1_n    <= u[0] ? (sig << 1) : sig;            // odd exponent: m' = 2m
    end
  end

  // ---------------- stage 2: square root ----------------
  logic                 s2_v, s2_zero;
  logic signed [XW-1:0] s2_q;
  logic [NW/2-1:0]      s2_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_zero <= 1'b1; s2_q <= '0; s2_s <= '1;
    end else begin
      s2_v    <= s1_v;
      s2_zero <= s1_zero;
      s2_q    <= s1_q;
      s2_s    <= isqrt(s1_n);
    end
  end

  // ---------------- stage 3: reciprocal ----------------
  logic                 s3_v, s3_zero;
  logic signed [XW-1:0] s3_q;
  logic [RB+1:0]        s3_r;          // Q in (2^32, 2^33]
  logic [81:0]          quo;

  always_comb begin
    quo = (82'(1) << 80) / 82'(s2_s);               // s2_s >= 2^47, never zero
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_v <= 1'b0; s3_zero <= 1'b1; s3_q <= '0; s3_r <= '0;
    end else begin
      s3_v    <= s2_v;
      s3_zero <= s2_zero;
      s3_q    <= s2_q;
      s3_r    <= quo[RB+1:0];
    end
  end

  // ---------------- stage 4: pack ----------------
  logic signed [XW-1:0] re;
  logic [RB-1:0]        rf;
  always_comb begin
    if (s3_r[RB+1]) begin              // Q = 2^33: x was an even power of two
      re = -s3_q + XW'(BIAS);
      rf = '0;
    end else begin
      re = -s3_q - XW'(1) + XW'(BIAS);
      rf = s3_r[RB-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= s3_v;
      if (s3_zero || re > XW'((1 << EW) - 1))
        y <= {1'b0, {EW{1'b1}}, {MW{1'b1}}};
      else if (re <= 0)
        y <= '0;
      else
        y <= {1'b0, re[EW-1:0], rf, {(MW-RB){1'b0}}};
    end
  end

endmodule
