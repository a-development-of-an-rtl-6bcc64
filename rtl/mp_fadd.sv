// mp_fadd: pipelined multi-precision floating-point adder / subtractor.
//
// Computes a + b (sub = 0) or a - b (sub = 1) on words of the PE number
// format (see mp_pkg) and rounds to nearest-even.  The paper gives the unit's
// function, one operation per clock and a latency of 4 clocks; the stage
// split is this design's own:
//   stage 1  unpack, order the operands by magnitude, exponent difference
//   stage 2  align the smaller significand (guard, round and sticky bits kept)
//   stage 3  add or subtract the significands
//   stage 4  normalise (leading-zero count), round, range check, pack
// Interface: in_valid/sub/a/b presented in clock cycle t give the matching
// out_valid/y in cycle t+4 (LAT = 4, four register stages).  A new operation
// may start every clock.  An exact zero result is +0.
module mp_fadd
  import mp_pkg::*;
#(
  parameter int MW = MW_MP4,           // stored mantissa bits
  localparam int W = 1 + EW + MW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         sub,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         out_valid,
  output logic [W-1:0] y
);

  localparam int SW = MW + 1;          // significand, hidden one included
  localparam int GW = SW + 3;          // plus guard, round, sticky
  localparam int XW = EW + 3;
  localparam logic signed [XW-1:0] EMAX = XW'((1 << EW) - 1);

  // ---------------- stage 1: unpack and order ----------------
  logic [W-1:0]  bb;
  logic          a_ge_b;
  logic [EW-1:0] ea, eb;
  always_comb begin
    bb     = {b[W-1] ^ sub, b[W-2:0]};
    a_ge_b = a[W-2:0] >= bb[W-2:0];          // magnitude compare on {exp, frac}
    ea     = a[W-2 -: EW];
    eb     = bb[W-2 -: EW];
  end

  logic          s1_v, s1_sign, s1_esub;
  logic [EW-1:0] s1_e, s1_d;
  logic [SW-1:0] s1_ml, s1_ms;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_sign <= 1'b0; s1_esub <= 1'b0; s1_e <= '0; s1_d <= '0;
      s1_ml <= '0; s1_ms <= '0;
    end else begin
      s1_v    <= in_valid;
      s1_esub <= a[W-1] ^ bb[W-1];
      if (a_ge_b) begin
        s1_sign <= a[W-1];
        s1_e    <= ea;
        s1_d    <= ea - eb;
        s1_ml   <= (ea == '0) ? '0 : {1'b1, a[MW-1:0]};
        s1_ms   <= (eb == '0) ? '0 : {1'b1, bb[MW-1:0]};
      end else begin
        s1_sign <= bb[W-1];
        s1_e    <= eb;
        s1_d    <= eb - ea;
        s1_ml   <= (eb == '0) ? '0 : {1'b1, bb[MW-1:0]};
        s1_ms   <= (ea == '0) ? '0 : {1'b1, a[MW-1:0]};
      end
    end
  end

  // ---------------- stage 2: align ----------------
  logic [GW-1:0] al_ext, al_sh;
  logic          al_sticky;
  always_comb begin
    al_ext = {s1_ms, 3'b000};
    if (s1_d >= EW'(GW)) begin
      al_sh     = '0;
      al_sticky = |s1_ms;
    end else begin
      al_sh     = al_ext >> s1_d;
      al_sticky = |(al_ext & ~(al_sh << s1_d));   // bits shifted out
    end
  end

  logic          s2_v, s2_sign, s2_esub;
  logic [EW-1:0] s2_e;
  logic [GW-1:0] s2_ml, s2_ms;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_sign <= 1'b0; s2_esub <= 1'b0; s2_e <= '0;
      s2_ml <= '0; s2_ms <= '0;
    end else begin
      s2_v    <= s1_v;
      s2_sign <= s1_sign;
      s2_esub <= s1_esub;
      s2_e    <= s1_e;
      s2_ml   <= {s1_ml, 3'b000};
      s2_ms   <= {al_sh[GW-1:1], al_sh[0] | al_sticky};
    end
  end

  // ---------------- stage 3: add / subtract ----------------
  logic          s3_v, s3_sign;
  logic [EW-1:0] s3_e;
  logic [GW:0]   s3_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_v <= 1'b0; s3_sign <= 1'b0; s3_e <= '0; s3_sum <= '0;
    end else begin
      s3_v    <= s2_v;
      s3_sign <= s2_sign;
      s3_e    <= s2_e;
      s3_sum  <= s2_esub ? ({1'b0, s2_ml} - {1'b0, s2_ms})
                         : ({1'b0, s2_ml} + {1'b0, s2_ms});
    end
  end

  // ---------------- stage 4: normalise, round, pack ----------------
  logic [GW-1:0]        nm;            // leading one at bit GW-1
  logic signed [XW-1:0] ne;
  int unsigned          lz;
  logic                 up;
  logic [SW:0]          rnd;

  always_comb begin
    lz = 0;
    for (int i = GW - 1; i >= 0; i--) begin
      if (s3_sum[i]) break;
      lz++;
    end
    if (s3_sum[GW]) begin                            // carry out: shift right by one
      nm = {s3_sum[GW:2], s3_sum[1] | s3_sum[0]};
      ne = XW'(s3_e) + XW'(1);
    end else begin
      nm = s3_sum[GW-1:0] << lz;
      ne = XW'(s3_e) - XW'(lz);
    end
    // nm = hidden | MW fraction bits | guard | round | sticky
    up  = nm[2] & (nm[1] | nm[0] | nm[3]);
    rnd = {1'b0, nm[GW-1:3]} + (SW+1)'(up);
    if (rnd[SW]) begin
      rnd = rnd >> 1;
      ne  = ne + XW'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= s3_v;
      if (s3_sum == '0 || s3_e == '0 || ne <= 0)
        y <= '0;                                       // exact zero or underflow
      else if (ne > EMAX)
        y <= {s3_sign, {EW{1'b1}}, {MW{1'b1}}};         // saturate
      else
        y <= {s3_sign, ne[EW-1:0], rnd[MW-1:0]};
    end
  end

endmodule
