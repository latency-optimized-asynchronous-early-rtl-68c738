// Early output dual-bit asynchronous full adder (DAFA), dual-rail encoded,
// with redundant carry logic.
//
// Adds two 2-bit dual-rail operands a[1:0], b[1:0] and a dual-rail carry cin,
// producing sum[1:0] and a dual-rail carry cout. Replacing two single-bit
// stages with one DAFA halves the number of carry stages in a ripple chain.
//
// Notation for the bit pairs (index 1 = more significant, 0 = less):
//   k = A0.B0 (kill), g = A1.B1 (generate), p = A0.B1 + A1.B0 (propagate).
// The netlist is built from the paper's disjoint sum-of-products equations:
//   X  = p1.p0                 (four AND4 into an OR4)
//   Y  = (g1 + k1).p0          (four AND4 into an OR4)
//   G  = A11.B11 + p1.g0       (two AND4 into OR2, then AO21)
//   K  = A10.B10 + p1.k0       (two AND4 into OR2, then AO21)
//   COUT1 = X.CIN1 + G         (AO21, the redundant-logic carry)
//   COUT0 = X.CIN0 + K         (AO21)
//   SUM11 = C(X,CIN0) + C(Y,CIN1) + (p1.k0 + k1.g0 + g1.g0)
//   SUM10 = C(X,CIN1) + C(Y,CIN0) + (p1.g0 + g1.k0 + k1.k0)
//   SUM01 = C(p0,CIN0) + C(k0+g0,CIN1)
//   SUM00 = C(p0,CIN1) + C(k0+g0,CIN0)
// The carry path from cin to cout is one AO21, which is what makes this the
// low-latency (redundant) variant; the carry goes valid without cin whenever
// the upper pair generates or kills, and returns to spacer once the operands
// are spacer (early reset). The sum rails wait for cin through C-elements.
//
// Interface: dual-rail a[1:0], b[1:0], cin in; sum[1:0], cout out. No
// handshake of its own; zero delay. Inside a pipeline stage the carry and sum
// signals lie on the stage's acknowledge loop (register -> adder -> register
// -> completion detector -> register), which lint tools report as a
// combinational loop; the loop is the handshake itself and is intended.
module dafa
  import dr_pkg::*;
(
  input  dr_t [1:0] a,
  input  dr_t [1:0] b,
  input  dr_t       cin,
  output dr_t [1:0] sum,
  output dr_t       cout
);

  // Rails named as in the equations: Aij = bit i, rail j.
  logic a11, a10, a01, a00, b11, b10, b01, b00, cin1, cin0;
  assign {a11, a10} = a[1];
  assign {a01, a00} = a[0];
  assign {b11, b10} = b[1];
  assign {b01, b00} = b[0];
  assign {cin1, cin0} = cin;

  // ---- more significant pair ----
  logic x_pp, y_gkp, p1g0, p1k0, g_out, k_out;
  logic z11, z10;
  logic cx_cin0, cx_cin1, cy_cin0, cy_cin1;

  assign x_pp  = (a10 & a00 & b11 & b01) | (a11 & a00 & b10 & b01)
               | (a10 & a01 & b11 & b00) | (a11 & a01 & b10 & b00);
  assign y_gkp = (a11 & a00 & b11 & b01) | (a11 & a01 & b11 & b00)
               | (a10 & a00 & b10 & b01) | (a10 & a01 & b10 & b00);
  assign p1g0  = (a10 & a01 & b11 & b01) | (a11 & a01 & b10 & b01);
  assign p1k0  = (a11 & a00 & b10 & b00) | (a10 & a00 & b11 & b00);

  assign g_out = (a11 & b11) | p1g0;
  assign k_out = (a10 & b10) | p1k0;

  assign cout.r1 = (cin1 & x_pp) | g_out;
  assign cout.r0 = (cin0 & x_pp) | k_out;

  c_element u_cx_cin0 (.a(x_pp),  .b(cin0), .y(cx_cin0));
  c_element u_cx_cin1 (.a(x_pp),  .b(cin1), .y(cx_cin1));
  c_element u_cy_cin0 (.a(y_gkp), .b(cin0), .y(cy_cin0));
  c_element u_cy_cin1 (.a(y_gkp), .b(cin1), .y(cy_cin1));

  assign z11 = p1k0 | (a10 & a01 & b10 & b01) | (a11 & a01 & b11 & b01);
  assign z10 = p1g0 | (a11 & a00 & b11 & b00) | (a10 & a00 & b10 & b00);

  assign sum[1].r1 = cx_cin0 | cy_cin1 | z11;
  assign sum[1].r0 = cx_cin1 | cy_cin0 | z10;

  // ---- less significant pair ----
  logic eq0, p0;
  logic ce_cin0, ce_cin1, cp_cin0, cp_cin1;

  assign eq0 = (a00 & b00) | (a01 & b01);
  assign p0  = (a00 & b01) | (a01 & b00);

  c_element u_ce_cin0 (.a(eq0), .b(cin0), .y(ce_cin0));
  c_element u_ce_cin1 (.a(eq0), .b(cin1), .y(ce_cin1));
  c_element u_cp_cin0 (.a(p0),  .b(cin0), .y(cp_cin0));
  c_element u_cp_cin1 (.a(p0),  .b(cin1), .y(cp_cin1));

  assign sum[0].r1 = cp_cin0 | ce_cin1;
  assign sum[0].r0 = cp_cin1 | ce_cin0;

endmodule
