// Early output single-bit asynchronous full adder (SAFA), dual-rail encoded.
//
// Adds the dual-rail bits a, b and the carry input cin and produces the
// dual-rail sum and carry output. The structure is the paper's gate netlist:
//   CG1 = A0.B0 + A1.B1            (AO22, "a equals b")
//   CG2 = A0.B1 + A1.B0            (AO22, "a differs from b")
//   SUM1 = C(CG1,CIN1) + C(CG2,CIN0)
//   SUM0 = C(CG1,CIN0) + C(CG2,CIN1)          (four C-elements, two OR2)
//   COUT1 = CG3 = A1.B1 + CG2.CIN1  (AO22)
//   COUT0 = CG4 = A0.B0 + CG2.CIN0  (AO22)
// A1.B1 and A0.B0 appear both in CG1 and in CG3/CG4 (implicit logic
// redundancy). That lets the carry go valid without waiting for cin when a
// and b are equal (early set) and return to spacer once a and b are spacer
// (early reset), so the carry path through one SAFA is a single AO22.
//
// Interface: dual-rail inputs a, b, cin; dual-rail outputs sum, cout. The block
// is combinational apart from the C-element state; it has no handshake of its
// own and relies on the enclosing stage's registers and completion detectors.
module safa
  import dr_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
);

  logic cg1, cg2;
  logic c1_cin0, c1_cin1, c2_cin0, c2_cin1;

  assign cg1 = (a.r0 & b.r0) | (a.r1 & b.r1);
  assign cg2 = (a.r0 & b.r1) | (a.r1 & b.r0);

  c_element u_c1_cin0 (.a(cg1), .b(cin.r0), .y(c1_cin0));
  c_element u_c1_cin1 (.a(cg1), .b(cin.r1), .y(c1_cin1));
  c_element u_c2_cin0 (.a(cg2), .b(cin.r0), .y(c2_cin0));
  c_element u_c2_cin1 (.a(cg2), .b(cin.r1), .y(c2_cin1));

  assign sum.r1 = c1_cin1 | c2_cin0;
  assign sum.r0 = c1_cin0 | c2_cin1;

  assign cout.r1 = (a.r1 & b.r1) | (cg2 & cin.r1);   // CG3
  assign cout.r0 = (a.r0 & b.r0) | (cg2 & cin.r0);   // CG4

endmodule
