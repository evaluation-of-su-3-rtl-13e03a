// compute_staple_backward: the "backward" staple of the link U_mu(x) in a perpendicular
// direction nu,
//     S_{-nu}(x) = U_nu(x+mu-nu)^dag * U_mu(x-nu)^dag * U_nu(x-nu) ,
// i.e. the path that leaves x+mu along -nu, comes back along -mu and up to x.
// Inputs: l0 = U_nu(x+mu-nu), l1 = U_mu(x-nu), l2 = U_nu(x-nu).
//
// Two chained su3_mult stages (latency 2 enabled cycles, one new staple per cycle); l2 is
// delayed one stage. As for the forward staple, the two-multiplication structure follows the
// source design and the link order/daggers are the standard APE definition.
module compute_staple_backward
  import su3_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  su3_t l0,
  input  su3_t l1,
  input  su3_t l2,
  output logic out_valid,
  output su3_t y
);

  su3_t p01, l2_d;
  logic v1;

  su3_mult #(.DAG_A(1'b1), .DAG_B(1'b1)) u_m0 (
    .clk, .rst_n, .en, .in_valid, .a(l0), .b(l1), .out_valid(v1), .y(p01)
  );

  su3_delay #(.N(1)) u_d2 (.clk, .en, .d(l2), .q(l2_d));

  su3_mult #(.DAG_A(1'b0), .DAG_B(1'b0)) u_m1 (
    .clk, .rst_n, .en, .in_valid(v1), .a(p01), .b(l2_d), .out_valid, .y
  );

endmodule
