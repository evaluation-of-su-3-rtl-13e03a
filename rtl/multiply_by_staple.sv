// multiply_by_staple: the smearing update of one link,
//     V = U_mu(x) + coef * sum_{nu != mu} ( S_{+nu}(x) + S_{-nu}(x) ) ,
// with coef = 1.0 giving exactly the unweighted sum of the smearing formula.
//
// Structure (one column per pipeline stage, all stages advance together on en):
//   1-2  three compute_staple_forward and three compute_staple_backward units, one pair per
//        perpendicular direction nu, evaluating all six staples in parallel
//   3    three add_two units: P_nu = S_{+nu} + S_{-nu}
//   4    add_two: P_0 + P_1            (P_2 delayed one stage)
//   5    add_two: (P_0 + P_1) + P_2
//   6    su3_scale by coef
//   7    add_two with U (delayed six stages)
// Latency 7 enabled cycles, one link per cycle. The six parallel staple units and the three
// pairwise adders mirror the composition reported for the source kernel; the remaining adder
// tree, the coefficient input and the latency are this design's choices. coef is sampled at
// stage 6 and is meant to be held constant during a run.
// Inputs per perpendicular direction j (nu_j = j-th direction other than mu):
//   fwd_l[j] = {U_nu(x+mu), U_mu(x+nu), U_nu(x)}, bwd_l[j] = {U_nu(x+mu-nu), U_mu(x-nu), U_nu(x-nu)}.
module multiply_by_staple
  import su3_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  su3_t u,
  input  su3_t fwd_l [3][3],
  input  su3_t bwd_l [3][3],
  input  fp_t  coef,
  output logic out_valid,
  output su3_t y
);

  su3_t sf [3];
  su3_t sb [3];
  su3_t pr [3];
  logic [2:0] vf, vb, vp;
  su3_t s01, p2_d, s012, ssc, u_d;
  logic v01, v012, vsc;

  for (genvar j = 0; j < 3; j++) begin : g_nu
    compute_staple_forward u_fwd (
      .clk, .rst_n, .en, .in_valid,
      .l0(fwd_l[j][0]), .l1(fwd_l[j][1]), .l2(fwd_l[j][2]),
      .out_valid(vf[j]), .y(sf[j])
    );
    compute_staple_backward u_bwd (
      .clk, .rst_n, .en, .in_valid,
      .l0(bwd_l[j][0]), .l1(bwd_l[j][1]), .l2(bwd_l[j][2]),
      .out_valid(vb[j]), .y(sb[j])
    );
    add_two u_pair (
      .clk, .rst_n, .en, .in_valid(vf[j] & vb[j]), .a(sf[j]), .b(sb[j]),
      .out_valid(vp[j]), .y(pr[j])
    );
  end

  add_two u_s01 (
    .clk, .rst_n, .en, .in_valid(vp[0] & vp[1]), .a(pr[0]), .b(pr[1]), .out_valid(v01), .y(s01)
  );
  su3_delay #(.N(1)) u_dp2 (.clk, .en, .d(pr[2]), .q(p2_d));
  add_two u_s012 (
    .clk, .rst_n, .en, .in_valid(v01), .a(s01), .b(p2_d), .out_valid(v012), .y(s012)
  );
  su3_scale u_scale (
    .clk, .rst_n, .en, .in_valid(v012), .a(s012), .s(coef), .out_valid(vsc), .y(ssc)
  );
  su3_delay #(.N(6)) u_du (.clk, .en, .d(u), .q(u_d));
  add_two u_final (
    .clk, .rst_n, .en, .in_valid(vsc), .a(u_d), .b(ssc), .out_valid, .y
  );

endmodule
