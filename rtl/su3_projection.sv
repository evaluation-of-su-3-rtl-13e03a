// su3_projection: maps a 3x3 complex matrix back onto SU(3) by Gram-Schmidt
// reunitarisation of its rows:
//     u1 = r1 / |r1|
//     v2 = r2 - (u1^* . r2) u1 ,   u2 = v2 / |v2|
//     u3 = (u1 x u2)^*                      (makes the result unitary with det = +1)
// 1/sqrt(n) is a bit-level seed followed by NEWTON_IT Newton-Raphson steps
// y <- y (3/2 - n/2 y^2); four steps reach full double precision from the seed.
//
// Pipeline, one stage per line, all advancing on en (latency 4, one matrix per cycle):
//   1  n1 = |r1|^2, inv1 = 1/sqrt(n1)
//   2  u1, projection of r2 onto u1, v2
//   3  n2 = |v2|^2, inv2 = 1/sqrt(n2)
//   4  u2, u3
// The source design projects the smeared link back to SU(3) with a cited iterative method
// using four iterations; that method is not reproduced. This reunitarisation and its
// pipeline are this design's choice; only the iteration count four is carried over.
module su3_projection
  import su3_pkg::*;
#(
  parameter int unsigned NEWTON_IT = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  su3_t a,
  output logic out_valid,
  output su3_t y
);

  typedef cplx_t [2:0] row_t;

  function automatic fp_t row_norm2(row_t r);
    return fp_add(fp_add(c_norm2(r[0]), c_norm2(r[1])), c_norm2(r[2]));
  endfunction

  function automatic fp_t rsqrt(fp_t n);
    fp_t g;
    g = fp_rsqrt_seed(n);
    for (int i = 0; i < int'(NEWTON_IT); i++) g = fp_rsqrt_step(n, g);
    return g;
  endfunction

  // stage registers
  logic [3:0] v;
  row_t r1_1, r2_1;
  fp_t  inv1_2;
  row_t u1_2, v2_2;
  row_t u1_3, v2_3;
  fp_t  inv2_3;

  // stage 2 combinational
  row_t  u1_c, v2_c;
  cplx_t d_c;
  // stage 4 combinational
  row_t  u2_c, u3_c;

  always_comb begin
    for (int k = 0; k < 3; k++) u1_c[k] = c_scale(r1_1[k], inv1_2);
    d_c = c_add(c_add(c_mul(c_conj(u1_c[0]), r2_1[0]), c_mul(c_conj(u1_c[1]), r2_1[1])),
                c_mul(c_conj(u1_c[2]), r2_1[2]));
    for (int k = 0; k < 3; k++) v2_c[k] = c_sub(r2_1[k], c_mul(d_c, u1_c[k]));
  end

  always_comb begin
    for (int k = 0; k < 3; k++) u2_c[k] = c_scale(v2_3[k], inv2_3);
    u3_c[0] = c_conj(c_sub(c_mul(u1_3[1], u2_c[2]), c_mul(u1_3[2], u2_c[1])));
    u3_c[1] = c_conj(c_sub(c_mul(u1_3[2], u2_c[0]), c_mul(u1_3[0], u2_c[2])));
    u3_c[2] = c_conj(c_sub(c_mul(u1_3[0], u2_c[1]), c_mul(u1_3[1], u2_c[0])));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v <= '0;
    end else if (en) begin
      v <= {v[2:0], in_valid};
    end
    if (en) begin
      // stage 1
      r1_1   <= a[0];
      r2_1   <= a[1];
      inv1_2 <= rsqrt(row_norm2(a[0]));
      // stage 2
      u1_2 <= u1_c;
      v2_2 <= v2_c;
      // stage 3
      u1_3   <= u1_2;
      v2_3   <= v2_2;
      inv2_3 <= rsqrt(row_norm2(v2_2));
      // stage 4
      y[0] <= u1_3;
      y[1] <= u2_c;
      y[2] <= u3_c;
    end
  end

  assign out_valid = v[3];

endmodule
