// su3_scale: one pipeline stage multiplying every entry of a 3x3 complex matrix by a real
// scalar, y = s * a (18 floating-point multipliers in parallel).
//
// A new matrix is accepted every cycle; y and out_valid follow one enabled cycle later, and a
// low en freezes the stage. The source design names a scaling function among its building
// blocks; here it weights the staple sum with a run-time coefficient (1.0 gives the plain sum
// of the smearing formula).
module su3_scale
  import su3_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  su3_t a,
  input  fp_t  s,
  output logic out_valid,
  output su3_t y
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
    end
    if (en) y <= su3_scale(a, s);
  end

endmodule
