// su3_mult: one pipeline stage computing y = op(a) * op(b) for 3x3 complex matrices, where
// op() is the identity or the Hermitian conjugate (dagger) as set by DAG_A / DAG_B.
//
// All 27 complex products (108 real multiplications) are evaluated in parallel, so a new
// pair of matrices is accepted every cycle and the result appears one enabled cycle later.
// Handshake: in_valid travels alongside the data to out_valid; when en is low the stage
// holds its contents (global pipeline stall). The daggers fold the conjugate-transposes of
// the staple formula into the multiplier instead of spending a separate stage on them.
// Matrix multiplication as a building block follows the source design; the single-stage,
// fully parallel arrangement is this implementation's choice.
module su3_mult
  import su3_pkg::*;
#(
  parameter bit DAG_A = 1'b0,
  parameter bit DAG_B = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  su3_t a,
  input  su3_t b,
  output logic out_valid,
  output su3_t y
);

  su3_t opa, opb;

  always_comb begin
    opa = DAG_A ? su3_dag(a) : a;
    opb = DAG_B ? su3_dag(b) : b;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
    end
    if (en) y <= su3_mul(opa, opb);
  end

endmodule
