// add_two: one pipeline stage computing the element-wise sum y = a + b of two 3x3 complex
// matrices (18 floating-point adders in parallel).
//
// A new pair is accepted every cycle; y and out_valid follow one enabled cycle later, and a
// low en freezes the stage. The name and role (summing staples) follow the source design,
// which lists three such adders next to the six staple units; the one-cycle latency is this
// implementation's choice.
module add_two
  import su3_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  su3_t a,
  input  su3_t b,
  output logic out_valid,
  output su3_t y
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
    end
    if (en) y <= su3_add(a, b);
  end

endmodule
