// su3_delay: N-stage shift register for a 3x3 complex matrix, advancing only when en is
// high. It keeps operands aligned with the pipelined arithmetic units next to it
// (for example the link U waiting for its staple sum). N = 0 is a plain wire.
module su3_delay
  import su3_pkg::*;
#(
  parameter int unsigned N = 1
) (
  input  logic clk,
  input  logic en,
  input  su3_t d,
  output su3_t q
);

  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    su3_t sr [N];
    always_ff @(posedge clk) begin
      if (en) begin
        sr[0] <= d;
        for (int i = 1; i < int'(N); i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[N-1];
  end

endmodule
