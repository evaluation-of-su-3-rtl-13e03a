// tb_su3_projection: self-checking testbench for su3_projection.
// Checks the Gram-Schmidt projection (reference uses $sqrt and division, the design a Newton-Raphson reciprocal square root).
// Random operands (entries uniform in [-1, 1]) are driven with random gaps and random
// pipeline stalls (en low); every result is compared with a double-precision `real` model
// (tb_su3_pkg) to a relative tolerance of 1e-12, and for the first results, issued
// back-to-back with en high, the latency must be exactly 4 cycles.
module tb_su3_projection;
  import su3_pkg::*;
  import tb_su3_pkg::*;

  localparam int LAT = 4;
  localparam int N   = 400;

  logic clk      = 1'b0;
  logic rst_n    = 1'b0;
  logic en       = 1'b0;
  logic in_valid = 1'b0;
  logic out_valid;
  su3_t y;
  su3_t a;
  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0;
  su3_t exp_q [$];
  int  t_q [$];

  su3_projection dut (
    .clk, .rst_n, .en, .in_valid, .a, .out_valid, .y
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && en && out_valid) begin
      if (exp_q.size() == 0) begin
        failures++;
        $display("ERROR: output without input at cycle %0d", cyc);
      end else begin
        su3_t e;
        int  t0;
        real err;
        e   = exp_q.pop_front();
        t0  = t_q.pop_front();
        err = r_err(y, to_rm(e));
        checks++;
        if (err > 1e-12) begin
          failures++;
          $display("ERROR: result %0d off by %g", got, err);
        end
        if (got < 24 - LAT) begin
          checks++;
          if (cyc - t0 != LAT) begin
            failures++;
            $display("ERROR: latency %0d, expected %0d", cyc - t0, LAT);
          end
        end
        got++;
      end
    end
  end

  initial begin
      a = rand_su3();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      if (i < 25) begin
        en       = 1'b1;
        in_valid = 1'b1;
      end else begin
        en       = ($urandom % 4) != 0;
        in_valid = ($urandom % 3) != 0;
      end
      a = rand_su3();
      if (en && in_valid) begin
        exp_q.push_back(to_su3(r_proj(to_rm(a))));
        t_q.push_back(cyc);
        sent++;
      end
    end
    @(negedge clk);
    en       = 1'b1;
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (got != sent || exp_q.size() != 0) begin
      failures++;
      $display("ERROR: %0d inputs, %0d outputs", sent, got);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * 4 + 1000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
