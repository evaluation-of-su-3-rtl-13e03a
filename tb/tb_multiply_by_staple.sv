// tb_multiply_by_staple: self-checking testbench for multiply_by_staple.
// Checks y = u + coef * sum_j (fwd staple j + bwd staple j), coef random in [-1, 1] per run phase.
// Random operands (entries uniform in [-1, 1]) are driven with random gaps and random
// pipeline stalls (en low); every result is compared with a double-precision `real` model
// (tb_su3_pkg) to a relative tolerance of 1e-12, and for the first results, issued
// back-to-back with en high, the latency must be exactly 7 cycles.
module tb_multiply_by_staple;
  import su3_pkg::*;
  import tb_su3_pkg::*;

  localparam int LAT = 7;
  localparam int N   = 300;

  logic clk      = 1'b0;
  logic rst_n    = 1'b0;
  logic en       = 1'b0;
  logic in_valid = 1'b0;
  logic out_valid;
  su3_t y;
  su3_t u;
  su3_t fwd_l [3][3];
  su3_t bwd_l [3][3];
  fp_t  coef;
  int checks = 0, failures = 0, cyc = 0, sent = 0, got = 0;
  su3_t exp_q [$];
  int  t_q [$];

  multiply_by_staple dut (
    .clk, .rst_n, .en, .in_valid, .u, .fwd_l, .bwd_l, .coef, .out_valid, .y
  );

  initial coef = r2fp(rnd());

  function automatic rm_t mbs_ref();
    rm_t s;
    s = r_add(r_staple_fwd(to_rm(fwd_l[0][0]), to_rm(fwd_l[0][1]), to_rm(fwd_l[0][2])),
              r_staple_bwd(to_rm(bwd_l[0][0]), to_rm(bwd_l[0][1]), to_rm(bwd_l[0][2])));
    for (int j = 1; j < 3; j++) begin
      s = r_add(s, r_staple_fwd(to_rm(fwd_l[j][0]), to_rm(fwd_l[j][1]), to_rm(fwd_l[j][2])));
      s = r_add(s, r_staple_bwd(to_rm(bwd_l[j][0]), to_rm(bwd_l[j][1]), to_rm(bwd_l[j][2])));
    end
    return r_add(to_rm(u), r_scale(s, fp2r(coef)));
  endfunction

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
      u = rand_su3();
      for (int j = 0; j < 3; j++)
        for (int q = 0; q < 3; q++) begin
          fwd_l[j][q] = rand_su3();
          bwd_l[j][q] = rand_su3();
        end
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
      u = rand_su3();
      for (int j = 0; j < 3; j++)
        for (int q = 0; q < 3; q++) begin
          fwd_l[j][q] = rand_su3();
          bwd_l[j][q] = rand_su3();
        end
      if (en && in_valid) begin
        exp_q.push_back(to_su3(mbs_ref()));
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
