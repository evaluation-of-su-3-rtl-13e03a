// tb_ape_kernel: end-to-end check of one smearing kernel on a 2x3x2x7 periodic lattice.
// Two random lattices are streamed in back to back; the smeared sites are compared with a
// double-precision model of one APE iteration (tb_su3_pkg::smear_lattice) in the kernel's
// output order: time slices 1, 2, ..., LT-1, then 0, sites x-fastest within a slice.
// Pass 1 runs with random input gaps and random output back-pressure, pass 2 without: then
// the kernel must issue one link per cycle, 4*V links in 4*V consecutive cycles. The test
// counts input back-pressure (window full), issue waiting for slices, output stalls, the
// end-of-pass torus wrap and the back-to-back restart, and fails if any never happens.
module tb_ape_kernel;
  import su3_pkg::*;
  import tb_su3_pkg::*;
  localparam int LX = 2, LY = 3, LZ = 2, LT = 7;
  localparam int V3 = LX * LY * LZ;
  localparam int V = V3 * LT;
  localparam real COEF = 0.75;

  logic clk = 1'b0, rst_n = 1'b0;
  fp_t coef;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  site_t in_site, out_site;
  site_t lat [2][];
  site_t ref_l [2][];
  int checks = 0, failures = 0, got = 0, cyc = 0;
  int n_in_stall = 0, n_wait = 0, n_out_stall = 0, n_wrap = 0, n_restart = 0;
  int first_iss = -1, last_iss = -1, iss2 = 0;
  bit quiet = 1'b0, in_pass2 = 1'b0;

  ape_kernel #(.LX(LX), .LY(LY), .LZ(LZ), .LT(LT)) dut (
    .clk, .rst_n, .coef, .in_valid, .in_site, .in_ready, .out_valid, .out_site, .out_ready
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) out_ready <= quiet ? 1'b1 : (($urandom % 8) == 0);

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) n_in_stall++;
      if (!dut.can_issue) n_wait++;
      if (!dut.en) n_out_stall++;
      if (dut.issue && int'(dut.k) == LT - 1 && int'(dut.mu) == 0 &&
          int'(dut.ix) == 0 && int'(dut.iy) == 0 && int'(dut.iz) == 0) n_wrap++;
      if (dut.issue && dut.last_link && in_valid) n_restart++;
      if (dut.issue && in_pass2 && got >= V) begin
        if (first_iss < 0) first_iss = cyc;
        last_iss = cyc;
        iss2++;
      end
      if (out_valid && out_ready) begin
        int p, n, sidx;
        real e;
        p = got / V;
        n = got % V;
        sidx = ((n / V3 + 1) % LT) * V3 + n % V3;
        if (p < 2) begin
          e = site_err(out_site, ref_l[p][sidx]);
          checks++;
          if (e > 1e-9) begin
            failures++;
            $display("ERROR: pass %0d site %0d (lattice %0d) off by %g", p, n, sidx, e);
          end
        end
        got++;
      end
    end
  end

  initial begin
    coef = r2fp(COEF);
    for (int p = 0; p < 2; p++) begin
      lat[p] = new[V];
      ref_l[p] = new[V];
      for (int i = 0; i < V; i++) lat[p][i] = rand_site_su3();
      smear_lattice(lat[p], ref_l[p], LX, LY, LZ, LT, COEF);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 2; p++) begin
      if (p == 1) begin
        quiet = 1'b1;
        in_pass2 = 1'b1;
      end
      for (int i = 0; i < V; i++) begin
        @(negedge clk);
        while (!quiet && ($urandom % 4) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid = 1'b1;
        in_site = lat[p][i];
        do @(posedge clk); while (!in_ready);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    while (got < 2 * V) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (got != 2 * V) begin
      failures++;
      $display("ERROR: %0d sites out, expected %0d", got, 2 * V);
    end
    checks++;
    if (iss2 != 4 * V || last_iss - first_iss != 4 * V - 1) begin
      failures++;
      $display("ERROR: pass 2 issued %0d links in %0d cycles, expected %0d in %0d",
               iss2, last_iss - first_iss + 1, 4 * V, 4 * V);
    end
    $display("INFO in_stall=%0d wait=%0d out_stall=%0d wrap=%0d restart=%0d",
             n_in_stall, n_wait, n_out_stall, n_wrap, n_restart);
    checks += 5;
    if (n_in_stall == 0) failures++;
    if (n_wait == 0) failures++;
    if (n_out_stall == 0) failures++;
    if (n_wrap != 2) failures++;
    if (n_restart == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
