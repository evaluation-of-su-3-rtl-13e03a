// tb_ape_smearing_top_full: end-to-end testbench of ape_smearing_top with all parameters at their defaults (4x4x4x8 lattice, 2 kernels, 8 ports).
// An HBM model holds a random lattice as 9 words per site; the read side streams it in site
// order as beats of up to PORTS words, with random gaps; the write side accepts beats with
// random back-pressure into a second memory. After the pass the written lattice must equal
// NKERNEL iterations of the double-precision APE smearing model (tb_su3_pkg), site by site
// at the addresses the reader used, and done must pulse once. The test counts the design's
// mechanisms and fails if one never happened: read back-pressure, kernel input stalls
// (buffer window full), issue waiting for slices, output stalls, the torus wrap in every
// kernel, kernel-to-kernel transfers and multi-beat writes.
module tb_ape_smearing_top_full;
  import su3_pkg::*;
  import tb_su3_pkg::*;
  localparam int NKERNEL = 2;
  localparam int PORTS = 8;
  localparam int LX = 4, LY = 4, LZ = 4, LT = 8;
  localparam int V3 = LX * LY * LZ;
  localparam int V = V3 * LT;
  localparam int WPS = WORDS_PER_SITE;
  localparam int CW = $clog2(PORTS + 1);
  localparam real COEF = 0.5;

  logic clk = 1'b0, rst_n = 1'b0;
  fp_t coef;
  logic rd_valid = 1'b0;
  logic [CW-1:0] rd_cnt = '0;
  logic [PORTS-1:0][HBM_W-1:0] rd_data;
  logic rd_ready;
  logic [PORTS-1:0] wr_valid;
  logic [PORTS-1:0][31:0] wr_addr;
  logic [PORTS-1:0][HBM_W-1:0] wr_data;
  logic wr_ready = 1'b0;
  logic done;

  site_t lat [];
  site_t mid [];
  site_t fin [];
  logic [HBM_W-1:0] wmem [int];
  int checks = 0, failures = 0, cyc = 0, n_done = 0;
  int n_rd_stall = 0, n_win_full = 0, n_wait = 0, n_out_stall = 0, n_k2k = 0, n_multi = 0;
  int n_wrap [NKERNEL];

  ape_smearing_top dut (
    .clk, .rst_n, .coef, .rd_valid, .rd_cnt, .rd_data, .rd_ready,
    .wr_valid, .wr_addr, .wr_data, .wr_ready, .done
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) wr_ready <= ($urandom % 4) == 0;

  for (genvar i = 0; i < NKERNEL; i++) begin : g_mon
    initial n_wrap[i] = 0;
    always @(posedge clk) begin
      if (rst_n) begin
        if (dut.g_iter[i].u_kernel.in_valid && !dut.g_iter[i].u_kernel.in_ready) n_win_full++;
        if (!dut.g_iter[i].u_kernel.can_issue) n_wait++;
        if (!dut.g_iter[i].u_kernel.en) n_out_stall++;
        if (dut.g_iter[i].u_kernel.issue && dut.g_iter[i].u_kernel.last_link) n_wrap[i]++;
        if (i > 0 && dut.g_iter[i].u_kernel.in_valid && dut.g_iter[i].u_kernel.in_ready) n_k2k++;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (rd_valid && !rd_ready) n_rd_stall++;
      if (done) n_done++;
      if (wr_ready && |wr_valid) begin
        if (dut.u_wr.wpos != 0) n_multi++;
        for (int l = 0; l < PORTS; l++)
          if (wr_valid[l]) wmem[int'(wr_addr[l])] = wr_data[l];
      end
    end
  end

  initial begin
    int w, c;
    coef = r2fp(COEF);
    lat = new[V];
    mid = new[V];
    fin = new[V];
    for (int i = 0; i < V; i++) lat[i] = rand_site_su3();
    smear_lattice(lat, mid, LX, LY, LZ, LT, COEF);
    smear_lattice(mid, fin, LX, LY, LZ, LT, COEF);
    rd_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < V; n++) begin
      w = 0;
      while (w < WPS) begin
        @(negedge clk);
        if (($urandom % 5) == 0) begin
          rd_valid = 1'b0;
          continue;
        end
        c = (WPS - w < PORTS) ? WPS - w : PORTS;
        rd_valid = 1'b1;
        rd_cnt = CW'(c);
        for (int l = 0; l < PORTS; l++) rd_data[l] = (l < c) ? site_word(lat[n], w + l) : '0;
        do @(posedge clk); while (!rd_ready);
        w += c;
      end
    end
    @(negedge clk);
    rd_valid = 1'b0;
    while (n_done == 0) @(negedge clk);
    repeat (10) @(negedge clk);
    for (int n = 0; n < V; n++) begin
      site_t g;
      logic [SITE_W-1:0] gf;
      bit miss;
      miss = 1'b0;
      for (int q = WPS - 1; q >= 0; q--) begin
        if (!wmem.exists(n * WPS + q)) miss = 1'b1;
        gf = (gf << HBM_W) | SITE_W'(wmem.exists(n * WPS + q) ? wmem[n * WPS + q] : '0);
      end
      g = gf;
      checks++;
      if (miss || site_err(g, fin[n]) > 1e-9) begin
        failures++;
        $display("ERROR: site %0d wrong after %0d iterations (missing=%0d err=%g)",
                 n, NKERNEL, miss, site_err(g, fin[n]));
      end
    end
    checks++;
    if (n_done != 1) failures++;
    $display("MECH read_stall=%0d window_full=%0d issue_wait=%0d out_stall=%0d k2k=%0d multibeat=%0d wrap0=%0d wrap1=%0d cycles=%0d",
             n_rd_stall, n_win_full, n_wait, n_out_stall, n_k2k, n_multi, n_wrap[0], n_wrap[1], cyc);
    checks += 6 + NKERNEL;
    if (n_rd_stall == 0) failures++;
    if (n_win_full == 0) failures++;
    if (n_wait == 0) failures++;
    if (n_out_stall == 0) failures++;
    if (n_k2k != V) failures++;
    if (n_multi == 0) failures++;
    for (int i = 0; i < NKERNEL; i++) if (n_wrap[i] != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
