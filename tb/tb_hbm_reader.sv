// tb_hbm_reader: self-checking testbench for hbm_reader with the default 8 ports.
// Random sites are cut into 512-bit words and sent as beats of at most 8 words (in phase 1
// always full beats, giving 2 beats per 9-word site; in phase 2 random beat sizes, random
// gaps and random back-pressure on the site output). Each assembled site must equal the
// site sent, in order; with full beats and no back-pressure a site must be delivered every
// 2 cycles (ceil(9 / 8)).
module tb_hbm_reader;
  import su3_pkg::*;
  import tb_su3_pkg::*;
  localparam int PORTS = 8;
  localparam int CW = $clog2(PORTS + 1);
  localparam int WPS = WORDS_PER_SITE;
  localparam int NSITE = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [CW-1:0] in_cnt = '0;
  logic [PORTS-1:0][HBM_W-1:0] in_data;
  logic in_ready, site_valid, site_ready = 1'b1;
  site_t site;
  site_t sent [$];
  int checks = 0, failures = 0, got = 0, cyc = 0, last_cyc = -1, n_gap2 = 0;
  bit phase2 = 1'b0;
  bit drain = 1'b0;

  hbm_reader #(.PORTS(PORTS)) dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) site_ready <= (phase2 && !drain) ? (($urandom % 3) != 0) : 1'b1;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && site_valid && site_ready) begin
      checks++;
      if (sent.size() == 0 || site !== sent[0]) begin
        failures++;
        $display("ERROR: site %0d differs", got);
      end
      if (sent.size() != 0) void'(sent.pop_front());
      if (!phase2 && last_cyc >= 0) begin
        checks++;
        if (cyc - last_cyc != 2) begin
          failures++;
          $display("ERROR: site interval %0d cycles, expected 2", cyc - last_cyc);
        end else n_gap2++;
      end
      last_cyc = cyc;
      got++;
    end
  end

  initial begin
    site_t s;
    int w, c;
    in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NSITE; n++) begin
      if (n == NSITE / 2) phase2 = 1'b1;
      for (int i = 0; i < SITE_W / 32; i++) s = (s << 32) | SITE_W'($urandom);
      sent.push_back(s);
      w = 0;
      while (w < WPS) begin
        @(negedge clk);
        if (phase2 && ($urandom % 4) == 0) begin
          in_valid = 1'b0;
          continue;
        end
        c = (WPS - w < PORTS) ? WPS - w : PORTS;
        if (phase2) c = 1 + ($urandom % c);
        in_valid = 1'b1;
        in_cnt = CW'(c);
        in_data = '0;
        for (int l = 0; l < c; l++) in_data[l] = site_word(s, w + l);
        do @(posedge clk); while (!in_ready);
        w += c;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    drain = 1'b1;
    repeat (5) @(negedge clk);
    checks++;
    if (got != NSITE || n_gap2 < NSITE / 2 - 2) begin
      failures++;
      $display("ERROR: %0d sites received, %0d at full rate", got, n_gap2);
    end
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
