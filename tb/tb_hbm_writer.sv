// tb_hbm_writer: self-checking testbench for hbm_writer on a 2x2x2x3 lattice (V = 24 sites)
// with 8 ports and a rotation of 2 slices. Two passes of random sites are fed with random
// gaps while the memory side applies random back-pressure; every accepted word is stored in
// a memory model, which must afterwards hold word w of stream site n at address
// 9 * ((n + 2*8) mod 24) + w. Each pass must end with exactly one done pulse, and with no
// back-pressure a site must take 2 beats (ceil(9 / 8)).
module tb_hbm_writer;
  import su3_pkg::*;
  import tb_su3_pkg::*;
  localparam int PORTS = 8;
  localparam int LX = 2, LY = 2, LZ = 2, LT = 3, ROT = 2;
  localparam int V3 = LX * LY * LZ;
  localparam int V = V3 * LT;
  localparam int WPS = WORDS_PER_SITE;
  localparam int ADDR_W = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic site_valid = 1'b0;
  site_t site;
  logic site_ready;
  logic [PORTS-1:0] out_valid;
  logic [PORTS-1:0][ADDR_W-1:0] out_addr;
  logic [PORTS-1:0][HBM_W-1:0] out_data;
  logic out_ready = 1'b0;
  logic done;
  logic [HBM_W-1:0] mem [int];
  site_t sites [V];
  int checks = 0, failures = 0, n_done = 0, beats = 0, writes = 0;
  bit stall = 1'b1;

  hbm_writer #(.PORTS(PORTS), .LX(LX), .LY(LY), .LZ(LZ), .LT(LT), .ROT(ROT)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n) begin
      if (done) n_done++;
      if (out_ready && |out_valid) begin
        beats++;
        for (int l = 0; l < PORTS; l++)
          if (out_valid[l]) begin
            mem[int'(out_addr[l])] = out_data[l];
            writes++;
          end
      end
    end
  end

  always @(negedge clk) out_ready <= stall ? (($urandom % 3) != 0) : 1'b1;

  task automatic run_pass(bit with_stalls);
    stall = with_stalls;
    mem.delete();
    beats = 0;
    writes = 0;
    for (int n = 0; n < V; n++) begin
      for (int i = 0; i < SITE_W / 32; i++) sites[n] = (sites[n] << 32) | SITE_W'($urandom);
      @(negedge clk);
      while (with_stalls && ($urandom % 3) == 0) begin
        site_valid = 1'b0;
        @(negedge clk);
      end
      site_valid = 1'b1;
      site = sites[n];
      do @(posedge clk); while (!site_ready);
    end
    @(negedge clk);
    site_valid = 1'b0;
    repeat (30) @(negedge clk);
    for (int n = 0; n < V; n++)
      for (int w = 0; w < WPS; w++) begin
        int a;
        a = ((n + ROT * V3) % V) * WPS + w;
        checks++;
        if (!mem.exists(a) || mem[a] !== site_word(sites[n], w)) begin
          failures++;
          $display("ERROR: site %0d word %0d missing or wrong at address %0d", n, w, a);
        end
      end
    checks++;
    if (writes != V * WPS) begin
      failures++;
      $display("ERROR: %0d words written, expected %0d", writes, V * WPS);
    end
    if (!with_stalls) begin
      checks++;
      if (beats != V * ((WPS + PORTS - 1) / PORTS)) begin
        failures++;
        $display("ERROR: %0d beats, expected %0d", beats, V * 2);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_pass(1'b1);
    run_pass(1'b0);
    checks++;
    if (n_done != 2) begin
      failures++;
      $display("ERROR: %0d done pulses, expected 2", n_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
