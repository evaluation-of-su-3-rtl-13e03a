// tb_link_buffer: self-checking testbench for link_buffer (DEPTH=24, NRD=3).
// Random writes and random multi-port reads against an array model: read data must appear
// one cycle after re, must hold while re is low, and a read of an address written in the
// same cycle must return the old contents.
module tb_link_buffer;
  import su3_pkg::*;
  localparam int DEPTH = 24;
  localparam int NRD = 3;
  localparam int AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0;
  site_t wdata;
  logic [AW-1:0] raddr [NRD];
  site_t rdata [NRD];
  site_t model [DEPTH];
  site_t expd [NRD];
  int checks = 0, failures = 0, n_same = 0;

  link_buffer #(.DEPTH(DEPTH), .NRD(NRD)) dut (.*);

  always #5 clk = ~clk;

  function automatic site_t rand_site();
    site_t s;
    for (int i = 0; i < SITE_W / 32; i++) s = (s << 32) | SITE_W'($urandom);
    return s;
  endfunction

  initial begin
    for (int i = 0; i < NRD; i++) raddr[i] = '0;
    // fill the whole buffer
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = rand_site(); model[a] = wdata;
    end
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      // check what the previous cycle's read returned
      if (i > 0) begin
        for (int p = 0; p < NRD; p++) begin
          checks++;
          if (rdata[p] !== expd[p]) begin
            failures++;
            $display("ERROR: port %0d read wrong data at step %0d", p, i);
          end
        end
      end
      re = ($urandom % 4) != 0;
      we = ($urandom % 2) != 0;
      waddr = AW'($urandom % DEPTH);
      wdata = rand_site();
      for (int p = 0; p < NRD; p++) begin
        raddr[p] = (p == 0 && we) ? waddr : AW'($urandom % DEPTH);
        if (re) expd[p] = model[raddr[p]];
      end
      if (re && we) n_same++;
      if (we) model[waddr] = wdata;
    end
    checks++;
    if (n_same == 0) failures++;
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
