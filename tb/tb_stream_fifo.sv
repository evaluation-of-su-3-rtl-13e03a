// tb_stream_fifo: self-checking testbench for stream_fifo (W=16, DEPTH=4).
// Random pushes and pops; a queue model checks data order, out_valid ("not empty"),
// in_ready ("not full or being read") and that a full queue accepts a push in the cycle it
// is read. Counts full and simultaneous push/pop events and requires both to occur.
module tb_stream_fifo;
  localparam int W = 16;
  localparam int DEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_ready = 1'b0;
  logic [W-1:0] in_data = '0;
  logic in_ready, out_valid;
  logic [W-1:0] out_data;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0, n_full = 0, n_both = 0;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("ERROR: %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      int sz;
      sz = model.size();
      chk(out_valid == (model.size() != 0), "out_valid");
      chk(in_ready == (model.size() < DEPTH || out_ready), "in_ready");
      if (out_valid && out_ready) begin
        if (model.size() != 0) begin
          chk(out_data == model[0], "data order");
          void'(model.pop_front());
        end
      end
      if (in_valid && in_ready) begin
        if (sz == DEPTH) n_full++;
        model.push_back(in_data);
      end
      if (in_valid && in_ready && out_valid && out_ready) n_both++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 4) != 0;
      in_data   = W'($urandom);
      out_ready = (i % 200 < 100) ? (($urandom % 3) == 0) : (($urandom % 4) != 0);
    end
    chk(n_full > 0, "full queue never pushed while read");
    chk(n_both > 0, "no simultaneous push and pop");
    $display("INFO full_push=%0d push_pop=%0d", n_full, n_both);
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
