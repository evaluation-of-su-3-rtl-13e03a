// stream_fifo: synchronous first-in first-out queue with valid/ready handshakes on both
// sides. It carries the stream of smeared sites out of a kernel, to the next kernel of the
// iteration chain or to the HBM writer.
//
// A transfer happens on a side in every cycle where valid and ready are both high.
// out_valid is "not empty"; in_ready is "not full, or an entry leaves this cycle", so a full
// queue that is being read accepts a new entry in the same cycle. Data written in a cycle can be read out the
// next cycle (one cycle of latency, no bypass).
module stream_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready
);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic push, pop;

  assign in_ready  = (cnt != (AW+1)'(DEPTH)) || out_ready;
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];
  assign pop  = out_valid && out_ready;
  assign push = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(pop && cnt == '0)) else $error("stream_fifo: pop from empty queue");
      assert (cnt <= (AW+1)'(DEPTH)) else $error("stream_fifo: occupancy above DEPTH");
    end
  end

endmodule
