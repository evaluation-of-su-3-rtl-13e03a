// link_buffer: on-chip store for the part of the lattice a smearing kernel is working on.
//
// Each entry holds one lattice site (its four links, site_t). The kernel writes arriving
// sites through the single write port and fetches, per link it smears, the NRD sites that
// link's six staples touch through NRD read ports. Reads are synchronous: rdata is valid one
// cycle after re, as in block or ultra RAM; a read and a write of the same address in one
// cycle return the old contents. The address map (which time slice lives in which group of
// entries) is decided by the kernel: the buffer is the cyclic, FIFO-like window of the
// source design, with the slot arithmetic kept outside so the memory itself stays a plain
// multi-read-port RAM.
module link_buffer
  import su3_pkg::*;
#(
  parameter int unsigned DEPTH = 384,
  parameter int unsigned NRD   = 11,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  site_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr [NRD],
  output site_t         rdata [NRD]
);

  site_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar i = 0; i < NRD; i++) begin : g_rd
    always_ff @(posedge clk) begin
      if (re) rdata[i] <= mem[raddr[i]];
    end
  end

endmodule
