// hbm_reader: HBM-to-kernel stream. Lattice sites are stored in HBM as WORDS_PER_SITE
// consecutive 512-bit words (9 in double precision: 4 links x 18 reals x 64 bits = 4608
// bits); the reader collects them from up to PORTS memory ports per cycle and hands out
// complete site records.
//
// Input beat: in_cnt words on lanes 0..in_cnt-1 of in_data, lane 0 being the lowest-numbered
// word of the beat. A beat never spans two sites, so a site takes ceil(WORDS_PER_SITE/PORTS)
// beats: 2 cycles with 8 ports, 9 cycles with a single port. Word w of a site fills bits
// [512*w +: 512] of the site record.
// Output: site/site_valid held in a register until site_ready; in_ready is low only while a
// finished site is waiting. Port count and word width follow the source design (8 of the
// card's 512-bit HBM ports per chip region); the beat format stands in for the memory
// controller's AXI read channels, which are not modelled.
module hbm_reader
  import su3_pkg::*;
#(
  parameter int unsigned PORTS = 8,
  localparam int unsigned CW   = $clog2(PORTS + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [CW-1:0]              in_cnt,
  input  logic [PORTS-1:0][HBM_W-1:0] in_data,
  output logic                       in_ready,
  output logic                       site_valid,
  output site_t                      site,
  input  logic                       site_ready
);

  localparam int unsigned WPS = WORDS_PER_SITE;
  localparam int unsigned PW  = $clog2(WPS + 1);

  logic [WPS-1:0][HBM_W-1:0] asm_q, asm_d;
  logic [PW-1:0]             widx;
  logic                      take, complete;

  assign in_ready = !site_valid || site_ready;
  assign take     = in_valid && in_ready;
  assign complete = (int'(widx) + int'(in_cnt)) >= int'(WPS);

  always_comb begin
    asm_d = asm_q;
    for (int w = 0; w < int'(WPS); w++)
      for (int l = 0; l < int'(PORTS); l++)
        if (l < int'(in_cnt) && int'(widx) + l == w) asm_d[w] = in_data[l];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      widx       <= '0;
      site_valid <= 1'b0;
    end else begin
      if (site_valid && site_ready) site_valid <= 1'b0;
      if (take) begin
        if (complete) begin
          widx       <= '0;
          site_valid <= 1'b1;
        end else begin
          widx <= widx + PW'(in_cnt);
        end
      end
    end
    if (take) begin
      asm_q <= asm_d;
      if (complete) site <= site_t'(asm_d[WPS-1:0]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && in_valid) begin
      assert (in_cnt != '0 && int'(in_cnt) <= int'(PORTS))
        else $error("hbm_reader: beat with %0d words", in_cnt);
      assert (int'(widx) + int'(in_cnt) <= int'(WPS))
        else $error("hbm_reader: beat spans two sites");
    end
  end

endmodule
