// hbm_writer: kernel-to-HBM stream. Takes the smeared sites leaving the last kernel and
// writes each back as WORDS_PER_SITE 512-bit words, up to PORTS words per cycle, each with
// its HBM word address.
//
// The kernels emit time slices in rotated order (each kernel outputs slice 1 first and
// slice 0 last, see ape_kernel), so after ROT kernels the n-th site of the stream belongs to
// lattice site (n + ROT*V3) mod V, V3 = LX*LY*LZ, V = V3*LT. The writer undoes that rotation:
// word w of lattice site i goes to address BASE + WORDS_PER_SITE*i + w, matching the layout
// hbm_reader expects, so the result can be read back for the next pass.
// Handshake: site_ready is high when no site is held or the held site's last beat is
// accepted (out_ready) in this cycle. A beat is out_valid[l] for lanes l carrying a word,
// and is held until out_ready. done is high for one cycle after the last word of the lattice
// has been accepted. The port count follows the source design; the address map is this
// design's choice.
module hbm_writer
  import su3_pkg::*;
#(
  parameter int unsigned PORTS  = 8,
  parameter int unsigned LX     = 4,
  parameter int unsigned LY     = 4,
  parameter int unsigned LZ     = 4,
  parameter int unsigned LT     = 8,
  parameter int unsigned ROT    = 2,
  parameter int unsigned ADDR_W = 32,
  parameter logic [ADDR_W-1:0] BASE = '0
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              site_valid,
  input  site_t                             site,
  output logic                              site_ready,
  output logic [PORTS-1:0]                  out_valid,
  output logic [PORTS-1:0][ADDR_W-1:0]      out_addr,
  output logic [PORTS-1:0][HBM_W-1:0]       out_data,
  input  logic                              out_ready,
  output logic                              done
);

  localparam int unsigned WPS = WORDS_PER_SITE;
  localparam int unsigned V3  = LX * LY * LZ;
  localparam int unsigned V   = V3 * LT;
  localparam int unsigned NW  = $clog2(V + 1);
  localparam int unsigned PW  = $clog2(WPS + PORTS + 1);

  logic [WPS-1:0][HBM_W-1:0] held;
  logic                      busy;
  logic [PW-1:0]             wpos;
  logic [NW-1:0]             n;       // stream position of the held site
  logic [NW-1:0]             lat_i;   // lattice index of the held site
  logic                      last_beat, beat_fire;

  always_comb begin
    lat_i = NW'((int'(n) + int'(ROT % LT) * int'(V3)) % int'(V));
  end

  always_comb begin
    for (int l = 0; l < int'(PORTS); l++) begin
      out_valid[l] = busy && (int'(wpos) + l < int'(WPS));
      out_addr[l]  = BASE + ADDR_W'(int'(lat_i) * int'(WPS) + int'(wpos) + l);
      out_data[l]  = (int'(wpos) + l < int'(WPS)) ? held[int'(wpos) + l] : '0;
    end
  end

  assign last_beat  = int'(wpos) + int'(PORTS) >= int'(WPS);
  assign beat_fire  = busy && out_ready;
  assign site_ready = !busy || (beat_fire && last_beat);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      wpos <= '0;
      n    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (beat_fire) begin
        if (last_beat) begin
          busy <= 1'b0;
          wpos <= '0;
          if (int'(n) == int'(V) - 1) begin
            n    <= '0;
            done <= 1'b1;
          end else begin
            n <= n + 1'b1;
          end
        end else begin
          wpos <= wpos + PW'(PORTS);
        end
      end
      if (site_valid && site_ready) busy <= 1'b1;
    end
    if (site_valid && site_ready) held <= (WPS*HBM_W)'(site);
  end

endmodule
