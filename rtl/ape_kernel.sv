// ape_kernel: one APE smearing iteration over a whole LX x LY x LZ x LT periodic lattice,
// consuming a stream of sites and producing the stream of smeared sites.
//
// Every link is replaced by  P_SU(3)[ U_mu(x) + coef * sum of its six staples ].
// Sites arrive one per in_valid/in_ready transfer in lexicographic order (x fastest, t
// slowest) and are written to the link_buffer, which is organised in time slices of
// V3 = LX*LY*LZ sites: slots 0 and 1 keep slices 0 and 1 for the whole pass (they are the
// +t neighbours of the last slices of the torus), slots 2..5 form a rolling window for
// slices 2, 3, ... (slice t in slot 2 + (t-2) mod 4).
// Links are smeared in the order slice 1, 2, ..., LT-1, 0 (processing index k gives slice
// p = (k+1) mod LT); within a slice site by site and, per site, mu = x, y, z, t. Smearing
// slice p needs slices p-1, p, p+1, so index k may start once min(k+3, LT) slices are
// complete, and slice w may be written once w <= k+3, which lets the load of the next slice
// overlap the computation of the current one. At the end of a pass both sides restart, so
// lattices (or iterations) can follow back to back. The output stream is therefore rotated
// by one time slice: the next kernel of a chain simply sees slice 1 as its slice 0.
//
// Per issued link, 11 sites are read (x, x+mu and, for each nu != mu, x+nu, x-nu, x+mu-nu),
// the six staples are built by multiply_by_staple (7 stages), projected by su3_projection
// (4 stages), and the four links of a site are collected into one output record pushed into
// a stream_fifo. The whole datapath advances on en = "output queue can accept", so
// back-pressure stalls it without losing data. Throughput: one link per cycle, four cycles
// per site; latency from issue to the queue 1 + 7 + 4 cycles.
// From the source design: one kernel per smearing iteration, kernels chained by streams,
// six staple units working in parallel, neighbours held in an on-chip cyclic buffer.
// This design's own: the slice-slot buffer layout, the torus handling by rotation, the
// processing order, the one-link-per-cycle rate and the stall scheme.
module ape_kernel
  import su3_pkg::*;
#(
  parameter int unsigned LX = 4,
  parameter int unsigned LY = 4,
  parameter int unsigned LZ = 4,
  parameter int unsigned LT = 8,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  fp_t   coef,
  input  logic  in_valid,
  input  site_t in_site,
  output logic  in_ready,
  output logic  out_valid,
  output site_t out_site,
  input  logic  out_ready
);

  localparam int unsigned V3    = LX * LY * LZ;
  localparam int unsigned DEPTH = 6 * V3;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NRD   = 11;
  localparam int unsigned CW    = 16;

  if (LT < 3) begin : g_bad_lt
    $error("ape_kernel: LT must be at least 3");
  end

  // ---------------------------------------------------------------- address helpers
  typedef logic [CW-1:0] cnt_t;
  typedef cnt_t coord_t [4];

  function automatic int unsigned slot_of(int unsigned t);
    return (t < 2) ? t : 2 + ((t - 2) % 4);
  endfunction

  function automatic logic [AW-1:0] addr_of(coord_t c);
    return AW'(slot_of(int'(c[3])) * V3 + int'(c[0]) + LX * (int'(c[1]) + LY * int'(c[2])));
  endfunction

  function automatic int unsigned dim_len(int unsigned d);
    case (d)
      0:       return LX;
      1:       return LY;
      2:       return LZ;
      default: return LT;
    endcase
  endfunction

  // Neighbour c + delta * e_dir on the torus.
  function automatic coord_t step(coord_t c, int unsigned dir, int delta);
    coord_t r;
    int     v;
    r = c;
    v = int'(c[dir]) + delta;
    if (v < 0) v = v + int'(dim_len(dir));
    if (v >= int'(dim_len(dir))) v = v - int'(dim_len(dir));
    r[dir] = CW'(v);
    return r;
  endfunction

  // j-th direction different from mu
  function automatic int unsigned perp(int unsigned mu, int unsigned j);
    return (j < mu) ? j : j + 1;
  endfunction

  // ---------------------------------------------------------------- write side
  cnt_t w_s, w_t;           // next site in slice, slices complete
  cnt_t k;                  // processing index
  logic do_write;

  assign in_ready = (int'(w_t) < int'(LT)) && (int'(w_t) <= int'(k) + 3);
  assign do_write = in_valid && in_ready;

  // ---------------------------------------------------------------- issue side
  cnt_t ix, iy, iz;
  logic [1:0] mu;
  logic en, can_issue, issue, last_link;
  int unsigned need;
  coord_t xc;
  logic [AW-1:0] raddr [NRD];
  logic [AW-1:0] waddr;
  coord_t wc;

  always_comb begin
    need      = (int'(k) + 3 < int'(LT)) ? int'(k) + 3 : LT;
    can_issue = int'(w_t) >= int'(need);
    issue     = en && can_issue;
    last_link = (mu == 2'd3) && (int'(ix) == LX - 1) && (int'(iy) == LY - 1) &&
                (int'(iz) == LZ - 1) && (int'(k) == LT - 1);
    xc[0] = ix;
    xc[1] = iy;
    xc[2] = iz;
    xc[3] = (int'(k) == LT - 1) ? '0 : k + 1'b1;
    raddr[0] = addr_of(xc);
    raddr[1] = addr_of(step(xc, 32'(mu), 1));
    for (int j = 0; j < 3; j++) begin
      raddr[2+j] = addr_of(step(xc, perp(32'(mu), j), 1));
      raddr[5+j] = addr_of(step(xc, perp(32'(mu), j), -1));
      raddr[8+j] = addr_of(step(step(xc, 32'(mu), 1), perp(32'(mu), j), -1));
    end
    wc[0] = '0;
    wc[1] = '0;
    wc[2] = '0;
    wc[3] = w_t;
    waddr = AW'(int'(addr_of(wc)) + int'(w_s));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_s <= '0;
      w_t <= '0;
      k   <= '0;
      ix  <= '0;
      iy  <= '0;
      iz  <= '0;
      mu  <= '0;
    end else begin
      if (do_write) begin
        if (int'(w_s) == int'(V3) - 1) begin
          w_s <= '0;
          w_t <= w_t + 1'b1;
        end else begin
          w_s <= w_s + 1'b1;
        end
      end
      if (issue) begin
        mu <= mu + 1'b1;
        if (mu == 2'd3) begin
          if (int'(ix) != LX - 1) ix <= ix + 1'b1;
          else begin
            ix <= '0;
            if (int'(iy) != LY - 1) iy <= iy + 1'b1;
            else begin
              iy <= '0;
              if (int'(iz) != LZ - 1) iz <= iz + 1'b1;
              else begin
                iz <= '0;
                k  <= (int'(k) == LT - 1) ? '0 : k + 1'b1;
              end
            end
          end
        end
        // end of the pass: the write side restarts for the next lattice
        if (last_link) begin
          w_t <= '0;
          w_s <= '0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(issue && last_link && do_write))
        else $error("ape_kernel: write during the last link of a pass");
    end
  end

  // ---------------------------------------------------------------- buffer
  site_t rdata [NRD];

  link_buffer #(.DEPTH(DEPTH), .NRD(NRD)) u_buf (
    .clk, .we(do_write), .waddr, .wdata(in_site), .re(en), .raddr, .rdata
  );

  logic       rd_v;
  logic [1:0] mu_r;

  always_ff @(posedge clk) begin
    if (!rst_n) rd_v <= 1'b0;
    else if (en) rd_v <= issue;
    if (en) mu_r <= mu;
  end

  // ---------------------------------------------------------------- operand selection
  su3_t u_l;
  su3_t fwd_l [3][3];
  su3_t bwd_l [3][3];

  always_comb begin
    u_l = rdata[0][mu_r];
    for (int j = 0; j < 3; j++) begin
      fwd_l[j][0] = rdata[1][perp(32'(mu_r), j)];     // U_nu(x+mu)
      fwd_l[j][1] = rdata[2+j][mu_r];            // U_mu(x+nu)
      fwd_l[j][2] = rdata[0][perp(32'(mu_r), j)];     // U_nu(x)
      bwd_l[j][0] = rdata[8+j][perp(32'(mu_r), j)];   // U_nu(x+mu-nu)
      bwd_l[j][1] = rdata[5+j][mu_r];            // U_mu(x-nu)
      bwd_l[j][2] = rdata[5+j][perp(32'(mu_r), j)];   // U_nu(x-nu)
    end
  end

  // ---------------------------------------------------------------- datapath
  logic s_v, p_v;
  su3_t s_y, p_y;

  multiply_by_staple u_mbs (
    .clk, .rst_n, .en, .in_valid(rd_v), .u(u_l), .fwd_l, .bwd_l, .coef,
    .out_valid(s_v), .y(s_y)
  );

  su3_projection u_proj (
    .clk, .rst_n, .en, .in_valid(s_v), .a(s_y), .out_valid(p_v), .y(p_y)
  );

  // ---------------------------------------------------------------- site collector
  su3_t       col [3];
  logic [1:0] lcnt;
  logic       push, q_ready;
  site_t      push_site;

  assign en   = q_ready;
  assign push = en && p_v && (lcnt == 2'd3);

  always_comb begin
    push_site[0] = col[0];
    push_site[1] = col[1];
    push_site[2] = col[2];
    push_site[3] = p_y;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) lcnt <= '0;
    else if (en && p_v) lcnt <= lcnt + 1'b1;
    if (en && p_v && lcnt != 2'd3) col[lcnt] <= p_y;
  end

  stream_fifo #(.W(SITE_W), .DEPTH(FIFO_DEPTH)) u_q (
    .clk, .rst_n, .in_valid(push), .in_data(push_site), .in_ready(q_ready),
    .out_valid, .out_data(out_site), .out_ready
  );

endmodule
