// stencil_pe: one compute Processing Element, i.e. one time step of a
// star-shaped stencil of radius RAD over a stream of spatial blocks.
//
// Data arrive as vectors of PAR_VEC consecutive cells in x, in the order
// block, streamed coordinate (y in 2D, z in 3D), row inside the block (3D
// only), x vector. Each vector is pushed into pe_shift_buffer; the cell
// updated is the one RAD planes (rows in 2D) behind the newest, so the buffer
// holds every neighbour from "south/below" RAD planes back to "north/above"
// RAD planes ahead. Per block the PE runs (NS + RAD) * plane/PAR_VEC
// iterations, NS being the grid size along the streamed dimension: the first
// NS*plane/PAR_VEC take an input vector, the last RAD planes shift in zeros to
// flush the block, and every iteration after the first RAD planes emits one
// output vector. Input and output streams therefore hold the same vectors in
// the same order, and PEs can be chained as in the paper (Fig. 2).
//
// Boundary condition (paper, Sec. III.B): a neighbour outside the grid falls
// back on the border cell, so the i-th west neighbour of a cell at global x
// is taken at distance min(i, x), and likewise in every direction. The paper
// generates these selections with a code generator; here they are generate
// loops of small multiplexers. Cells at the inner edges of a block read
// whatever lies next to them in the buffer; they belong to the halo
// (PAR_TIME*RAD cells wide) that overlapped blocking throws away.
//
// Each cell update is the chain of eq. (1): cc*fc, then for i = 1..RAD the
// terms w, e, s, n (and b, a in 3D), added left to right with no reordering,
// one fp_mac (one DSP) per term, 4*RAD+1 (2D) or 6*RAD+1 (3D) per lane. The
// chain is pipelined with one register stage per term. The whole pipeline
// advances together and stops only when its last stage holds a result the
// consumer does not take (out_valid && !out_ready).
//
// With bypass high the PE outputs each centre cell unchanged (same timing),
// so a pass can apply fewer time steps than there are PEs: the paper runs
// 1000 iterations with PE counts that do not divide 1000. bypass must be
// stable during a pass.
//
// Interface: valid/ready streams of PAR_VEC*32-bit vectors, lane 0 in the low
// bits. cfg and coef must be stable while a pass runs; start clears the
// iteration counters. Latency from an input vector to the output vector
// centred on it: RAD planes of input plus NT+2 cycles.
module stencil_pe
  import stencil_pkg::*;
#(
  parameter int unsigned DIM      = 2,
  parameter int unsigned RAD      = 4,
  parameter int unsigned BSIZE_X  = 4096,
  parameter int unsigned BSIZE_Y  = 128,
  parameter int unsigned PAR_VEC  = 4,
  parameter int unsigned PAR_TIME = 22
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  grid_cfg_t               cfg,
  input  coef_t                   coef,
  input  logic                    bypass,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [PAR_VEC*32-1:0]   in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [PAR_VEC*32-1:0]   out_data
);
  localparam int unsigned VW     = PAR_VEC * 32;
  localparam int unsigned RV     = BSIZE_X / PAR_VEC;                 // vectors per block row
  localparam int unsigned YL     = (DIM == 3) ? BSIZE_Y : 1;          // rows per plane
  localparam int unsigned PL     = RV * YL;                           // vectors per plane
  localparam int unsigned HALO   = PAR_TIME * RAD;
  localparam int unsigned CX     = BSIZE_X - 2 * HALO;                // compute block, eq. (2)
  localparam int unsigned CY     = (DIM == 3) ? BSIZE_Y - 2 * HALO : 1;
  localparam int unsigned KX     = (RAD + PAR_VEC - 1) / PAR_VEC;     // x vectors each side
  localparam int unsigned NS_TAP = 2 * RAD + 1;
  localparam int unsigned NY_TAP = (DIM == 3) ? 2 * RAD : 0;
  localparam int unsigned NX_TAP = 2 * KX;
  localparam int unsigned NTAP   = NS_TAP + NY_TAP + NX_TAP;
  localparam int unsigned DEPTH  = 2 * RAD * PL + 1;                  // eq. (7) in vectors
  localparam int unsigned NT     = 1 + 2 * DIM * RAD;                 // terms per cell update
  localparam int unsigned NXC    = (2 * KX + 1) * PAR_VEC;            // cells of the x window

  // tap distances (in shifts) from the newest vector; the centre is RAD*PL back
  function automatic logic [NTAP*32-1:0] make_taps();
    logic [NTAP*32-1:0] t;
    int o;
    t = '0;
    for (int j = 0; j < int'(NS_TAP); j++)
      t[j*32 +: 32] = 32'((2 * int'(RAD) - j) * int'(PL));
    for (int m = 0; m < int'(NY_TAP); m++) begin
      o = (m < int'(RAD)) ? m - int'(RAD) : m - int'(RAD) + 1;
      t[(NS_TAP + m)*32 +: 32] = 32'(int'(RAD * PL) - o * int'(RV));
    end
    for (int m = 0; m < int'(NX_TAP); m++) begin
      o = (m < int'(KX)) ? m - int'(KX) : m - int'(KX) + 1;
      t[(NS_TAP + NY_TAP + m)*32 +: 32] = 32'(int'(RAD * PL) - o);
    end
    return t;
  endfunction
  localparam logic [NTAP*32-1:0] TAPS = make_taps();

  // ---------------------------------------------------------------- iteration
  logic [31:0] xv, yl, sc, bx, by;
  logic [31:0] ns;
  logic        need_in, fire, adv;
  logic        last_x, last_y, last_s, last_bx;

  assign ns      = (DIM == 3) ? cfg.nz : cfg.ny;
  assign need_in = (sc < ns);
  assign in_ready = adv && need_in;
  assign fire    = adv && (!need_in || in_valid);
  assign last_x  = (xv == 32'(RV - 1));
  assign last_y  = (yl == 32'(YL - 1));
  assign last_s  = (sc == ns + 32'(RAD) - 32'd1);
  assign last_bx = (bx == cfg.nbx - 32'd1);

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      xv <= '0; yl <= '0; sc <= '0; bx <= '0; by <= '0;
    end else if (fire) begin
      xv <= last_x ? '0 : xv + 32'd1;
      if (last_x) begin
        yl <= last_y ? '0 : yl + 32'd1;
        if (last_y) begin
          sc <= last_s ? '0 : sc + 32'd1;
          if (last_s) begin
            bx <= last_bx ? '0 : bx + 32'd1;
            if (last_bx)
              by <= (by == cfg.nby - 32'd1) ? '0 : by + 32'd1;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ shift buffer
  logic [VW-1:0] tap_q [NTAP];

  pe_shift_buffer #(.W(VW), .DEPTH(DEPTH), .NTAP(NTAP), .TAPS(TAPS)) u_buf (
    .clk, .rst_n,
    .shift_en (fire),
    .din      (need_in ? in_data : '0),
    .tap_q
  );

  // stage G: coordinates of the centre vector of the window in tap_q
  logic g_valid;
  int   g_gx, g_gy, g_gs;

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      g_valid <= 1'b0;
      g_gx <= 0; g_gy <= 0; g_gs <= 0;
    end else if (adv) begin
      g_valid <= fire && (sc >= 32'(RAD));
      g_gx    <= int'(bx) * int'(CX) - int'(HALO) + int'(xv) * int'(PAR_VEC);
      g_gy    <= (DIM == 3) ? int'(by) * int'(CY) - int'(HALO) + int'(yl) : int'(sc) - int'(RAD);
      g_gs    <= int'(sc) - int'(RAD);
    end
  end

  // ------------------------------------------------- neighbour gather (comb.)
  fp32_t svec [NS_TAP][PAR_VEC];        // streamed dimension, offset j-RAD
  fp32_t yvec [2*RAD+1][PAR_VEC];       // y inside the plane (3D), offset m-RAD
  fp32_t xcel [NXC];                    // cells of the centre row around the vector
  fp32_t gat  [NT][PAR_VEC];
  fp32_t coef_t_arr [NT];

  always_comb begin
    for (int j = 0; j < int'(NS_TAP); j++)
      for (int l = 0; l < int'(PAR_VEC); l++)
        svec[j][l] = tap_q[j][l*32 +: 32];
    for (int m = 0; m < int'(2*RAD+1); m++)
      for (int l = 0; l < int'(PAR_VEC); l++) begin
        if (m == int'(RAD) || DIM != 3)
          yvec[m][l] = svec[RAD][l];
        else if (m < int'(RAD))
          yvec[m][l] = tap_q[NS_TAP + m][l*32 +: 32];
        else
          yvec[m][l] = tap_q[NS_TAP + m - 1][l*32 +: 32];
      end
    for (int m = 0; m < int'(2*KX+1); m++)
      for (int l = 0; l < int'(PAR_VEC); l++) begin
        if (m == int'(KX))
          xcel[m*PAR_VEC + l] = svec[RAD][l];
        else if (m < int'(KX))
          xcel[m*PAR_VEC + l] = tap_q[NS_TAP + NY_TAP + m][l*32 +: 32];
        else
          xcel[m*PAR_VEC + l] = tap_q[NS_TAP + NY_TAP + m - 1][l*32 +: 32];
      end
  end

  always_comb begin
    int unsigned dw, de, ds, dn, dy0, dy1, base;
    int gx;
    dy0 = 0; dy1 = 0;
    ds  = clamp_dist(g_gs, RAD);
    dn  = clamp_dist(int'(ns) - 1 - g_gs, RAD);
    if (DIM == 3) begin
      dy0 = clamp_dist(g_gy, RAD);
      dy1 = clamp_dist(int'(cfg.ny) - 1 - g_gy, RAD);
    end
    coef_t_arr[0] = coef.cc;
    for (int l = 0; l < int'(PAR_VEC); l++) begin
      gx = g_gx + l;
      dw = clamp_dist(gx, RAD);
      de = clamp_dist(int'(cfg.nx) - 1 - gx, RAD);
      gat[0][l] = svec[RAD][l];
      for (int i = 1; i <= int'(RAD); i++) begin
        base = 1 + (i - 1) * 2 * DIM;
        gat[base + 0][l] = xcel[int'(KX*PAR_VEC) + l - ((i < int'(dw)) ? i : int'(dw))];
        gat[base + 1][l] = xcel[int'(KX*PAR_VEC) + l + ((i < int'(de)) ? i : int'(de))];
        coef_t_arr[base + 0] = coef.cw;
        coef_t_arr[base + 1] = coef.ce;
        coef_t_arr[base + 2] = coef.cs;
        coef_t_arr[base + 3] = coef.cn;
        if (DIM == 3) begin
          gat[base + 2][l] = yvec[int'(RAD) - ((i < int'(dy0)) ? i : int'(dy0))][l];
          gat[base + 3][l] = yvec[int'(RAD) + ((i < int'(dy1)) ? i : int'(dy1))][l];
          gat[base + 4][l] = svec[int'(RAD) - ((i < int'(ds)) ? i : int'(ds))][l];
          gat[base + 5][l] = svec[int'(RAD) + ((i < int'(dn)) ? i : int'(dn))][l];
          coef_t_arr[base + 4] = coef.cb;
          coef_t_arr[base + 5] = coef.ca;
        end else begin
          gat[base + 2][l] = svec[int'(RAD) - ((i < int'(ds)) ? i : int'(ds))][l];
          gat[base + 3][l] = svec[int'(RAD) + ((i < int'(dn)) ? i : int'(dn))][l];
        end
      end
    end
  end

  // ------------------------------------------------ multiply-add pipeline
  logic  pv   [NT+1];
  fp32_t pf   [NT+1][NT][PAR_VEC];
  fp32_t pacc [NT+1][PAR_VEC];
  fp32_t macy [NT][PAR_VEC];

  assign adv = !pv[NT] || out_ready;

  for (genvar k = 0; k < NT; k++) begin : g_term
    for (genvar l = 0; l < PAR_VEC; l++) begin : g_lane
      fp_mac u_mac (
        .a      (coef_t_arr[k]),
        .b      (pf[k][k][l]),
        .c      (pacc[k][l]),
        .add_en (k != 0),
        .y      (macy[k][l])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      for (int k = 0; k <= int'(NT); k++) pv[k] <= 1'b0;
    end else if (adv) begin
      pv[0] <= g_valid;
      for (int k = 0; k < int'(NT); k++) pv[k+1] <= pv[k];
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      pf[0] <= gat;
      for (int l = 0; l < int'(PAR_VEC); l++) pacc[0][l] <= '0;
      for (int k = 0; k < int'(NT); k++) begin
        pf[k+1] <= pf[k];
        pacc[k+1] <= macy[k];
      end
    end
  end

  assign out_valid = pv[NT];
  always_comb
    for (int l = 0; l < int'(PAR_VEC); l++)
      out_data[l*32 +: 32] = bypass ? pf[NT][0][l] : pacc[NT][l];

  initial begin
    assert (BSIZE_X % PAR_VEC == 0) else $error("BSIZE_X must be a multiple of PAR_VEC");
    assert (BSIZE_X > 2 * HALO) else $error("block smaller than its halo");
    assert (DIM == 2 || BSIZE_Y > 2 * HALO) else $error("block smaller than its halo");
  end
endmodule
