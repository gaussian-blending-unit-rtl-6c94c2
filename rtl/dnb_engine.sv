// dnb_engine -- Decomposition and Binning (D&B) Engine with the per-tile
// list bookkeeping of the D&B buffer.
//
// For every projected 2D Gaussian, in depth order, it
//   1. decomposes the inverse covariance (conic) [a b; b c] into the
//      transform of the IRSS dataflow.  The paper composes an
//      eigen-decomposition P' = D^(1/2) Q^T (P - mu) with a rotation Theta that
//      makes a pixel step parallel to the x''-axis; the product ThetaA is
//      then the upper-triangular factor of the conic, which this design
//      computes directly:
//         m00 = sqrt(a), m01 = b / m00, m11 = sqrt(c - m01^2)
//         ThetaB = -ThetaA * mu:  v0 = -(m00 mu_x + m01 mu_y), v1 = -m11 mu_y
//      (same P'' up to the sign of the axes, which |P''|^2 ignores);
//   2. derives the truncation threshold on |P''|^2 from the opacity so that
//      a fragment is kept when o * exp(-|P''|^2 / 2) >= 1/255, the cut-off of
//      the reference renderer:  Th = 2 ln(255 o).  Gaussians with Th <= 0
//      can touch no pixel and are dropped.  ln(o) = E ln 2 + ln(1 + f) uses a
//      32-entry table over the top 5 fraction bits of the FP16 opacity;
//   3. writes the feature record (colour, opacity, Th, ThetaA, ThetaB) to the
//      feature store in memory, indexed by the Gaussian's depth-order id;
//   4. bins it: every tile of its bounding box (centre mu, half extents
//      sqrt(Th) * sqrt(1 + (m01/m11)^2) / m00 and sqrt(Th) / m11, the exact
//      box of the truncation ellipse) is visited in the tile traversal order
//      and an entry {Gaussian id, reuse distance} is appended to that tile's
//      list.  The reuse distance is the number of tiles from this tile to the
//      next tile of the same Gaussian in traversal order (RD_NEVER for the
//      last), found with a one-entry look-ahead.
//
// The box is clamped to the frame, so a Gaussian whose box lies wholly
// off the frame is binned to the nearest border tiles, where Row Generation
// finds no covered row: wasted work, not a wrong image.
//
// Tile traversal order is a serpentine over tile rows: even tile rows left
// to right, odd tile rows right to left; traversal index t = ty * TX + (ty
// even ? tx : TX - 1 - tx).  Only the order of the list entries and the
// reuse distances depend on it.
//
// D&B buffer.  Lists are kept per chunk of Gaussians in two banks, so that
// one chunk is binned while the tile engine renders the previous one.  This
// module keeps the per-tile entry counts of both banks; the entries
// themselves go to memory at (bank, tile, slot).  A list holds at most CHUNK
// entries, which a chunk of CHUNK Gaussians cannot exceed.  The tile engine
// reads a tile's count through cnt_* and clears it with cnt_take, so a bank
// is empty again once rendered.  After reset the counts are cleared one per
// cycle (ready low meanwhile).
//
// Paper vs. choices: the engine's function (transform computation,
// Gaussian-tile intersection, reuse distances) is the paper's; the
// triangular factorisation, the bounding-box intersection test (the paper
// adapts its row-skipping test to tiles; the box is conservative and the row
// generation drops tiles the ellipse misses), the threshold formula, the
// traversal order and the two-bank layout are this design's.  One Gaussian
// takes 6 cycles plus the feature write plus one cycle per binned tile.
module dnb_engine
  import gbu_pkg::*;
#(
  parameter int unsigned MAX_TILES = 5440,  // 85 x 64 tiles: 1352 x 1014
  parameter int unsigned CHUNK     = 256,
  parameter int unsigned TAG_W     = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             ready,          // count clear after reset done
  input  logic [7:0]       tiles_x,
  input  logic [7:0]       tiles_y,
  input  logic             bank,           // bank the current chunk goes to
  // 2D Gaussians in depth order
  input  logic             in_valid,
  output logic             in_ready,
  input  gauss2d_t         in_g,
  input  logic [TAG_W-1:0] in_id,
  // feature store write
  output logic             feat_valid,
  input  logic             feat_ready,
  output logic [TAG_W-1:0] feat_id,
  output feature_t         feat_data,
  // list entry write
  output logic             bin_valid,
  input  logic             bin_ready,
  output logic             bin_bank,
  output logic [15:0]      bin_tile,
  output logic [$clog2(CHUNK)-1:0] bin_slot,
  output logic [TAG_W-1:0] bin_id,
  output logic [15:0]      bin_dist,
  // count port of the tile engine (other bank)
  input  logic             cnt_bank,
  input  logic [15:0]      cnt_tile,
  output logic [$clog2(CHUNK):0] cnt_val,
  input  logic             cnt_take,
  // status
  output logic             idle,
  output logic             ev_culled       // Gaussian dropped (Th <= 0)
);

  localparam int unsigned SW = $clog2(CHUNK);
  localparam int unsigned TW = $clog2(MAX_TILES);

  // ------------------------------------------------------ constants
  function automatic logic [31:0] real_to_fp32(input real v);
    real m;
    int  e;
    logic [31:0] f;
    if (v == 0.0) return 32'd0;
    m = (v < 0.0) ? -v : v;
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m <  1.0) begin m = m * 2.0; e--; end
    f = 32'(longint'((m - 1.0) * 8388608.0));
    return {(v < 0.0), 8'(e + 127), f[22:0]};
  endfunction

  function automatic real ln_real(input real x);    // x in [1, 2)
    real z, z2, s, t;
    z  = (x - 1.0) / (x + 1.0);
    z2 = z * z;
    s  = 0.0;
    t  = z;
    for (int n = 0; n < 20; n++) begin
      s = s + t / real'(2 * n + 1);
      t = t * z2;
    end
    return 2.0 * s;
  endfunction

  localparam logic [31:0] LN2   = real_to_fp32(0.69314718056);
  localparam logic [31:0] LN255 = real_to_fp32(5.54126354516);

  fp32_t ln1p_tab [32];
  for (genvar i = 0; i < 32; i++) begin : g_ln
    localparam logic [31:0] V = real_to_fp32(ln_real(1.0 + (real'(i) + 0.5) / 32.0));
    assign ln1p_tab[i] = V;
  end

  // ------------------------------------------------------ counts (D&B buffer)
  logic [SW:0] cnt [2][MAX_TILES];
  logic [TW:0] clr_idx;
  logic        clearing;

  assign ready   = !clearing;
  assign cnt_val = cnt[cnt_bank][TW'(cnt_tile)];

  // ------------------------------------------------------ datapath registers
  typedef enum logic [3:0] {
    D_IDLE, D_SQ, D_DIV, D_SQ2, D_OFS, D_BOX, D_FEAT, D_BIN, D_LAST
  } dstate_t;
  dstate_t state;

  gauss2d_t         g;
  logic [TAG_W-1:0] gid;
  fp32_t m00, m01, m11, v0, v1, th32, hx, hy;
  logic  [15:0] tx_lo, tx_hi, ty_lo, ty_hi, tx, ty;
  logic         have_prev;
  logic  [15:0] prev_t;

  // --------------------------------------------------- step computations
  uf_t a_u, b_u, c_u, mx_u, my_u;
  assign a_u  = unpack32(g.conic_a);
  assign b_u  = unpack32(g.conic_b);
  assign c_u  = unpack32(g.conic_c);
  assign mx_u = unpack32(g.mean_x);
  assign my_u = unpack32(g.mean_y);

  // threshold 2 (ln 255 + E ln 2 + ln(1+f))
  uf_t th_c;
  always_comb begin
    logic [4:0] ebits;
    logic [4:0] emag;
    uf_t eln2;
    ebits = g.opacity[14:10];
    emag  = (ebits < 5'd15) ? 5'd15 - ebits : ebits - 5'd15;
    eln2  = umul(ufrom_uint({11'd0, emag}), unpack32(LN2));
    if (ebits < 5'd15) eln2 = uneg(eln2);
    th_c = uadd(uadd(unpack32(LN255), eln2), unpack32(ln1p_tab[g.opacity[9:5]]));
    th_c = umul(th_c, unpack32(32'h4000_0000));       // times 2
    if (g.opacity[14:10] == 5'd0) th_c = uneg(unpack32(32'h3F80_0000));
  end

  // floor of a float as a pixel coordinate, clamped to [0, lim]
  function automatic logic [15:0] to_pix(input uf_t v, input logic [15:0] lim);
    logic [39:0] fx;
    int          sh;
    if (v.zero) return 16'd0;
    if (v.sign) return 16'd0;
    if (v.exp > 10'sd15) return lim;
    sh = 23 - int'(v.exp);
    fx = 40'(v.man) >> sh;
    if (fx[15:0] > lim) return lim;
    return fx[15:0];
  endfunction

  logic [15:0] w_last, h_last;
  assign w_last = {4'd0, tiles_x, 4'd0} - 16'd1;
  assign h_last = {4'd0, tiles_y, 4'd0} - 16'd1;

  // traversal index of (tx, ty)
  function automatic logic [15:0] trav(input logic [15:0] x, input logic [15:0] y,
                                       input logic [7:0] ntx);
    logic [15:0] base;
    base = y * 16'(ntx);
    return y[0] ? base + 16'(ntx) - 16'd1 - x : base + x;
  endfunction

  logic [15:0] cur_t;
  assign cur_t = trav(tx, ty, tiles_x);

  // last tile of the box in traversal order?
  logic last_in_row, last_tile;
  assign last_in_row = ty[0] ? (tx == tx_lo) : (tx == tx_hi);
  assign last_tile   = last_in_row && (ty == ty_hi);

  // -------------------------------------------------------- outputs
  assign in_ready   = (state == D_IDLE) && !clearing;
  assign idle       = (state == D_IDLE) && !clearing;
  assign feat_valid = (state == D_FEAT);
  assign feat_id    = gid;
  always_comb begin
    feat_data.color   = g.color;
    feat_data.opacity = g.opacity;
    feat_data.th      = pack16(unpack32(th32));
    feat_data.m00     = m00;
    feat_data.m01     = m01;
    feat_data.m11     = m11;
    feat_data.v0      = v0;
    feat_data.v1      = v1;
  end

  // The entry written in D_BIN is the one of the previous tile (its reuse
  // distance is now known); in D_LAST the final one, with RD_NEVER.
  assign bin_valid = (state == D_BIN && have_prev) || (state == D_LAST);
  assign bin_bank  = bank;
  assign bin_tile  = prev_t;
  assign bin_slot  = SW'(cnt[bank][TW'(prev_t)]);
  assign bin_id    = gid;
  assign bin_dist  = (state == D_LAST) ? RD_NEVER : cur_t - prev_t;

  assign ev_culled = (state == D_BOX) && (th32[31] || th32[30:23] == 8'd0);

  wire bin_fire = bin_valid && bin_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= D_IDLE;
      clearing  <= 1'b1;
      clr_idx   <= '0;
      have_prev <= 1'b0;
      prev_t    <= '0;
      g         <= '0;
      gid       <= '0;
      {m00, m01, m11, v0, v1, th32, hx, hy} <= '0;
      {tx_lo, tx_hi, ty_lo, ty_hi, tx, ty}  <= '0;
    end else begin
      // count maintenance
      if (clearing) begin
        cnt[0][TW'(clr_idx)] <= '0;
        cnt[1][TW'(clr_idx)] <= '0;
        clr_idx <= clr_idx + 1'b1;
        if (clr_idx == (TW+1)'(MAX_TILES - 1)) clearing <= 1'b0;
      end else begin
        if (cnt_take) cnt[cnt_bank][TW'(cnt_tile)] <= '0;
        if (bin_fire) cnt[bank][TW'(prev_t)] <= cnt[bank][TW'(prev_t)] + 1'b1;
      end

      case (state)
        D_IDLE: if (in_valid && !clearing) begin
          g     <= in_g;
          gid   <= in_id;
          state <= D_SQ;
        end
        D_SQ: begin                                   // m00 = sqrt(a), Th
          m00   <= pack32(usqrt(a_u));
          th32  <= pack32(th_c);
          state <= D_DIV;
        end
        D_DIV: begin                                  // m01 = b / m00
          m01   <= pack32(udiv(b_u, unpack32(m00)));
          state <= D_SQ2;
        end
        D_SQ2: begin                                  // m11 = sqrt(c - m01^2)
          m11   <= pack32(usqrt(usub(c_u, umul(unpack32(m01), unpack32(m01)))));
          state <= D_OFS;
        end
        D_OFS: begin                                  // ThetaB, half extents
          uf_t r, k;
          r  = usqrt(unpack32(th32));
          k  = udiv(unpack32(m01), unpack32(m11));
          v0 <= pack32(uneg(uadd(umul(unpack32(m00), mx_u), umul(unpack32(m01), my_u))));
          v1 <= pack32(uneg(umul(unpack32(m11), my_u)));
          hx <= pack32(udiv(umul(r, usqrt(uadd(umul(k, k), unpack32(32'h3F80_0000)))),
                            unpack32(m00)));
          hy <= pack32(udiv(r, unpack32(m11)));
          state <= D_BOX;
        end
        D_BOX: begin
          logic [15:0] xl, xh, yl, yh;
          xl = to_pix(usub(mx_u, unpack32(hx)), w_last);
          xh = to_pix(uadd(mx_u, unpack32(hx)), w_last);
          yl = to_pix(usub(my_u, unpack32(hy)), h_last);
          yh = to_pix(uadd(my_u, unpack32(hy)), h_last);
          tx_lo <= xl >> 4;
          tx_hi <= xh >> 4;
          ty_lo <= yl >> 4;
          ty_hi <= yh >> 4;
          ty    <= yl >> 4;
          tx    <= (yl[4]) ? (xh >> 4) : (xl >> 4);   // odd tile row: right to left
          have_prev <= 1'b0;
          if (th32[31] || th32[30:23] == 8'd0) state <= D_IDLE;
          else                                  state <= D_FEAT;
        end
        D_FEAT: if (feat_ready) state <= D_BIN;
        D_BIN: if (!have_prev || bin_ready) begin
          have_prev <= 1'b1;
          prev_t    <= cur_t;
          if (last_tile) begin
            state <= D_LAST;
          end else if (last_in_row) begin
            ty <= ty + 16'd1;
            tx <= ty[0] ? tx_lo : tx_hi;
          end else begin
            tx <= ty[0] ? tx - 16'd1 : tx + 16'd1;
          end
        end
        D_LAST: if (bin_ready) state <= D_IDLE;
        default: state <= D_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   bin_valid |-> cnt[bank][TW'(prev_t)] < (SW+1)'(CHUNK));

endmodule
