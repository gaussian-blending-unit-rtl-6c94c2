// dnb_engine_tb -- checks the Decomposition and Binning engine.
//
// Feeds random projected Gaussians (a few too faint to be seen) into a
// 6 x 5 tile frame, with random ready on both output streams, and checks:
//   * the feature record of each visible Gaussian: ThetaA, ThetaB against
//     the testbench's real-valued upper-triangular factor of the conic, the
//     threshold against 2 ln(255 o), colour and opacity copied;
//   * faint Gaussians (threshold <= 0) write nothing and pulse ev_culled;
//   * binning: every tile where the truncated ellipse covers a pixel
//     (with a 2% margin) is binned, no tile outside the ellipse's bounding
//     box (clamped to the frame) is, tiles come in serpentine traversal order, each tile's slots
//     count up from 0, and each entry's reuse distance is the traversal
//     distance to the Gaussian's next tile (RD_NEVER for its last);
//   * the per-tile counts read back through the count port equal the
//     entries written, and are zero again after being taken.
module dnb_engine_tb;
  import gbu_pkg::*;

  localparam int TX = 6, TY = 5, W = TX * 16, H = TY * 16;
  localparam int CHUNK = 64, NG = 40, TAG_W = 24;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             ready, in_valid = 0, in_ready, bank = 1'b1;
  logic [7:0]       tiles_x = 8'(TX), tiles_y = 8'(TY);
  gauss2d_t         in_g = '0;
  logic [TAG_W-1:0] in_id = '0;
  logic             feat_valid, feat_ready = 0;
  logic [TAG_W-1:0] feat_id;
  feature_t         feat_data;
  logic             bin_valid, bin_ready = 0, bin_bank;
  logic [15:0]      bin_tile, bin_dist;
  logic [$clog2(CHUNK)-1:0] bin_slot;
  logic [TAG_W-1:0] bin_id;
  logic             cnt_bank = 1'b1, cnt_take = 0;
  logic [15:0]      cnt_tile = '0;
  logic [$clog2(CHUNK):0] cnt_val;
  logic             idle, ev_culled;

  dnb_engine #(.MAX_TILES(64), .CHUNK(CHUNK), .TAG_W(TAG_W)) dut (.*);

  function automatic real h2r(input logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real v);
    logic s;
    int   e;
    real  a;
    int   m;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a < 6.2e-5) return 16'h0000;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = int'((a - 1.0) * 1024.0 + 0.5);
    if (m == 1024) begin m = 0; e++; end
    return {s, 5'(e + 15), 10'(m)};
  endfunction

  function automatic real f2r(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    e = int'(f[30:23]) - 127;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f(input real v);
    logic   s;
    int     e;
    real    a;
    longint m;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a < 1.0e-30) return 32'd0;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = longint'((a - 1.0) * 8388608.0);
    return {s, 8'(e + 127), 23'(m)};
  endfunction

  function automatic real rnd(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom % 100000) / 100000.0;
  endfunction

  function automatic int trav(input int tx, input int ty);
    return ty * TX + ((ty % 2) ? TX - 1 - tx : tx);
  endfunction

  function automatic logic close(input real got, input real want, input real rel);
    real d;
    d = got - want;
    if (d < 0) d = -d;
    return d <= rel * (want < 0 ? -want : want) + 1e-4;
  endfunction

  gauss2d_t g_in [NG];
  feature_t f_out [int];
  int       bins_t [int][$];   // Gaussian id -> tiles in order written
  int       bins_d [int][$];
  int       slots  [int];      // tile -> next expected slot
  int       culled = 0;

  always @(posedge clk) begin
    feat_ready <= ($urandom % 3) != 0;
    bin_ready  <= ($urandom % 3) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (feat_valid && feat_ready) f_out[int'(feat_id)] = feat_data;
    if (bin_valid && bin_ready) begin
      bins_t[int'(bin_id)].push_back(int'(bin_tile));
      bins_d[int'(bin_id)].push_back(int'(bin_dist));
      checks++;
      if (!slots.exists(int'(bin_tile))) slots[int'(bin_tile)] = 0;
      if (int'(bin_slot) != slots[int'(bin_tile)] || bin_bank != bank) begin
        failures++;
        if (failures < 10) $display("FAIL slot %0d of tile %0d expected %0d", bin_slot, bin_tile,
                                    slots[int'(bin_tile)]);
      end
      slots[int'(bin_tile)]++;
    end
    if (ev_culled) culled++;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ang, s1, s2, c, s, ca, cb, cc, det;
    for (int n = 0; n < NG; n++) begin
      s1 = (n % 5 == 0) ? rnd(6.0, 14.0) : rnd(0.8, 5.0);
      s2 = rnd(0.8, 4.0); ang = rnd(0.0, 3.14159);
      c = $cos(ang); s = $sin(ang);
      ca  = c * c * s1 * s1 + s * s * s2 * s2;
      cb  = c * s * (s1 * s1 - s2 * s2);
      cc  = s * s * s1 * s1 + c * c * s2 * s2;
      det = ca * cc - cb * cb;
      g_in[n].mean_x  = r2f(rnd(-8.0, real'(W) + 8.0));
      g_in[n].mean_y  = r2f(rnd(-8.0, real'(H) + 8.0));
      g_in[n].conic_a = r2f(cc / det);
      g_in[n].conic_b = r2f(-cb / det);
      g_in[n].conic_c = r2f(ca / det);
      g_in[n].opacity = r2h((n % 9 == 4) ? 0.0035 : rnd(0.05, 0.98));
      for (int k = 0; k < 3; k++) g_in[n].color[k] = r2h(rnd(0.0, 1.0));
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    while (!ready) @(posedge clk);
    for (int n = 0; n < NG; n++) begin
      @(negedge clk);
      in_valid = 1'b1; in_g = g_in[n]; in_id = TAG_W'(n);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 1'b0;
    end
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);

    // features and bins against the reference
    for (int n = 0; n < NG; n++) begin
      real a, b, cq, mx, my, o, th, m00, m01, m11, v0, v1;
      int  lo_tx, hi_tx, lo_ty, hi_ty;
      logic covered [64];
      a  = f2r(g_in[n].conic_a); b = f2r(g_in[n].conic_b); cq = f2r(g_in[n].conic_c);
      mx = f2r(g_in[n].mean_x);  my = f2r(g_in[n].mean_y); o = h2r(g_in[n].opacity);
      th = 2.0 * $ln(255.0 * o);
      checks++;
      if (th <= 0.0) begin
        if (f_out.exists(n) || bins_t.exists(n)) failures++;
        continue;
      end
      if (!f_out.exists(n)) begin
        failures++;
        $display("FAIL no feature for %0d", n);
        continue;
      end
      m00 = $sqrt(a); m01 = b / m00; m11 = $sqrt(cq - m01 * m01);
      v0  = -(m00 * mx + m01 * my); v1 = -m11 * my;
      checks++;
      if (!close(f2r(f_out[n].m00), m00, 1e-3) || !close(f2r(f_out[n].m01), m01, 1e-3) ||
          !close(f2r(f_out[n].m11), m11, 1e-3) || !close(f2r(f_out[n].v0), v0, 1e-3) ||
          !close(f2r(f_out[n].v1), v1, 1e-3)) begin
        failures++;
        $display("FAIL transform %0d: %f %f %f %f %f vs %f %f %f %f %f", n,
                 f2r(f_out[n].m00), f2r(f_out[n].m01), f2r(f_out[n].m11), f2r(f_out[n].v0),
                 f2r(f_out[n].v1), m00, m01, m11, v0, v1);
      end
      checks++;
      if (!close(h2r(f_out[n].th), th, 0.01) || f_out[n].opacity != g_in[n].opacity ||
          f_out[n].color != g_in[n].color) begin
        failures++;
        $display("FAIL threshold %0d: %f vs %f", n, h2r(f_out[n].th), th);
      end
      // tiles the ellipse covers (with margin) and its bounding box
      for (int t = 0; t < 64; t++) covered[t] = 1'b0;
      lo_tx = TX; hi_tx = -1; lo_ty = TY; hi_ty = -1;
      for (int py = 0; py < H; py++)
        for (int px = 0; px < W; px++) begin
          real dx, dy, d2;
          dx = real'(px) - mx; dy = real'(py) - my;
          d2 = a * dx * dx + 2.0 * b * dx * dy + cq * dy * dy;
          if (d2 < 0.98 * th) covered[trav(px / 16, py / 16)] = 1'b1;
        end
      // closed-form extent of the ellipse a x^2 + 2 b x y + c y^2 < th
      begin
        real ex, ey;
        ex = $sqrt(th * cq / (a * cq - b * b));
        ey = $sqrt(th * a / (a * cq - b * b));
        lo_tx = int'($floor((mx - ex - 1.0) / 16.0));
        hi_tx = int'($floor((mx + ex + 1.0) / 16.0));
        lo_ty = int'($floor((my - ey - 1.0) / 16.0));
        hi_ty = int'($floor((my + ey + 1.0) / 16.0));
        // the engine clamps the box to the frame
        if (lo_tx > TX - 1) lo_tx = TX - 1;
        if (hi_tx < 0)      hi_tx = 0;
        if (lo_ty > TY - 1) lo_ty = TY - 1;
        if (hi_ty < 0)      hi_ty = 0;
      end
      for (int t = 0; t < TX * TY; t++) begin
        int found;
        found = 0;
        if (bins_t.exists(n)) foreach (bins_t[n][i]) if (bins_t[n][i] == t) found++;
        checks++;
        if ((covered[t] && found != 1) || found > 1) begin
          failures++;
          $display("FAIL Gaussian %0d tile %0d binned %0d times", n, t, found);
        end
      end
      if (bins_t.exists(n)) begin
        foreach (bins_t[n][i]) begin
          int t, ty, tx;
          t  = bins_t[n][i];
          ty = t / TX;
          tx = (ty % 2) ? TX - 1 - t % TX : t % TX;
          checks++;
          if (tx < lo_tx || tx > hi_tx || ty < lo_ty || ty > hi_ty) begin
            failures++;
            $display("FAIL Gaussian %0d binned to far tile %0d", n, t);
          end
          checks++;
          if (i + 1 < bins_t[n].size()) begin
            if (bins_t[n][i + 1] <= t || bins_d[n][i] != bins_t[n][i + 1] - t) failures++;
          end else if (bins_d[n][i] != int'(RD_NEVER)) failures++;
        end
      end
    end
    checks++;
    if (culled == 0) failures++;
    // counts through the count port, then taken
    for (int t = 0; t < TX * TY; t++) begin
      int want;
      want = slots.exists(t) ? slots[t] : 0;
      @(negedge clk);
      cnt_tile = 16'(t);
      cnt_take = 1'b1;
      #1;
      checks++;
      if (int'(cnt_val) != want) begin
        failures++;
        $display("FAIL count of tile %0d: %0d expected %0d", t, cnt_val, want);
      end
    end
    @(negedge clk);
    cnt_take = 1'b0;
    for (int t = 0; t < TX * TY; t++) begin
      @(negedge clk);
      cnt_tile = 16'(t);
      #1;
      checks++;
      if (cnt_val != '0) failures++;
    end
    $display("culled %0d, binned Gaussians %0d", culled, bins_t.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
