// tile_engine_tb -- checks the Row-Centric Tile Engine on its own.
//
// The testbench plays the parts around the engine: the D&B counts (every
// tile's list holds all Gaussians of the chunk), the list memory (entry
// slot n is Gaussian n, reuse distance 1, RD_NEVER on the last tile), the
// reuse cache (features computed by the testbench from random Gaussians,
// returned after a random delay) and the frame buffer.  Two chunks are
// rendered over a 3 x 2 tile frame: the first with first_chunk set (pixel
// buffers start at colour 0, T = 1), the second loading the pixel state
// the first stored.  The frame is compared with a real-valued reference
// renderer.  Also checked: one cache flush per pass, one tile advance
// between consecutive tiles, every count taken, 256 pixel stores per tile.
module tile_engine_tb;
  import gbu_pkg::*;

  localparam int TX = 3, TY = 2, W = TX * 16, H = TY * 16;
  localparam int NG = 10, CHUNK = 16, TAG_W = 24;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start = 0, bank = 0, first_chunk = 1, done, idle;
  logic [7:0]       tiles_x = 8'(TX), tiles_y = 8'(TY);
  logic             cnt_bank, cnt_take;
  logic [15:0]      cnt_tile;
  logic [$clog2(CHUNK):0] cnt_val;
  logic             bin_req_valid, bin_req_ready = 0, bin_req_bank, bin_rsp_valid = 0;
  logic [15:0]      bin_req_tile;
  logic [$clog2(CHUNK)-1:0] bin_req_slot;
  logic [TAG_W-1:0] bin_rsp_id = '0;
  logic [15:0]      bin_rsp_dist = '0;
  logic             c_flush, c_tile_advance, c_req_valid, c_req_ready = 0;
  logic [TAG_W-1:0] c_req_tag;
  logic [15:0]      c_req_dist;
  logic             c_rsp_valid = 0, c_rsp_ready;
  feature_t         c_rsp_feat = '0;
  logic             pl_req_valid, pl_req_ready = 0, pl_rsp_valid = 0;
  logic [15:0]      pl_x, pl_y, ps_x, ps_y;
  pixel_t           pl_rsp_data = '0, ps_data;
  logic             ps_valid, ps_ready = 0;
  logic             ev_row_stall, ev_gauss, ev_row_away, ev_search, ev_gauss_done;
  logic [7:0]       ev_frag;
  logic [4:0]       ev_rows_skipped;

  tile_engine #(.N_PE(8), .CHUNK(CHUNK), .TAG_W(TAG_W)) dut (.*);

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

  feature_t feats [2][NG];
  pixel_t   fb [W * H];
  real      ref_rgb [W * H][3];
  real      ref_t   [W * H];
  int       counts  [64];
  int       pass = 0;

  task automatic make_feats(input int p);
    for (int n = 0; n < NG; n++) begin
      real s1, s2, ang, c, s, ca, cb, cc, det, a, b, cq, mx, my, o, m00, m01, m11;
      s1 = rnd(1.0, 9.0); s2 = rnd(1.0, 5.0); ang = rnd(0.0, 3.14159);
      c = $cos(ang); s = $sin(ang);
      ca  = c * c * s1 * s1 + s * s * s2 * s2;
      cb  = c * s * (s1 * s1 - s2 * s2);
      cc  = s * s * s1 * s1 + c * c * s2 * s2;
      det = ca * cc - cb * cb;
      a = cc / det; b = -cb / det; cq = ca / det;
      mx = rnd(-4.0, real'(W) + 4.0); my = rnd(-4.0, real'(H) + 4.0);
      o  = rnd(0.1, 0.95);
      m00 = $sqrt(a); m01 = b / m00; m11 = $sqrt(cq - m01 * m01);
      feats[p][n].m00 = r2f(m00);
      feats[p][n].m01 = r2f(m01);
      feats[p][n].m11 = r2f(m11);
      feats[p][n].v0  = r2f(-(m00 * mx + m01 * my));
      feats[p][n].v1  = r2f(-m11 * my);
      feats[p][n].th  = r2h(2.0 * $ln(255.0 * o));
      feats[p][n].opacity = r2h(o);
      for (int k = 0; k < 3; k++) feats[p][n].color[k] = r2h(rnd(0.0, 1.0));
    end
  endtask

  // reference: blend a chunk's features onto the reference frame
  task automatic ref_blend(input int p);
    for (int py = 0; py < H; py++)
      for (int px = 0; px < W; px++)
        for (int n = 0; n < NG; n++) begin
          real xx, yy, d2, a;
          feature_t f;
          f  = feats[p][n];
          xx = f2r(f.m00) * real'(px) + f2r(f.m01) * real'(py) + f2r(f.v0);
          yy = f2r(f.m11) * real'(py) + f2r(f.v1);
          d2 = xx * xx + yy * yy;
          if (d2 >= h2r(f.th)) continue;
          a = h2r(f.opacity) * $exp(-d2 / 2.0);
          if (a > 0.99) a = 0.99;
          for (int k = 0; k < 3; k++) ref_rgb[py * W + px][k] += ref_t[py * W + px] * a * h2r(f.color[k]);
          ref_t[py * W + px] *= (1.0 - a);
        end
  endtask

  // ------------------------------------------------ surroundings
  assign cnt_val = ($clog2(CHUNK) + 1)'(counts[cnt_tile]);
  int n_take = 0, n_flush = 0, n_adv = 0, n_ps = 0, n_pl = 0;

  always @(posedge clk) begin
    bin_req_ready <= ($urandom % 4) != 0;
    c_req_ready   <= ($urandom % 4) != 0;
    pl_req_ready  <= ($urandom % 3) != 0;
    ps_ready      <= ($urandom % 3) != 0;
  end

  task automatic rsp_bin(input int slot, input int tile);
    repeat (1 + $urandom % 3) @(posedge clk);
    bin_rsp_valid <= 1'b1;
    bin_rsp_id    <= TAG_W'(slot);
    bin_rsp_dist  <= (tile == TX * TY - 1) ? RD_NEVER : 16'd1;
    @(posedge clk);
    bin_rsp_valid <= 1'b0;
  endtask

  task automatic rsp_feat(input int id);
    repeat (1 + $urandom % 4) @(posedge clk);
    c_rsp_valid <= 1'b1;
    c_rsp_feat  <= feats[pass][id];
    @(posedge clk);
    while (!c_rsp_ready) @(posedge clk);
    c_rsp_valid <= 1'b0;
  endtask

  task automatic rsp_pix(input int a);
    repeat (1 + $urandom % 2) @(posedge clk);
    pl_rsp_valid <= 1'b1;
    pl_rsp_data  <= fb[a];
    @(posedge clk);
    pl_rsp_valid <= 1'b0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (cnt_take) begin
      n_take++;
      counts[cnt_tile] <= 0;
    end
    if (c_flush) n_flush++;
    if (c_tile_advance) n_adv++;
    if (bin_req_valid && bin_req_ready) fork rsp_bin(int'(bin_req_slot), int'(bin_req_tile)); join_none
    if (c_req_valid && c_req_ready) fork rsp_feat(int'(c_req_tag)); join_none
    if (pl_req_valid && pl_req_ready) begin
      n_pl++;
      fork rsp_pix(int'(pl_y) * W + int'(pl_x)); join_none
    end
    if (ps_valid && ps_ready) begin
      n_ps++;
      fb[int'(ps_y) * W + int'(ps_x)] = ps_data;
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad;
    for (int i = 0; i < W * H; i++) begin
      fb[i] = '0;
      ref_t[i] = 1.0;
      for (int k = 0; k < 3; k++) ref_rgb[i][k] = 0.0;
    end
    for (int t = 0; t < 64; t++) counts[t] = 0;
    make_feats(0);
    make_feats(1);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int p = 0; p < 2; p++) begin
      int flush0, adv0, take0, ps0, pl0;
      pass = p;
      for (int t = 0; t < TX * TY; t++) counts[t] = NG;
      flush0 = n_flush; adv0 = n_adv; take0 = n_take; ps0 = n_ps; pl0 = n_pl;
      @(negedge clk);
      bank = p[0]; first_chunk = (p == 0);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      ref_blend(p);
      checks++;
      if (n_flush - flush0 != 1 || n_adv - adv0 != TX * TY - 1 || n_take - take0 != TX * TY ||
          n_ps - ps0 != W * H || n_pl - pl0 != (p == 0 ? 0 : W * H)) begin
        failures++;
        $display("FAIL pass %0d: flush %0d adv %0d take %0d stores %0d loads %0d", p,
                 n_flush - flush0, n_adv - adv0, n_take - take0, n_ps - ps0, n_pl - pl0);
      end
      repeat (3) @(negedge clk);
    end
    bad = 0;
    for (int i = 0; i < W * H; i++) begin
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (h2r(fb[i].rgb[k]) - ref_rgb[i][k] > 0.04 || ref_rgb[i][k] - h2r(fb[i].rgb[k]) > 0.04) begin
          failures++;
          if (++bad < 8) $display("FAIL pixel %0d ch %0d got %f want %f", i, k, h2r(fb[i].rgb[k]), ref_rgb[i][k]);
        end
      end
      checks++;
      if (h2r(fb[i].t) - ref_t[i] > 0.04 || ref_t[i] - h2r(fb[i].t) > 0.04) begin
        failures++;
        if (++bad < 8) $display("FAIL pixel %0d T got %f want %f", i, h2r(fb[i].t), ref_t[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
