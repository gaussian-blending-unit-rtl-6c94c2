// gbu_full_tb -- one complete frame through the GBU at its default
// configuration: 8 Row PEs of 2 rows, 8-deep Row Buffers, a 512-entry
// exponential table, a 1024-line (32 KB) reuse cache, lists for 5440 tiles
// and chunks of 256 Gaussians.  No parameter of the top is overridden.
//
// The frame is 128 x 96 pixels (8 x 6 tiles) with 300 Gaussians, so it is
// rendered in two chunks: the second chunk is binned while the first is
// rendered, and the second pass reloads the pixel state of the first.  The
// scene, the memory model and the reference renderer are those of the
// reduced end-to-end test; the result is compared pixel by pixel, and the
// mechanisms that the default configuration exercises on such a frame
// (overlap, pixel reload, culling, cache hits and misses, row skipping, the
// sign test, the binary search) must each happen.  With 1024 lines no line
// is evicted on a frame this small, and 2-row PEs behind 8-deep buffers do
// not stall; the reduced test covers both.
module gbu_full_tb;
  import gbu_pkg::*;

  localparam int unsigned CHUNK  = 256;
  localparam int unsigned TAG_W  = 24;
  localparam int          TX     = 8;
  localparam int          TY     = 6;
  localparam int          NG     = 300;
  localparam int          W      = TX * 16;
  localparam int          H      = TY * 16;
  localparam real         TOL    = 0.05;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start = 0;
  logic [7:0]       tiles_x = 8'(TX), tiles_y = 8'(TY);
  logic [TAG_W-1:0] num_gauss = TAG_W'(NG);
  logic             busy;
  logic             g2d_req_valid, g2d_req_ready = 0, g2d_rsp_valid = 0;
  logic [TAG_W-1:0] g2d_req_idx;
  gauss2d_t         g2d_rsp_data = '0;
  logic             fw_valid, fw_ready = 0;
  logic [TAG_W-1:0] fw_id;
  feature_t         fw_data;
  logic             fr_req_valid, fr_req_ready = 0, fr_rsp_valid = 0;
  logic [TAG_W-1:0] fr_req_id;
  feature_t         fr_rsp_data = '0;
  logic             bw_valid, bw_ready = 0, bw_bank;
  logic [15:0]      bw_tile, bw_dist;
  logic [$clog2(CHUNK)-1:0] bw_slot, br_req_slot;
  logic [TAG_W-1:0] bw_id;
  logic             br_req_valid, br_req_ready = 0, br_req_bank, br_rsp_valid = 0;
  logic [15:0]      br_req_tile;
  logic [TAG_W-1:0] br_rsp_id = '0;
  logic [15:0]      br_rsp_dist = '0;
  logic             pl_req_valid, pl_req_ready = 0, pl_rsp_valid = 0;
  logic [15:0]      pl_x, pl_y, ps_x, ps_y;
  pixel_t           pl_rsp_data = '0, ps_data;
  logic             ps_valid, ps_ready = 0;
  logic [31:0]      pc_hits, pc_misses, pc_frags, pc_row_stalls, pc_overlap,
                    pc_rows_skipped, pc_searches, pc_row_away, pc_culled,
                    pc_gauss_in, pc_gauss_done;

  gbu dut (.*);

  // ------------------------------------------------------------ scene
  gauss2d_t  scene [NG];        // stored order
  int        sorted_index [NG]; // depth order -> stored position
  feature_t  fstore [int];
  logic [TAG_W+15:0] lists [int];
  pixel_t    fb [W * H];

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
    logic s;
    int   e;
    real  a;
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

  task automatic make_scene();
    int perm [NG];
    for (int i = 0; i < NG; i++) perm[i] = i;
    for (int i = NG - 1; i > 0; i--) begin
      int j, t;
      j = int'($urandom % (i + 1));
      t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int d = 0; d < NG; d++) begin
      real s1, s2, th, c, s, ca, cb, cc, det, o;
      gauss2d_t g;
      sorted_index[d] = perm[d];
      s1 = (d % 7 == 0) ? rnd(8.0, 14.0) : rnd(1.0, 5.0);
      s2 = rnd(1.0, 4.0);
      th = rnd(0.0, 3.14159);
      c  = $cos(th); s = $sin(th);
      // covariance R diag(s1^2, s2^2) R^T, then its inverse (the conic)
      ca  = c * c * s1 * s1 + s * s * s2 * s2;
      cb  = c * s * (s1 * s1 - s2 * s2);
      cc  = s * s * s1 * s1 + c * c * s2 * s2;
      det = ca * cc - cb * cb;
      o   = (d % 11 == 5) ? 0.003 : rnd(0.2, 0.95);
      g.mean_x  = r2f(rnd(-6.0, real'(W) + 6.0));
      g.mean_y  = r2f(rnd(-6.0, real'(H) + 6.0));
      g.conic_a = r2f(cc / det);
      g.conic_b = r2f(-cb / det);
      g.conic_c = r2f(ca / det);
      for (int k = 0; k < 3; k++) g.color[k] = r2h(rnd(0.0, 1.0));
      g.opacity = r2h(o);
      scene[perm[d]] = g;
    end
  endtask

  // reference renderer, front to back
  task automatic check_frame();
    int bad = 0;
    for (int py = 0; py < H; py++) begin
      for (int px = 0; px < W; px++) begin
        real r[3], t;
        pixel_t p;
        r[0] = 0.0; r[1] = 0.0; r[2] = 0.0; t = 1.0;
        for (int d = 0; d < NG; d++) begin
          gauss2d_t g;
          real dx, dy, pw, a;
          g  = scene[sorted_index[d]];
          dx = real'(px) - f2r(g.mean_x);
          dy = real'(py) - f2r(g.mean_y);
          pw = f2r(g.conic_a) * dx * dx + 2.0 * f2r(g.conic_b) * dx * dy
             + f2r(g.conic_c) * dy * dy;
          a  = h2r(g.opacity) * $exp(-0.5 * pw);
          if (a > 0.99) a = 0.99;
          if (a < 1.0 / 255.0) continue;
          for (int k = 0; k < 3; k++) r[k] += t * a * h2r(g.color[k]);
          t = t * (1.0 - a);
        end
        p = fb[py * W + px];
        for (int k = 0; k < 3; k++) begin
          checks++;
          if (h2r(p.rgb[k]) - r[k] > TOL || r[k] - h2r(p.rgb[k]) > TOL) begin
            failures++;
            bad++;
            if (bad < 8) $display("FAIL pixel (%0d,%0d) ch %0d got %f want %f",
                                  px, py, k, h2r(p.rgb[k]), r[k]);
          end
        end
        checks++;
        if (h2r(p.t) - t > TOL || t - h2r(p.t) > TOL) begin
          failures++;
          bad++;
          if (bad < 8) $display("FAIL pixel (%0d,%0d) T got %f want %f", px, py, h2r(p.t), t);
        end
      end
    end
  endtask

  // ----------------------------------------------------- memory model
  // Each port: random ready, response after a random delay.
  int n_g2d = 0, n_fw = 0, n_fr = 0, n_bw = 0, n_br = 0, n_pl = 0, n_ps = 0, n_refetch = 0;
  logic [TAG_W-1:0] fetched [$];
  int chunk_of_fetch [$];

  always @(posedge clk) begin
    g2d_req_ready <= ($urandom % 4) != 0;
    fw_ready      <= ($urandom % 4) != 0;
    fr_req_ready  <= ($urandom % 4) != 0;
    bw_ready      <= ($urandom % 5) != 0;
    br_req_ready  <= ($urandom % 4) != 0;
    pl_req_ready  <= ($urandom % 3) != 0;
    ps_ready      <= ($urandom % 3) != 0;
  end

  task automatic respond_g2d(input int idx);
    repeat (1 + $urandom % 3) @(posedge clk);
    g2d_rsp_valid <= 1'b1;
    g2d_rsp_data  <= scene[sorted_index[idx]];
    @(posedge clk);
    g2d_rsp_valid <= 1'b0;
  endtask

  task automatic respond_fr(input int id);
    repeat (1 + $urandom % 4) @(posedge clk);
    fr_rsp_valid <= 1'b1;
    fr_rsp_data  <= fstore[id];
    @(posedge clk);
    fr_rsp_valid <= 1'b0;
  endtask

  task automatic respond_br(input int key);
    repeat (1 + $urandom % 3) @(posedge clk);
    br_rsp_valid <= 1'b1;
    {br_rsp_id, br_rsp_dist} <= lists[key];
    @(posedge clk);
    br_rsp_valid <= 1'b0;
  endtask

  task automatic respond_pl(input int a);
    repeat (1 + $urandom % 2) @(posedge clk);
    pl_rsp_valid <= 1'b1;
    pl_rsp_data  <= fb[a];
    @(posedge clk);
    pl_rsp_valid <= 1'b0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (g2d_req_valid && g2d_req_ready) begin
      n_g2d++;
      fork respond_g2d(int'(g2d_req_idx)); join_none
    end
    if (fw_valid && fw_ready) begin
      n_fw++;
      fstore[int'(fw_id)] = fw_data;
    end
    if (fr_req_valid && fr_req_ready) begin
      n_fr++;
      for (int i = 0; i < fetched.size(); i++)
        if (fetched[i] == fr_req_id && chunk_of_fetch[i] == int'(fr_req_id) / CHUNK) n_refetch++;
      fetched.push_back(fr_req_id);
      chunk_of_fetch.push_back(int'(fr_req_id) / CHUNK);
      fork respond_fr(int'(fr_req_id)); join_none
    end
    if (bw_valid && bw_ready) begin
      n_bw++;
      lists[{bw_bank, bw_tile, 8'(bw_slot)}] = {bw_id, bw_dist};
    end
    if (br_req_valid && br_req_ready) begin
      n_br++;
      fork respond_br({br_req_bank, br_req_tile, 8'(br_req_slot)}); join_none
    end
    if (pl_req_valid && pl_req_ready) begin
      n_pl++;
      fork respond_pl(int'(pl_y) * W + int'(pl_x)); join_none
    end
    if (ps_valid && ps_ready) begin
      n_ps++;
      fb[int'(ps_y) * W + int'(ps_x)] = ps_data;
    end
  end

  // ------------------------------------------------------------- run
  task automatic need(input string what, input longint n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycles = 0;
  always @(posedge clk) if (busy) cycles++;

  initial begin
    for (int i = 0; i < W * H; i++) fb[i] = '0;
    make_scene();
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (busy);
    wait (!busy);
    repeat (5) @(posedge clk);
    $display("frame done in %0d cycles", cycles);
    check_frame();
    checks++;
    if (n_g2d != NG) begin
      failures++;
      $display("FAIL %0d Gaussians read, expected %0d", n_g2d, NG);
    end
    checks++;
    if (n_ps != W * H * ((NG + CHUNK - 1) / CHUNK)) begin
      failures++;
      $display("FAIL %0d pixel stores", n_ps);
    end
    $display("mechanisms:");
    need("chunks binned and rendered", (NG + CHUNK - 1) / CHUNK - 1);
    need("binning/render overlap cyc", pc_overlap);
    need("pixel state reloads", n_pl);
    need("Gaussians culled", pc_culled);
    need("list entries", n_bw);
    need("cache hits", pc_hits);
    need("cache misses", pc_misses);
    $display("  %-28s %0d", "evictions (refetch)", n_refetch);
    need("rows skipped (y''^2)", pc_rows_skipped);
    need("rows dropped (sign test)", pc_row_away);
    need("binary searches", pc_searches);
    $display("  %-28s %0d", "Row Buffer stall cycles", pc_row_stalls);
    need("fragments shaded", pc_frags);
    checks++;
    if (pc_hits + pc_misses != n_br || pc_misses != n_fr) begin
      failures++;
      $display("FAIL lookups %0d+%0d, list reads %0d, fetches %0d", pc_hits, pc_misses, n_br, n_fr);
    end
    checks++;
    if (pc_gauss_in != pc_gauss_done) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
