// row_gen_engine_tb -- checks Row Generation against a per-pixel reference.
//
// Random Gaussians (centre near or inside a 16 x 16 tile, random size,
// orientation and opacity) are turned into feature records by the
// testbench's own real-valued factorisation of the conic (m00 = sqrt a,
// m01 = b/m00, m11 = sqrt(c - m01^2), ThetaB = -ThetaA mu, Th = 2 ln(255 o)).
// For every row of the tile the reference evaluates |P''|^2 at all 16 pixels
// and finds the first covered column.  Checks:
//   * every row with covered pixels gets exactly one task, for that row,
//     starting at the first covered column, with x'', dx'' and y''^2 close
//     to the reference values and the Gaussian's threshold, opacity, colour;
//   * no task for a row without covered pixels;
//   * rows whose coverage is within 2% of the threshold at some pixel are
//     not judged (rounding may go either way there);
//   * each of the three ways of skipping work (y''^2 row test, sign test,
//     binary search) happens.
module row_gen_engine_tb;
  import gbu_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid = 0, in_ready;
  feature_t    feat = '0;
  logic [15:0] tile_x0 = '0, tile_y0 = '0;
  logic        out_valid, out_ready = 0;
  row_task_t   out_task;
  logic [3:0]  out_row;
  logic        done;
  logic [4:0]  ev_rows_skipped;
  logic        ev_row_away, ev_search;

  row_gen_engine dut (.*);

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

  int n_skip = 0, n_away = 0, n_search = 0;
  always @(posedge clk) begin
    n_skip   += int'(ev_rows_skipped);
    n_away   += int'(ev_row_away);
    n_search += int'(ev_search);
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      real s1, s2, ang, c, s, ca, cb, cc, det, a, b, cq, m00, m01, m11, mx, my, v0, v1, o, th;
      int  first [16];
      logic amb [16];
      int  seen [16];
      // scene
      tile_x0 = 16'(16 * ($urandom % 60));
      tile_y0 = 16'(16 * ($urandom % 60));
      s1  = rnd(0.7, 12.0); s2 = rnd(0.7, 6.0); ang = rnd(0.0, 3.14159);
      c   = $cos(ang); s = $sin(ang);
      ca  = c * c * s1 * s1 + s * s * s2 * s2;
      cb  = c * s * (s1 * s1 - s2 * s2);
      cc  = s * s * s1 * s1 + c * c * s2 * s2;
      det = ca * cc - cb * cb;
      a = cc / det; b = -cb / det; cq = ca / det;
      mx  = real'(tile_x0) + rnd(-10.0, 26.0);
      my  = real'(tile_y0) + rnd(-10.0, 26.0);
      o   = rnd(0.05, 0.98);
      th  = 2.0 * $ln(255.0 * o);
      m00 = $sqrt(a); m01 = b / m00; m11 = $sqrt(cq - m01 * m01);
      v0  = -(m00 * mx + m01 * my); v1 = -m11 * my;
      feat.m00 = r2f(m00); feat.m01 = r2f(m01); feat.m11 = r2f(m11);
      feat.v0  = r2f(v0);  feat.v1  = r2f(v1);
      feat.th  = r2h(th);  feat.opacity = r2h(o);
      for (int i = 0; i < 3; i++) feat.color[i] = r2h(rnd(0.0, 1.0));
      // reference with the values as stored
      m00 = f2r(feat.m00); m01 = f2r(feat.m01); m11 = f2r(feat.m11);
      v0  = f2r(feat.v0);  v1  = f2r(feat.v1);  th = h2r(feat.th);
      for (int r = 0; r < 16; r++) begin
        real yy;
        first[r] = -1; amb[r] = 1'b0; seen[r] = 0;
        yy = m11 * real'(int'(tile_y0) + r) + v1;
        for (int k = 0; k < 16; k++) begin
          real xx, d2;
          xx = m00 * real'(int'(tile_x0) + k) + m01 * real'(int'(tile_y0) + r) + v0;
          d2 = xx * xx + yy * yy;
          if (d2 < th && first[r] < 0) first[r] = k;
          if (d2 > 0.98 * th && d2 < 1.02 * th) amb[r] = 1'b1;
        end
      end
      // run
      @(negedge clk);
      in_valid = 1'b1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 1'b0;
      while (!done) begin
        out_ready = ($urandom % 4) != 0;
        #1;
        if (out_valid && out_ready) begin
          int r;
          real xx, yy;
          r = int'(out_row);
          seen[r]++;
          if (!amb[r]) begin
            checks++;
            if (int'(out_task.col) != first[r]) begin
              failures++;
              if (failures < 10) $display("FAIL row %0d col %0d expected %0d", r, out_task.col, first[r]);
            end
          end
          xx = m00 * real'(int'(tile_x0) + int'(out_task.col)) + m01 * real'(int'(tile_y0) + r) + v0;
          yy = m11 * real'(int'(tile_y0) + r) + v1;
          checks++;
          if (h2r(out_task.x) - xx > 0.01 + 0.002 * (xx < 0 ? -xx : xx) ||
              xx - h2r(out_task.x) > 0.01 + 0.002 * (xx < 0 ? -xx : xx) ||
              h2r(out_task.dx) - m00 > 0.002 * m00 + 1e-4 || m00 - h2r(out_task.dx) > 0.002 * m00 + 1e-4 ||
              h2r(out_task.y2) - yy * yy > 0.002 * yy * yy + 1e-3 ||
              yy * yy - h2r(out_task.y2) > 0.002 * yy * yy + 1e-3) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d x %f/%f dx %f/%f y2 %f/%f", r,
              h2r(out_task.x), xx, h2r(out_task.dx), m00, h2r(out_task.y2), yy * yy);
          end
          checks++;
          if (out_task.th != feat.th || out_task.opacity != feat.opacity ||
              out_task.color != feat.color || out_task.row_sel != out_row) failures++;
        end
        @(negedge clk);
      end
      out_ready = 1'b0;
      for (int r = 0; r < 16; r++) begin
        if (amb[r]) begin
          checks++;
          if (seen[r] > 1) failures++;
          continue;
        end
        checks++;
        if (seen[r] != (first[r] >= 0 ? 1 : 0)) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d: %0d tasks, first %0d", r, seen[r], first[r]);
        end
      end
    end
    $display("rows skipped %0d, rows dropped by sign %0d, searches %0d", n_skip, n_away, n_search);
    checks++;
    if (n_skip == 0 || n_away == 0 || n_search == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
