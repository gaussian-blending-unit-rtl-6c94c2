// row_pe_tb -- checks a Row PE (Row Buffer, threshold, exponential table,
// colour unit and the pixel buffer of its 2 rows).
//
// Random row tasks (first column, x'', dx'', y''^2, threshold 2 ln(255 o),
// opacity, colour; the first fragment inside the threshold, as Row
// Generation delivers them) are pushed with random gaps into the PE.  A reference
// model in real arithmetic walks each task the same way -- from the first
// column to the right, blending while d2 < threshold, ending at the first
// outside fragment after the first one or at the tile edge -- and the pixel
// buffer is read back through rd_* at the end and compared with a tolerance
// for FP16 and the table.
//
// Timing: for single tasks the cycles from the push to the end of busy are
// checked against one cycle per fragment (n covered fragments, plus one if
// the walk ends on an outside fragment, plus the Row Buffer's cycle).
module row_pe_tb;
  import gbu_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      task_valid = 0, task_ready;
  row_task_t task_in = '0;
  logic      init = 0, wr_en = 0;
  logic      wr_row = 0, rd_row = 0;
  logic [3:0] wr_col = '0, rd_col = '0;
  pixel_t    wr_data = '0, rd_data;
  logic      busy, frag_shaded;

  row_pe #(.ROWS(2)) dut (.*);

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

  real ref_rgb [2][16][3];
  real ref_t   [2][16];

  // walks a task in the reference model; returns the cycles it takes
  function automatic int model_task(input row_task_t t);
    int  n;
    real x, d2, a;
    n = 0;
    for (int k = 0; k < 16; k++) begin
      int c;
      c = int'(t.col) + k;
      if (c > 15) break;
      n++;
      x  = h2r(t.x) + real'(k) * h2r(t.dx);
      d2 = x * x + h2r(t.y2);
      if (d2 < h2r(t.th)) begin
        a = h2r(t.opacity) * $exp(-d2 / 2.0);
        if (a > 0.99) a = 0.99;
        for (int i = 0; i < 3; i++)
          ref_rgb[t.row_sel[0]][c][i] += ref_t[t.row_sel[0]][c] * a * h2r(t.color[i]);
        ref_t[t.row_sel[0]][c] *= (1.0 - a);
      end else if (k > 0) begin
        break;
      end
    end
    return n;
  endfunction

  function automatic row_task_t rand_task();
    row_task_t t;
    real o, dx, th, y2;
    o          = 0.05 + real'($urandom % 900) / 1000.0;
    th         = 2.0 * $ln(255.0 * o);
    dx         = 0.1 + real'($urandom % 600) / 1000.0;
    t.row_sel  = 4'($urandom % 2);
    t.col      = 4'($urandom % 16);
    t.dx       = r2h(dx);
    // the first fragment is inside, as Row Generation guarantees
    y2         = th * real'($urandom % 80) / 100.0;
    t.y2       = r2h(y2);
    t.x        = r2h(-$sqrt(0.95 * th - y2) * real'(20 + $urandom % 80) / 100.0);
    t.th       = r2h(th);
    t.opacity  = r2h(o);
    for (int i = 0; i < 3; i++) t.color[i] = r2h(real'($urandom % 1000) / 999.0);
    return t;
  endfunction

  task automatic push(input row_task_t t);
    @(negedge clk);
    task_valid = 1'b1;
    task_in    = t;
    #1;
    while (!task_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    task_valid = 1'b0;
  endtask

  task automatic compare_all();
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 16; c++) begin
        @(negedge clk);
        rd_row = r[0];
        rd_col = 4'(c);
        #1;
        for (int i = 0; i < 3; i++) begin
          checks++;
          if (h2r(rd_data.rgb[i]) - ref_rgb[r][c][i] > 0.03 ||
              ref_rgb[r][c][i] - h2r(rd_data.rgb[i]) > 0.03) begin
            failures++;
            if (failures < 10) $display("FAIL pix %0d,%0d ch %0d got %f want %f",
                                        r, c, i, h2r(rd_data.rgb[i]), ref_rgb[r][c][i]);
          end
        end
        checks++;
        if (h2r(rd_data.t) - ref_t[r][c] > 0.03 || ref_t[r][c] - h2r(rd_data.t) > 0.03) begin
          failures++;
          if (failures < 10) $display("FAIL pix %0d,%0d T got %f want %f",
                                      r, c, h2r(rd_data.t), ref_t[r][c]);
        end
      end
  endtask

  task automatic reset_model();
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 16; c++) begin
        ref_t[r][c] = 1.0;
        for (int i = 0; i < 3; i++) ref_rgb[r][c][i] = 0.0;
      end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int frags = 0;
  always @(posedge clk) if (frag_shaded) frags++;

  initial begin
    row_task_t t;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // 1. streams of tasks
    for (int round = 0; round < 10; round++) begin
      @(negedge clk);
      init = 1'b1;
      @(negedge clk);
      init = 1'b0;
      reset_model();
      for (int n = 0; n < 40; n++) begin
        t = rand_task();
        void'(model_task(t));
        push(t);
        if (($urandom % 3) == 0) repeat ($urandom % 10) @(negedge clk);
      end
      while (busy) @(negedge clk);
      compare_all();
    end
    // 2. write port and latency of single tasks
    @(negedge clk);
    init = 1'b1;
    @(negedge clk);
    init = 1'b0;
    reset_model();
    for (int n = 0; n < 20; n++) begin
      int want, cyc, f0;
      t   = rand_task();
      want = model_task(t);
      f0  = frags;
      @(negedge clk);
      task_valid = 1'b1;
      task_in    = t;
      cyc = 0;
      @(negedge clk);
      task_valid = 1'b0;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != want + 1) begin
        failures++;
        if (failures < 10) $display("FAIL task took %0d cycles, expected %0d", cyc, want + 1);
      end
    end
    compare_all();
    @(negedge clk);
    wr_en = 1'b1; wr_row = 1'b1; wr_col = 4'd7;
    wr_data = '{rgb: '{16'h3800, 16'h3400, 16'h3000}, t: 16'h3C00};
    @(negedge clk);
    wr_en = 1'b0;
    rd_row = 1'b1; rd_col = 4'd7;
    #1;
    checks++;
    if (rd_data != wr_data) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
