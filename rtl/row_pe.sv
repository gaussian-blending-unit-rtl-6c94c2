// row_pe -- Row PE of the Row-Centric Tile Engine.
//
// A Row PE owns ROWS pixel rows of the current 16x16 tile (2 in the
// configuration evaluated: 8 Row PEs per tile).  It is built from the four
// parts the paper names: a Row Buffer (FIFO of row tasks), a Threshold
// Computation Unit, a Colour Computation Unit with the exp LUT, and a Row
// Pixel Buffer that keeps the accumulated colour and transmittance of its
// pixels stationary while a tile is rendered.
//
// Operation (intra-row sequential shading).  A row task carries the column of
// the first fragment the Gaussian covers in the row, x'' of that fragment,
// the per-column step dx'', the row constant y''^2, the truncation threshold,
// the opacity and the colour.  The PE walks right from the first fragment,
// one fragment per clock: d2 = x''^2 + y''^2, test d2 < threshold, look up
// exp(-d2/2), blend into the pixel.  The first fragment that fails the test
// ends the task (the truncated Gaussian is convex, so nothing further right
// can be in_gauss), as does the last column of the tile.  The first fragment
// itself never ends a task: Row Generation found it inside in single
// precision, and if the half-precision test here lands just outside, the
// fragment is skipped but the walk goes on (otherwise a whole row span at
// the edge of the ellipse would be lost).  The next task is
// taken from the Row Buffer in the cycle the current one ends, so a PE with
// queued work never idles: a task of n covered fragments costs n cycles, or
// n + 1 when it ends on an outside fragment.
//
// Pixel buffer access for the tile engine: init sets every pixel to colour
// 0, T = 1; wr_* writes one pixel (loading the state of a tile left by an
// earlier chunk); rd_* reads one pixel combinationally.  These ports must
// only be used while the PE is idle (busy low).
//
// The datapath is FP16 as in the paper; the fragment-per-cycle schedule, the
// buffer depth and the load/store ports are this design's choices.
module row_pe
  import gbu_pkg::*;
#(
  parameter int unsigned ROWS      = 2,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned LUT_ENTRIES = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  // row tasks from the Row Selection
  input  logic             task_valid,
  output logic             task_ready,
  input  row_task_t        task_in,
  // pixel buffer access
  input  logic             init,
  input  logic             wr_en,
  input  logic [$clog2(ROWS > 1 ? ROWS : 2)-1:0] wr_row,
  input  logic [COL_W-1:0] wr_col,
  input  pixel_t           wr_data,
  input  logic [$clog2(ROWS > 1 ? ROWS : 2)-1:0] rd_row,
  input  logic [COL_W-1:0] rd_col,
  output pixel_t           rd_data,
  // status
  output logic             busy,
  output logic             frag_shaded    // one fragment blended this cycle
);

  localparam int unsigned RW = $clog2(ROWS > 1 ? ROWS : 2);

  // ---------------------------------------------------------- Row Buffer
  logic      q_valid, q_ready, q_empty;
  row_task_t q_data;

  row_buffer #(.T(row_task_t), .DEPTH(FIFO_DEPTH)) u_buf (
    .clk, .rst_n,
    .push_valid (task_valid),
    .push_ready (task_ready),
    .push_data  (task_in),
    .pop_valid  (q_valid),
    .pop_ready  (q_ready),
    .pop_data   (q_data),
    .empty      (q_empty)
  );

  // ------------------------------------------------------- current task
  logic             cur_valid;
  row_task_t        cur;
  logic [COL_W-1:0] k;

  // ------------------------------------------- threshold, LUT and colour
  fp16_t  d2, g;
  logic   in_gauss;
  logic [COL_W-1:0] col;
  pixel_t pix_old, pix_new;

  assign col = cur.col + k;

  threshold_unit u_th (
    .x_first (cur.x),
    .dx      (cur.dx),
    .y2      (cur.y2),
    .th      (cur.th),
    .k       (k),
    .d2      (d2),
    .in_gauss  (in_gauss)
  );

  exp_lut #(.ENTRIES(LUT_ENTRIES)) u_lut (.d2(d2), .g(g));

  // ---------------------------------------------------- Row Pixel Buffer
  pixel_t pixbuf [ROWS][TILE];

  logic [RW-1:0] cur_row;
  assign cur_row = RW'(cur.row_sel);
  assign pix_old = pixbuf[cur_row][col];

  color_unit u_col (
    .g       (g),
    .opacity (cur.opacity),
    .color   (cur.color),
    .pix_in  (pix_old),
    .pix_out (pix_new)
  );

  assign rd_data = pixbuf[rd_row][rd_col];

  wire shade    = cur_valid && in_gauss;
  wire task_end = cur_valid && ((!in_gauss && k != '0) || col == COL_W'(TILE - 1)
                                || k == COL_W'(TILE - 1));
  assign q_ready = !cur_valid || task_end;

  assign frag_shaded = shade;
  assign busy        = cur_valid || !q_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      k         <= '0;
      cur       <= '0;
    end else if (q_ready) begin
      cur_valid <= q_valid;
      k         <= '0;
      if (q_valid) cur <= q_data;
    end else begin
      k <= k + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (init) begin
      for (int r = 0; r < int'(ROWS); r++)
        for (int c = 0; c < int'(TILE); c++)
          pixbuf[r][c] <= PIXEL_INIT;
    end else if (wr_en) begin
      pixbuf[wr_row][wr_col] <= wr_data;
    end else if (shade) begin
      pixbuf[cur_row][col] <= pix_new;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (init || wr_en) |-> !busy);

endmodule
