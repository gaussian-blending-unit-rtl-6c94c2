// row_gen_engine -- Row Generation Engine of the Row-Centric Tile Engine.
//
// For one Gaussian on one 16x16 tile it finds the rows the truncated
// Gaussian covers and, in each, the first covered fragment, and issues one
// row task per such row to the Row PEs.  It follows the row-skipping and
// first-fragment search of the IRSS dataflow:
//
//   transform  P'' = ThetaA * P + ThetaB, ThetaA = [m00 m01; 0 m11], so
//              y'' = m11*Y + v1 is constant along a row and one step right
//              adds dx'' = m00 to x''.
//   step 1     (Threshold Computation + Comparator Array) y''^2 of all 16
//              rows is formed at once and compared with the threshold; rows
//              with y''^2 >= Th are skipped.  Row Index Generation then
//              walks the remaining rows, lowest first.
//   step 2     x'' of the leftmost fragment; if x''^2 + y''^2 < Th it is
//              the first fragment.
//   step 3     otherwise, if x'' and dx'' have the same sign the row moves
//              away from the Gaussian and is dropped; else a binary search
//              over the columns finds the first fragment.  The searched
//              predicate "outside and still left of the centre" is true up
//              to the first covered column and false from there on.
//
// Pixel centres are at integer coordinates.  The transform and the search
// are computed in FP32 (the offsets are absolute screen coordinates); the
// row task values x'', dx'', y''^2 are rounded to FP16 for the Row PEs.
// The paper writes the same-sign test of step 3 as ruling out the whole
// tile; it can only rule out the row whose x'' was tested, so this design
// drops the row.
//
// Timing: one cycle to accept a Gaussian, one for step 1 of all rows, then
// per covered row one cycle for step 2 plus one per search step (4 for a
// 16-pixel row) and the cycle in which the task is handed over.
//
// Interface: valid/ready in (feature and tile origin in pixels) and out
// (row task plus the tile row it belongs to).  done pulses when the last
// task of a Gaussian has been handed over (or the Gaussian covered nothing).
module row_gen_engine
  import gbu_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  feature_t         feat,
  input  logic [15:0]      tile_x0,
  input  logic [15:0]      tile_y0,
  output logic             out_valid,
  input  logic             out_ready,
  output row_task_t        out_task,
  output logic [TILE_LG-1:0] out_row,
  output logic             done,
  // event strobes for performance counting
  output logic [4:0]       ev_rows_skipped,  // rows dropped by step 1
  output logic             ev_row_away,      // a row dropped by the sign test
  output logic             ev_search         // a binary search was started
);

  typedef enum logic [2:0] {S_IDLE, S_MASK, S_ROW, S_SEARCH, S_EMIT} state_t;
  state_t state;

  feature_t          f;
  logic [15:0]       x0, y0;
  logic [TILE-1:0]   pending;
  fp32_t             y2_row [TILE];
  logic [TILE_LG-1:0] r;
  fp32_t             xl;             // x'' of column 0 of the current row
  logic [4:0]        lo, hi;         // search bounds, hi = 16 means "none"
  logic [TILE_LG-1:0] first;

  uf_t th_u, dx_u;
  assign th_u = unpack16(f.th);
  assign dx_u = unpack32(f.m00);

  // ---------------------------------------------- step 1 for all rows
  fp32_t           y2_all [TILE];
  logic [TILE-1:0] row_hit;
  always_comb begin
    for (int i = 0; i < int'(TILE); i++) begin
      uf_t yy;
      yy = uadd(umul(unpack32(f.m11), ufrom_uint(y0 + 16'(i))), unpack32(f.v1));
      y2_all[i]  = pack32(umul(yy, yy));
      row_hit[i] = ult(umul(yy, yy), th_u);
    end
  end

  // lowest pending row
  always_comb begin
    r = '0;
    for (int i = int'(TILE) - 1; i >= 0; i--)
      if (pending[i]) r = TILE_LG'(i);
  end

  // ------------------------------------------------ step 2 for row r
  uf_t xl_c, d_left;
  logic left_in, away;
  always_comb begin
    xl_c = uadd(uadd(umul(unpack32(f.m00), ufrom_uint(x0)),
                     umul(unpack32(f.m01), ufrom_uint(y0 + 16'(r)))),
                unpack32(f.v0));
    d_left  = uadd(umul(xl_c, xl_c), unpack32(y2_row[r]));
    left_in = ult(d_left, th_u);
    away    = xl_c.zero || dx_u.zero || (xl_c.sign == dx_u.sign);
  end

  // --------------------------------------------- step 3, one probe
  function automatic uf_t x_at(input fp32_t xleft, input logic [4:0] c);
    return uadd(unpack32(xleft), umul(dx_u, ufrom_uint(16'(c))));
  endfunction

  logic [4:0] mid;
  uf_t        x_mid, x_hi;
  logic       mid_left, hi_in;
  assign mid = (lo + hi) >> 1;
  always_comb begin
    x_mid    = x_at(xl, mid);
    mid_left = !ult(uadd(umul(x_mid, x_mid), unpack32(y2_row[r])), th_u)
               && !x_mid.zero && (x_mid.sign != dx_u.sign);
    x_hi     = x_at(xl, hi);
    hi_in    = ult(uadd(umul(x_hi, x_hi), unpack32(y2_row[r])), th_u);
  end

  // ---------------------------------------------------------- control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pending <= '0;
      lo      <= '0;
      hi      <= '0;
      first   <= '0;
      xl      <= '0;
      f       <= '0;
      x0      <= '0;
      y0      <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          f     <= feat;
          x0    <= tile_x0;
          y0    <= tile_y0;
          state <= S_MASK;
        end
        S_MASK: begin
          pending <= row_hit;
          for (int i = 0; i < int'(TILE); i++) y2_row[i] <= y2_all[i];
          state   <= S_ROW;
        end
        S_ROW: begin
          if (pending == '0) begin
            state <= S_IDLE;
          end else if (left_in) begin
            xl    <= pack32(xl_c);
            first <= '0;
            state <= S_EMIT;
          end else if (away) begin
            pending[r] <= 1'b0;
          end else begin
            xl    <= pack32(xl_c);
            lo    <= 5'd0;
            hi    <= 5'd16;
            state <= S_SEARCH;
          end
        end
        S_SEARCH: begin
          if (hi - lo > 5'd1) begin
            if (mid_left) lo <= mid;
            else          hi <= mid;
          end else if (hi != 5'd16 && hi_in) begin
            first <= hi[TILE_LG-1:0];
            state <= S_EMIT;
          end else begin
            pending[r] <= 1'b0;
            state      <= S_ROW;
          end
        end
        S_EMIT: if (out_ready) begin
          pending[r] <= 1'b0;
          state      <= S_ROW;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign in_ready  = (state == S_IDLE);
  assign done      = (state == S_ROW) && (pending == '0);
  assign out_valid = (state == S_EMIT);
  assign out_row   = r;

  always_comb begin
    out_task.row_sel = r;
    out_task.col     = first;
    out_task.x       = pack16(x_at(xl, {1'b0, first}));
    out_task.dx      = pack16(dx_u);
    out_task.y2      = pack16(unpack32(y2_row[r]));
    out_task.th      = f.th;
    out_task.opacity = f.opacity;
    out_task.color   = f.color;
  end

  always_comb begin
    ev_rows_skipped = '0;
    if (state == S_MASK)
      for (int i = 0; i < int'(TILE); i++) ev_rows_skipped += 5'(!row_hit[i]);
  end
  assign ev_row_away    = (state == S_ROW) && pending != '0 && !left_in && away;
  assign ev_search      = (state == S_ROW) && pending != '0 && !left_in && !away;

endmodule
