// tile_engine -- Row-Centric Tile Engine (Tile PE).
//
// Renders the image one 16x16 tile at a time.  Instead of shading all pixels
// of a tile in lock-step, each pixel row belongs to a Row PE with its own
// queue of work, so rows with little work do not wait for rows with a lot:
// a Row PE keeps shading fragments of later Gaussians while another is still
// busy with an earlier one.  Blending order per pixel stays the depth order
// because each row's tasks arrive in that order.
//
// Blocks (as in the tile engine diagram):
//   2D Gaussian buffer  a one-entry register holding the next Gaussian's
//                       feature, filled from the reuse cache while the Row
//                       Generation Engine works on the previous Gaussian;
//   Row Generation      row_gen_engine: covered rows and first fragments;
//   Row Selection       routes a row task of tile row r to Row PE
//                       r / ROWS_PER_PE (stalling while that Row Buffer is
//                       full);
//   Row PEs             N_PE = 16 / ROWS_PER_PE row_pe instances.
//
// Per tile: (1) the Row Pixel Buffers are set to colour 0, T = 1, or, when
// the chunk is not the first of the frame, loaded with the state the
// previous chunk left in the frame buffer; (2) the tile's list length is read
// from the D&B buffer (and cleared); (3) each list entry {id, reuse distance}
// is read, its feature looked up in the reuse cache and handed to Row
// Generation; (4) once every Row PE has drained, the 256 pixels are written
// back and the cache's tile counter advances.  Tiles are visited in the
// serpentine order the D&B engine binned them in.
//
// The per-tile flow, the one-entry Gaussian buffer, pixel load/store through
// the frame buffer between chunks, and all handshakes are this design's
// choices; the structure (Row Generation, Row Selection, Row PEs of 2 rows,
// 8 per tile) is the paper's.
//
// Interface: start (with bank, first/last chunk and the frame size in
// tiles) begins a pass over all tiles; done pulses at its end.  Memory-side
// ports are valid/ready requests with valid-only responses, one outstanding.
module tile_engine
  import gbu_pkg::*;
#(
  parameter int unsigned N_PE        = 8,
  parameter int unsigned FIFO_DEPTH  = 8,
  parameter int unsigned LUT_ENTRIES = 512,
  parameter int unsigned CHUNK       = 256,
  parameter int unsigned TAG_W       = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  // control
  input  logic             start,
  input  logic             bank,
  input  logic             first_chunk,
  input  logic [7:0]       tiles_x,
  input  logic [7:0]       tiles_y,
  output logic             done,
  output logic             idle,
  // D&B buffer count port
  output logic             cnt_bank,
  output logic [15:0]      cnt_tile,
  input  logic [$clog2(CHUNK):0] cnt_val,
  output logic             cnt_take,
  // list entry read
  output logic             bin_req_valid,
  input  logic             bin_req_ready,
  output logic             bin_req_bank,
  output logic [15:0]      bin_req_tile,
  output logic [$clog2(CHUNK)-1:0] bin_req_slot,
  input  logic             bin_rsp_valid,
  input  logic [TAG_W-1:0] bin_rsp_id,
  input  logic [15:0]      bin_rsp_dist,
  // reuse cache
  output logic             c_flush,
  output logic             c_tile_advance,
  output logic             c_req_valid,
  input  logic             c_req_ready,
  output logic [TAG_W-1:0] c_req_tag,
  output logic [15:0]      c_req_dist,
  input  logic             c_rsp_valid,
  output logic             c_rsp_ready,
  input  feature_t         c_rsp_feat,
  // frame buffer: pixel state load and store
  output logic             pl_req_valid,
  input  logic             pl_req_ready,
  output logic [15:0]      pl_x,
  output logic [15:0]      pl_y,
  input  logic             pl_rsp_valid,
  input  pixel_t           pl_rsp_data,
  output logic             ps_valid,
  input  logic             ps_ready,
  output logic [15:0]      ps_x,
  output logic [15:0]      ps_y,
  output pixel_t           ps_data,
  // events
  output logic             ev_row_stall,     // row task waits for a full Row Buffer
  output logic [N_PE-1:0]  ev_frag,          // fragments shaded this cycle, per PE
  output logic             ev_gauss,         // a Gaussian handed to Row Generation
  output logic [4:0]       ev_rows_skipped,  // rows dropped by the y''^2 test
  output logic             ev_row_away,      // row dropped by the sign test
  output logic             ev_search,        // binary search started
  output logic             ev_gauss_done     // Row Generation finished a Gaussian
);

  localparam int unsigned ROWS_PER_PE = TILE / N_PE;
  localparam int unsigned RW  = $clog2(ROWS_PER_PE > 1 ? ROWS_PER_PE : 2);
  localparam int unsigned PEW = $clog2(N_PE > 1 ? N_PE : 2);
  localparam int unsigned SW  = $clog2(CHUNK);

  // ------------------------------------------------------- tile walk
  typedef enum logic [2:0] {
    T_IDLE, T_LOAD_REQ, T_LOAD_WAIT, T_COUNT, T_RENDER, T_STORE, T_NEXT
  } tstate_t;
  tstate_t state;

  logic        cur_bank, cur_first;
  logic [15:0] tx, ty, t_idx;
  logic [7:0]  p;            // pixel index inside the tile: row * 16 + col
  logic [SW:0] n_entries, n_fetched;

  wire [15:0] x0 = {tx[11:0], 4'd0};
  wire [15:0] y0 = {ty[11:0], 4'd0};
  wire [3:0]  p_row = p[7:4];
  wire [3:0]  p_col = p[3:0];
  wire        last_tile = (ty == 16'(tiles_y) - 16'd1) &&
                          (ty[0] ? (tx == 16'd0) : (tx == 16'(tiles_x) - 16'd1));

  // ------------------------------------------------ Gaussian fetch path
  typedef enum logic [2:0] {F_IDLE, F_BIN_REQ, F_BIN_WAIT, F_C_REQ, F_C_WAIT} fstate_t;
  fstate_t fstate;
  logic [TAG_W-1:0] e_id;
  logic [15:0]      e_dist;
  logic             gbuf_valid;
  feature_t         gbuf;

  // -------------------------------------------------- Row Generation
  logic             rg_in_ready, rg_out_valid, rg_out_ready;
  row_task_t        rg_task;
  logic [TILE_LG-1:0] rg_row;

  row_gen_engine u_rg (
    .clk, .rst_n,
    .in_valid        (gbuf_valid && state == T_RENDER),
    .in_ready        (rg_in_ready),
    .feat            (gbuf),
    .tile_x0         (x0),
    .tile_y0         (y0),
    .out_valid       (rg_out_valid),
    .out_ready       (rg_out_ready),
    .out_task        (rg_task),
    .out_row         (rg_row),
    .done            (ev_gauss_done),
    .ev_rows_skipped (ev_rows_skipped),
    .ev_row_away     (ev_row_away),
    .ev_search       (ev_search)
  );

  wire gauss_take = gbuf_valid && state == T_RENDER && rg_in_ready;
  assign ev_gauss = gauss_take;

  // ---------------------------------------------------- Row Selection
  logic [PEW-1:0]  sel_pe;
  row_task_t       sel_task;
  logic [N_PE-1:0] pe_ready, pe_busy;
  assign sel_pe = PEW'(rg_row / TILE_LG'(ROWS_PER_PE));
  always_comb begin
    sel_task         = rg_task;
    sel_task.row_sel = TILE_LG'(rg_row % TILE_LG'(ROWS_PER_PE));
  end
  assign rg_out_ready = pe_ready[sel_pe];
  assign ev_row_stall = rg_out_valid && !rg_out_ready;

  // --------------------------------------------------------- Row PEs
  pixel_t pe_rd [N_PE];
  wire [PEW-1:0] p_pe  = PEW'(p_row / 4'(ROWS_PER_PE));
  wire [RW-1:0]  p_sel = RW'(p_row % 4'(ROWS_PER_PE));

  for (genvar i = 0; i < int'(N_PE); i++) begin : g_pe
    row_pe #(
      .ROWS        (ROWS_PER_PE),
      .FIFO_DEPTH  (FIFO_DEPTH),
      .LUT_ENTRIES (LUT_ENTRIES)
    ) u_pe (
      .clk, .rst_n,
      .task_valid  (rg_out_valid && sel_pe == PEW'(i)),
      .task_ready  (pe_ready[i]),
      .task_in     (sel_task),
      .init        (state == T_LOAD_REQ && cur_first),
      .wr_en       (state == T_LOAD_WAIT && pl_rsp_valid && p_pe == PEW'(i)),
      .wr_row      (p_sel),
      .wr_col      (p_col),
      .wr_data     (pl_rsp_data),
      .rd_row      (p_sel),
      .rd_col      (p_col),
      .rd_data     (pe_rd[i]),
      .busy        (pe_busy[i]),
      .frag_shaded (ev_frag[i])
    );
  end

  // ---------------------------------------------------- port outputs
  assign cnt_bank      = cur_bank;
  assign cnt_tile      = t_idx;
  assign cnt_take      = (state == T_COUNT);

  assign bin_req_valid = (fstate == F_BIN_REQ);
  assign bin_req_bank  = cur_bank;
  assign bin_req_tile  = t_idx;
  assign bin_req_slot  = SW'(n_fetched);

  assign c_req_valid   = (fstate == F_C_REQ);
  assign c_req_tag     = e_id;
  assign c_req_dist    = e_dist;
  assign c_rsp_ready   = (fstate == F_C_WAIT) && (!gbuf_valid || gauss_take);
  assign c_flush       = start && state == T_IDLE;
  assign c_tile_advance = (state == T_NEXT);

  assign pl_req_valid  = (state == T_LOAD_REQ) && !cur_first;
  assign pl_x          = x0 + 16'(p_col);
  assign pl_y          = y0 + 16'(p_row);
  assign ps_valid      = (state == T_STORE);
  assign ps_x          = x0 + 16'(p_col);
  assign ps_y          = y0 + 16'(p_row);
  assign ps_data       = pe_rd[p_pe];

  assign idle = (state == T_IDLE);
  assign done = (state == T_NEXT) && last_tile;

  wire drained = (n_fetched == n_entries) && fstate == F_IDLE && !gbuf_valid
                 && rg_in_ready && !rg_out_valid && (pe_busy == '0);

  // ------------------------------------------------------- control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= T_IDLE;
      fstate     <= F_IDLE;
      cur_bank   <= 1'b0;
      cur_first  <= 1'b0;
      tx         <= '0;
      ty         <= '0;
      t_idx      <= '0;
      p          <= '0;
      n_entries  <= '0;
      n_fetched  <= '0;
      gbuf_valid <= 1'b0;
      e_id       <= '0;
      e_dist     <= '0;
    end else begin
      case (state)
        T_IDLE: if (start) begin
          cur_bank  <= bank;
          cur_first <= first_chunk;
          tx        <= '0;
          ty        <= '0;
          t_idx     <= '0;
          p         <= '0;
          state     <= T_LOAD_REQ;
        end
        T_LOAD_REQ: begin
          if (cur_first) state <= T_COUNT;           // buffers initialised
          else if (pl_req_ready) state <= T_LOAD_WAIT;
        end
        T_LOAD_WAIT: if (pl_rsp_valid) begin
          p     <= p + 8'd1;
          state <= (p == 8'd255) ? T_COUNT : T_LOAD_REQ;
        end
        T_COUNT: begin
          n_entries <= cnt_val;
          n_fetched <= '0;
          state     <= T_RENDER;
        end
        T_RENDER: if (drained) begin
          p     <= '0;
          state <= T_STORE;
        end
        T_STORE: if (ps_ready) begin
          p <= p + 8'd1;
          if (p == 8'd255) state <= T_NEXT;
        end
        T_NEXT: begin
          p     <= '0;
          t_idx <= t_idx + 16'd1;
          if (last_tile) begin
            state <= T_IDLE;
          end else begin
            state <= T_LOAD_REQ;
            if (ty[0] ? (tx == 16'd0) : (tx == 16'(tiles_x) - 16'd1)) ty <= ty + 16'd1;
            else if (ty[0]) tx <= tx - 16'd1;
            else            tx <= tx + 16'd1;
          end
        end
        default: state <= T_IDLE;
      endcase

      // fetch path: entry -> cache -> 2D Gaussian buffer
      if (gauss_take) gbuf_valid <= 1'b0;
      case (fstate)
        F_IDLE: if (state == T_RENDER && n_fetched != n_entries &&
                    (!gbuf_valid || gauss_take)) fstate <= F_BIN_REQ;
        F_BIN_REQ: if (bin_req_ready) fstate <= F_BIN_WAIT;
        F_BIN_WAIT: if (bin_rsp_valid) begin
          e_id   <= bin_rsp_id;
          e_dist <= bin_rsp_dist;
          fstate <= F_C_REQ;
        end
        F_C_REQ: if (c_req_ready) fstate <= F_C_WAIT;
        F_C_WAIT: if (c_rsp_valid && (!gbuf_valid || gauss_take)) begin
          gbuf       <= c_rsp_feat;
          gbuf_valid <= 1'b1;
          n_fetched  <= n_fetched + 1'b1;
          fstate     <= F_IDLE;
        end
        default: fstate <= F_IDLE;
      endcase
    end
  end

  // Fill of the Gaussian buffer only when it is free or being emptied.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (fstate == F_C_WAIT && c_rsp_valid && c_rsp_ready) |-> (!gbuf_valid || gauss_take));

endmodule
