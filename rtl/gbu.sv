// gbu -- Gaussian Blending Unit, top level.
//
// The GBU takes over the blending step of 3D Gaussian Splatting from the
// GPU: given the projected 2D Gaussians of a frame in depth order it
// produces the blended image, while the GPU already projects and sorts the
// next frame.  It consists of
//   dnb_engine   Decomposition and Binning Engine and D&B buffer counts;
//   reuse_cache  Gaussian Reuse Cache (G Reuse Buffer);
//   tile_engine  Row-Centric Tile Engine (Tile PE) with Row Generation and
//                8 Row PEs;
// and a small controller implementing the second level of the paper's
// two-level pipeline: the Gaussians of a frame are split into chunks of
// CHUNK Gaussians in depth order; the D&B engine bins chunk k into one bank
// of the per-tile lists while the tile engine renders chunk k-1 from the
// other bank.  A chunk is rendered by a full pass over all tiles; passes
// after the first continue from the pixel state (colour and transmittance)
// the previous pass left in the frame buffer.  The first level (GPU frame
// n+1 overlapping GBU frame n through a DRAM double buffer) lives in the
// driver and needs nothing here but the start/busy handshake.
//
// Host side (the driver's render/check-status calls): start with the frame
// size in tiles (tiles_x, tiles_y) and the Gaussian count; busy is 1 while
// a frame is in execution and 0 when idle.
//
// Memory side: the GBU sits next to the GPU's processing clusters and
// reaches the shared L2 / DRAM through the GPU's memory network.  Every
// stream is brought out as its own port (valid/ready request, valid-only
// response, one outstanding):
//   g2d_*   read the idx-th Gaussian in depth order (the memory side applies
//           the sorted index list) -- input of the D&B engine;
//   fw_*    write a Gaussian's feature record (D&B buffer in L2);
//   fr_*    read a feature record on a reuse-cache miss;
//   bw_*    write a per-tile list entry; br_* read it back;
//   pl_*/ps_* load/store pixel state in the frame buffer.
//
// Performance counters (cache hits and misses, fragments shaded, row stall
// cycles, cycles with D&B and tile engine both busy, rows skipped, binary
// searches, rows dropped by the sign test, Gaussians culled, Gaussians
// entering and leaving Row Generation) are outputs, reset by start.
//
// Parameters follow the evaluated configuration: one Tile PE with 8 Row PEs
// of 2 rows, a 32 KB reuse cache (1024 lines of 32 bytes) and lists for up
// to 85 x 64 tiles (1352 x 1014 pixels, the largest resolution of the main
// evaluation).  CHUNK, FIFO_DEPTH and LUT_ENTRIES are this design's choices.
module gbu
  import gbu_pkg::*;
#(
  parameter int unsigned N_PE        = 8,
  parameter int unsigned FIFO_DEPTH  = 8,
  parameter int unsigned LUT_ENTRIES = 512,
  parameter int unsigned CACHE_LINES = 1024,
  parameter int unsigned MAX_TILES   = 5440,
  parameter int unsigned CHUNK       = 256,
  parameter int unsigned TAG_W       = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  // host
  input  logic             start,
  input  logic [7:0]       tiles_x,
  input  logic [7:0]       tiles_y,
  input  logic [TAG_W-1:0] num_gauss,
  output logic             busy,
  // 2D Gaussian input
  output logic             g2d_req_valid,
  input  logic             g2d_req_ready,
  output logic [TAG_W-1:0] g2d_req_idx,
  input  logic             g2d_rsp_valid,
  input  gauss2d_t         g2d_rsp_data,
  // feature store
  output logic             fw_valid,
  input  logic             fw_ready,
  output logic [TAG_W-1:0] fw_id,
  output feature_t         fw_data,
  output logic             fr_req_valid,
  input  logic             fr_req_ready,
  output logic [TAG_W-1:0] fr_req_id,
  input  logic             fr_rsp_valid,
  input  feature_t         fr_rsp_data,
  // per-tile lists
  output logic             bw_valid,
  input  logic             bw_ready,
  output logic             bw_bank,
  output logic [15:0]      bw_tile,
  output logic [$clog2(CHUNK)-1:0] bw_slot,
  output logic [TAG_W-1:0] bw_id,
  output logic [15:0]      bw_dist,
  output logic             br_req_valid,
  input  logic             br_req_ready,
  output logic             br_req_bank,
  output logic [15:0]      br_req_tile,
  output logic [$clog2(CHUNK)-1:0] br_req_slot,
  input  logic             br_rsp_valid,
  input  logic [TAG_W-1:0] br_rsp_id,
  input  logic [15:0]      br_rsp_dist,
  // frame buffer
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
  // performance counters
  output logic [31:0]      pc_hits,
  output logic [31:0]      pc_misses,
  output logic [31:0]      pc_frags,
  output logic [31:0]      pc_row_stalls,
  output logic [31:0]      pc_overlap,
  output logic [31:0]      pc_rows_skipped,
  output logic [31:0]      pc_searches,
  output logic [31:0]      pc_row_away,
  output logic [31:0]      pc_culled,
  output logic [31:0]      pc_gauss_in,
  output logic [31:0]      pc_gauss_done
);

  localparam int unsigned CW = $clog2(CHUNK);

  // ------------------------------------------------------- controller
  typedef enum logic [1:0] {G_IDLE, G_REQ, G_WAIT, G_PUSH} gstate_t;
  gstate_t gstate;

  logic             running;
  logic [TAG_W-1:0] n_chunks, dnb_chunk, dnb_done, te_chunk, te_done;
  logic [TAG_W-1:0] idx, chunk_end;
  gauss2d_t         g_hold;
  logic             dnb_pending;    // last Gaussian of a chunk handed over

  // D&B engine
  logic             dnb_ready, dnb_in_ready, dnb_idle, dnb_culled;
  logic             cnt_bank, cnt_take;
  logic [15:0]      cnt_tile;
  logic [CW:0]      cnt_val;

  dnb_engine #(.MAX_TILES(MAX_TILES), .CHUNK(CHUNK), .TAG_W(TAG_W)) u_dnb (
    .clk, .rst_n,
    .ready      (dnb_ready),
    .tiles_x, .tiles_y,
    .bank       (dnb_chunk[0]),
    .in_valid   (gstate == G_PUSH),
    .in_ready   (dnb_in_ready),
    .in_g       (g_hold),
    .in_id      (idx),
    .feat_valid (fw_valid),
    .feat_ready (fw_ready),
    .feat_id    (fw_id),
    .feat_data  (fw_data),
    .bin_valid  (bw_valid),
    .bin_ready  (bw_ready),
    .bin_bank   (bw_bank),
    .bin_tile   (bw_tile),
    .bin_slot   (bw_slot),
    .bin_id     (bw_id),
    .bin_dist   (bw_dist),
    .cnt_bank   (cnt_bank),
    .cnt_tile   (cnt_tile),
    .cnt_val    (cnt_val),
    .cnt_take   (cnt_take),
    .idle       (dnb_idle),
    .ev_culled  (dnb_culled)
  );

  // Reuse cache
  logic             c_flush, c_adv, c_req_valid, c_req_ready, c_rsp_valid, c_rsp_ready;
  logic [TAG_W-1:0] c_req_tag;
  logic [15:0]      c_req_dist;
  feature_t         c_rsp_feat;
  logic             c_hit, c_miss;

  reuse_cache #(.LINES(CACHE_LINES), .TAG_W(TAG_W)) u_cache (
    .clk, .rst_n,
    .flush         (c_flush),
    .tile_advance  (c_adv),
    .req_valid     (c_req_valid),
    .req_ready     (c_req_ready),
    .req_tag       (c_req_tag),
    .req_dist      (c_req_dist),
    .rsp_valid     (c_rsp_valid),
    .rsp_ready     (c_rsp_ready),
    .rsp_feat      (c_rsp_feat),
    .mem_req_valid (fr_req_valid),
    .mem_req_ready (fr_req_ready),
    .mem_req_tag   (fr_req_id),
    .mem_rsp_valid (fr_rsp_valid),
    .mem_rsp_feat  (fr_rsp_data),
    .hit           (c_hit),
    .miss          (c_miss)
  );

  // Tile engine
  logic            te_start, te_done_p, te_idle, te_stall, te_gauss;
  logic [N_PE-1:0] te_frag;
  logic [4:0]      te_skipped;
  logic            te_away, te_search, te_gdone;

  tile_engine #(
    .N_PE(N_PE), .FIFO_DEPTH(FIFO_DEPTH), .LUT_ENTRIES(LUT_ENTRIES),
    .CHUNK(CHUNK), .TAG_W(TAG_W)
  ) u_te (
    .clk, .rst_n,
    .start          (te_start),
    .bank           (te_chunk[0]),
    .first_chunk    (te_chunk == '0),
    .tiles_x, .tiles_y,
    .done           (te_done_p),
    .idle           (te_idle),
    .cnt_bank, .cnt_tile, .cnt_val, .cnt_take,
    .bin_req_valid  (br_req_valid),
    .bin_req_ready  (br_req_ready),
    .bin_req_bank   (br_req_bank),
    .bin_req_tile   (br_req_tile),
    .bin_req_slot   (br_req_slot),
    .bin_rsp_valid  (br_rsp_valid),
    .bin_rsp_id     (br_rsp_id),
    .bin_rsp_dist   (br_rsp_dist),
    .c_flush, .c_tile_advance (c_adv),
    .c_req_valid, .c_req_ready, .c_req_tag, .c_req_dist,
    .c_rsp_valid, .c_rsp_ready, .c_rsp_feat,
    .pl_req_valid, .pl_req_ready, .pl_x, .pl_y, .pl_rsp_valid, .pl_rsp_data,
    .ps_valid, .ps_ready, .ps_x, .ps_y, .ps_data,
    .ev_row_stall   (te_stall),
    .ev_frag        (te_frag),
    .ev_gauss       (te_gauss),
    .ev_rows_skipped(te_skipped),
    .ev_row_away    (te_away),
    .ev_search      (te_search),
    .ev_gauss_done  (te_gdone)
  );

  // D&B may bin chunk k once the bank it overwrites (that of chunk k-2)
  // has been rendered; the tile engine may render chunk k once it is binned.
  wire dnb_may_start = running && gstate == G_IDLE && !dnb_pending &&
                       dnb_chunk < n_chunks && dnb_chunk < te_done + 2 && dnb_ready;
  assign te_start    = running && te_idle && te_chunk < dnb_done && te_chunk == te_done;

  assign g2d_req_valid = (gstate == G_REQ);
  assign g2d_req_idx   = idx;
  assign busy          = running;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running     <= 1'b0;
      gstate      <= G_IDLE;
      n_chunks    <= '0;
      dnb_chunk   <= '0;
      dnb_done    <= '0;
      te_chunk    <= '0;
      te_done     <= '0;
      idx         <= '0;
      chunk_end   <= '0;
      dnb_pending <= 1'b0;
      g_hold      <= '0;
    end else begin
      if (start && !running) begin
        running   <= 1'b1;
        n_chunks  <= TAG_W'((num_gauss + TAG_W'(CHUNK - 1)) >> CW);
        dnb_chunk <= '0;
        dnb_done  <= '0;
        te_chunk  <= '0;
        te_done   <= '0;
        idx       <= '0;
      end

      // fetch Gaussians of the chunk being binned
      case (gstate)
        G_IDLE: if (dnb_may_start) begin
          chunk_end <= ((dnb_chunk + 1'b1) << CW) < num_gauss
                       ? (dnb_chunk + 1'b1) << CW : num_gauss;
          gstate    <= G_REQ;
        end
        G_REQ: if (g2d_req_ready) gstate <= G_WAIT;
        G_WAIT: if (g2d_rsp_valid) begin
          g_hold <= g2d_rsp_data;
          gstate <= G_PUSH;
        end
        G_PUSH: if (dnb_in_ready) begin
          idx <= idx + 1'b1;
          if (idx + 1'b1 == chunk_end) begin
            gstate      <= G_IDLE;
            dnb_pending <= 1'b1;
          end else begin
            gstate <= G_REQ;
          end
        end
        default: gstate <= G_IDLE;
      endcase

      // chunk binned once the engine has gone idle after its last Gaussian
      if (dnb_pending && dnb_idle && gstate == G_IDLE) begin
        dnb_pending <= 1'b0;
        dnb_chunk   <= dnb_chunk + 1'b1;
        dnb_done    <= dnb_done + 1'b1;
      end

      if (te_start) te_chunk <= te_chunk + 1'b1;
      if (te_done_p) begin
        te_done <= te_done + 1'b1;
        if (te_done + 1'b1 == n_chunks) running <= 1'b0;
      end
    end
  end

  // ------------------------------------------------- performance counters
  logic [3:0] frag_cnt;
  always_comb begin
    frag_cnt = '0;
    for (int i = 0; i < int'(N_PE); i++) frag_cnt += 4'(te_frag[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || (start && !running)) begin
      pc_hits         <= '0;
      pc_misses       <= '0;
      pc_frags        <= '0;
      pc_row_stalls   <= '0;
      pc_overlap      <= '0;
      pc_rows_skipped <= '0;
      pc_searches     <= '0;
      pc_row_away     <= '0;
      pc_culled       <= '0;
      pc_gauss_in     <= '0;
      pc_gauss_done   <= '0;
    end else begin
      pc_hits         <= pc_hits + 32'(c_hit);
      pc_misses       <= pc_misses + 32'(c_miss);
      pc_frags        <= pc_frags + 32'(frag_cnt);
      pc_row_stalls   <= pc_row_stalls + 32'(te_stall);
      pc_overlap      <= pc_overlap + 32'(!dnb_idle && !te_idle);
      pc_rows_skipped <= pc_rows_skipped + 32'(te_skipped);
      pc_searches     <= pc_searches + 32'(te_search);
      pc_row_away     <= pc_row_away + 32'(te_away);
      pc_culled       <= pc_culled + 32'(dnb_culled);
      pc_gauss_in     <= pc_gauss_in + 32'(te_gauss);
      pc_gauss_done   <= pc_gauss_done + 32'(te_gdone);
    end
  end

endmodule
