// reuse_cache -- Gaussian Reuse Cache ("G Reuse Buffer").
//
// Holds the features of recently used Gaussians so that a Gaussian that
// covers several tiles is fetched from memory once rather than once per
// tile.  The order in which the tile engine will ask for Gaussians is known
// in advance (the per-tile lists are built before rendering), so every list
// entry carries the reuse distance of its Gaussian: the number of tiles after
// the current one at which the same Gaussian is needed again.  Replacement
// uses that knowledge (an optimal, Belady-like choice):
//
//   RD field   each line stores tag (Gaussian id), feature and an RD field
//              holding the absolute tile number of the next use,
//              RD = reuse distance + global counter (the tile count).
//   hit        the RD field is refreshed from the entry's reuse distance
//              plus the global counter, and the feature is returned.
//   miss       the victim is an invalid line if there is one, else the line
//              whose remaining distance RD - counter is the largest (lines
//              never used again, RD_NEVER, go first).  The feature is read
//              from memory, installed with RD = distance + counter, and
//              returned.
//
// The paper sizes the cache at 32 KB.  A feature (colour, opacity,
// threshold in FP16; ThetaA, ThetaB in FP32) is 240 bits and occupies a
// 32-byte line, so the default is 1024 lines; the line size, the full
// associativity and the invalid-first rule are this design's choices.  Tags
// and RD fields are registers searched in parallel; the feature array is a
// plain memory read one cycle after the lookup.
//
// Interface.  Lookup: req_valid/req_ready with req_tag and req_dist (reuse
// distance in tiles, RD_NEVER for "last use").  Result: rsp_valid/rsp_ready
// with rsp_feat, one cycle after the request on a hit, after the memory fill
// on a miss; one lookup is in flight at a time.  Memory: mem_req_valid/ready
// with mem_req_tag, then mem_rsp_valid with mem_rsp_feat.  tile_advance adds
// one to the global counter; flush (a new chunk of Gaussians) invalidates all
// lines and zeroes the counter.  hit/miss pulse once per lookup.
module reuse_cache
  import gbu_pkg::*;
#(
  parameter int unsigned LINES = 1024,
  parameter int unsigned TAG_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             tile_advance,
  // lookup
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [TAG_W-1:0] req_tag,
  input  logic [15:0]      req_dist,
  output logic             rsp_valid,
  input  logic             rsp_ready,
  output feature_t         rsp_feat,
  // memory side
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic [TAG_W-1:0] mem_req_tag,
  input  logic             mem_rsp_valid,
  input  feature_t         mem_rsp_feat,
  // statistics
  output logic             hit,
  output logic             miss
);

  localparam int unsigned IW = $clog2(LINES);

  typedef enum logic [1:0] {C_IDLE, C_FILL_REQ, C_FILL_WAIT, C_RSP} cstate_t;
  cstate_t state;

  logic [LINES-1:0] valid;
  logic [TAG_W-1:0] tags [LINES];
  logic [15:0]      rd   [LINES];
  feature_t         data [LINES];

  logic [15:0]      counter;
  logic [TAG_W-1:0] cur_tag;
  logic [15:0]      cur_dist;
  logic [IW-1:0]    cur_idx;
  feature_t         rsp_q;

  // ------------------------------------------------ parallel tag search
  logic          hit_c;
  logic [IW-1:0] hit_idx;
  always_comb begin
    hit_c   = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < int'(LINES); i++) begin
      if (valid[i] && tags[i] == req_tag) begin
        hit_c   = 1'b1;
        hit_idx = IW'(i);
      end
    end
  end

  // ------------------------------------- compare & select the victim
  function automatic logic [16:0] remaining(input logic [15:0] r, input logic [15:0] cnt);
    if (r == RD_NEVER) return 17'h1_0000;      // beyond any real distance
    return {1'b0, r - cnt};
  endfunction

  logic [IW-1:0] vic_idx;
  always_comb begin
    logic [16:0] best;
    logic        found_invalid;
    vic_idx       = '0;
    best          = '0;
    found_invalid = 1'b0;
    for (int i = 0; i < int'(LINES); i++) begin
      if (!found_invalid) begin
        if (!valid[i]) begin
          found_invalid = 1'b1;
          vic_idx       = IW'(i);
        end else if (remaining(rd[i], counter) >= best) begin
          best    = remaining(rd[i], counter);
          vic_idx = IW'(i);
        end
      end
    end
  end

  function automatic logic [15:0] abs_rd(input logic [15:0] dst, input logic [15:0] cnt);
    return (dst == RD_NEVER) ? RD_NEVER : dst + cnt;
  endfunction

  wire accept = req_valid && req_ready;

  assign req_ready     = (state == C_IDLE) && !flush;
  assign mem_req_valid = (state == C_FILL_REQ);
  assign mem_req_tag   = cur_tag;
  assign rsp_valid     = (state == C_RSP);
  assign rsp_feat      = rsp_q;
  assign hit           = accept && hit_c;
  assign miss          = accept && !hit_c;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      valid    <= '0;
      counter  <= '0;
      cur_tag  <= '0;
      cur_dist <= '0;
      cur_idx  <= '0;
    end else begin
      if (flush) begin
        valid   <= '0;
        counter <= '0;
      end else if (tile_advance) begin
        counter <= counter + 16'd1;
      end
      case (state)
        C_IDLE: if (accept) begin
          cur_tag  <= req_tag;
          cur_dist <= req_dist;
          if (hit_c) begin
            rd[hit_idx] <= abs_rd(req_dist, counter);
            cur_idx     <= hit_idx;
            state       <= C_RSP;
          end else begin
            cur_idx <= vic_idx;
            state   <= C_FILL_REQ;
          end
        end
        C_FILL_REQ: if (mem_req_ready) state <= C_FILL_WAIT;
        C_FILL_WAIT: if (mem_rsp_valid) begin
          valid[cur_idx] <= 1'b1;
          tags[cur_idx]  <= cur_tag;
          rd[cur_idx]    <= abs_rd(cur_dist, counter);
          state          <= C_RSP;
        end
        C_RSP: if (rsp_ready) state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  // feature array: written on a fill, read into the response register
  always_ff @(posedge clk) begin
    if (state == C_FILL_WAIT && mem_rsp_valid) begin
      data[cur_idx] <= mem_rsp_feat;
      rsp_q         <= mem_rsp_feat;
    end else if (state == C_IDLE && accept && hit_c) begin
      rsp_q <= data[hit_idx];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid && !rsp_ready |=> rsp_valid);
  assert property (@(posedge clk) disable iff (!rst_n) !(hit && miss));

endmodule
