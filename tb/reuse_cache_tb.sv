// reuse_cache_tb -- checks the Gaussian reuse cache.
//
// Drives lookups of {Gaussian id, reuse distance} with a few tile advances
// and one flush in between, and serves fills from a memory model whose
// feature for id n is a pattern computed from n (with a random delay).
// Checks, for every lookup:
//   * the returned feature is the one of the requested id;
//   * hit or miss agrees with a reference model of the replacement policy
//     (RD = reuse distance + tile counter; the victim is the first invalid
//     line, else the line with the largest remaining distance, lines never
//     used again first, ties to the highest index);
//   * a fill is requested exactly on a miss, for the requested id.
// Runs with 8 lines so that replacement happens constantly.
module reuse_cache_tb;
  import gbu_pkg::*;

  localparam int LINES = 8;
  localparam int TAG_W = 24;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             flush = 0, tile_advance = 0;
  logic             req_valid = 0, req_ready;
  logic [TAG_W-1:0] req_tag = '0;
  logic [15:0]      req_dist = '0;
  logic             rsp_valid, rsp_ready = 0;
  feature_t         rsp_feat;
  logic             mem_req_valid, mem_req_ready = 0;
  logic [TAG_W-1:0] mem_req_tag;
  logic             mem_rsp_valid = 0;
  feature_t         mem_rsp_feat = '0;
  logic             hit, miss;

  reuse_cache #(.LINES(LINES), .TAG_W(TAG_W)) dut (.*);

  function automatic feature_t pattern(input logic [TAG_W-1:0] id);
    feature_t f;
    f = '0;
    f.m00 = {8'h3F, id};
    f.v1  = {id, 8'hA5};
    f.color[0] = id[15:0] ^ 16'h5A5A;
    f.th  = 16'h4000 | id[11:0];
    return f;
  endfunction

  // reference model
  logic             m_valid [LINES];
  logic [TAG_W-1:0] m_tag   [LINES];
  logic [15:0]      m_rd    [LINES];
  logic [15:0]      m_cnt;

  function automatic int remaining(input logic [15:0] r);
    if (r == RD_NEVER) return 65536;
    return int'(16'(r - m_cnt));
  endfunction

  function automatic logic [15:0] absr(input logic [15:0] d);
    return (d == RD_NEVER) ? RD_NEVER : 16'(d + m_cnt);
  endfunction

  // returns 1 on a hit and updates the model
  function automatic logic model_lookup(input logic [TAG_W-1:0] t, input logic [15:0] d);
    int v, best;
    for (int i = 0; i < LINES; i++)
      if (m_valid[i] && m_tag[i] == t) begin
        m_rd[i] = absr(d);
        return 1'b1;
      end
    v = -1;
    for (int i = 0; i < LINES; i++) if (v < 0 && !m_valid[i]) v = i;
    if (v < 0) begin
      best = -1;
      for (int i = 0; i < LINES; i++)
        if (remaining(m_rd[i]) >= best) begin best = remaining(m_rd[i]); v = i; end
    end
    m_valid[v] = 1'b1;
    m_tag[v]   = t;
    m_rd[v]    = absr(d);
    return 1'b0;
  endfunction

  // memory model
  always @(posedge clk) mem_req_ready <= ($urandom % 3) != 0;
  int fills = 0;
  logic [TAG_W-1:0] fill_tag;
  logic fill_pending = 0;
  always @(posedge clk) begin
    if (mem_req_valid && mem_req_ready) begin
      fills++;
      fill_tag     = mem_req_tag;
      fill_pending = 1'b1;
      repeat (1 + $urandom % 4) @(posedge clk);
      mem_rsp_valid <= 1'b1;
      mem_rsp_feat  <= pattern(fill_tag);
      @(posedge clk);
      mem_rsp_valid <= 1'b0;
      fill_pending  = 1'b0;
    end
  end

  int n_hit = 0, n_miss = 0;

  task automatic lookup(input logic [TAG_W-1:0] t, input logic [15:0] d);
    logic exp_hit;
    int   f0;
    f0 = fills;
    @(negedge clk);
    req_valid = 1'b1; req_tag = t; req_dist = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    exp_hit = model_lookup(t, d);
    checks++;
    if (hit !== exp_hit || miss !== !exp_hit) begin
      failures++;
      if (failures < 10) $display("FAIL tag %0d hit %b expected %b", t, hit, exp_hit);
    end
    if (exp_hit) n_hit++; else n_miss++;
    @(negedge clk);
    req_valid = 1'b0;
    rsp_ready = 1'b1;
    while (!rsp_valid) @(negedge clk);
    checks++;
    if (rsp_feat != pattern(t)) begin
      failures++;
      if (failures < 10) $display("FAIL data for tag %0d", t);
    end
    checks++;
    if ((fills - f0) != (exp_hit ? 0 : 1)) begin
      failures++;
      if (failures < 10) $display("FAIL %0d fills for tag %0d", fills - f0, t);
    end
    @(negedge clk);
    rsp_ready = 1'b0;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < LINES; i++) begin m_valid[i] = 0; m_tag[i] = '0; m_rd[i] = '0; end
    m_cnt = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 1500; n++) begin
      logic [15:0] d;
      d = (($urandom % 5) == 0) ? RD_NEVER : 16'($urandom % 12);
      lookup(TAG_W'($urandom % 20), d);
      if (($urandom % 4) == 0) begin
        @(negedge clk);
        tile_advance = 1'b1;
        @(negedge clk);
        tile_advance = 1'b0;
        m_cnt++;
      end
      if (n == 700) begin
        @(negedge clk);
        flush = 1'b1;
        @(negedge clk);
        flush = 1'b0;
        for (int i = 0; i < LINES; i++) m_valid[i] = 0;
        m_cnt = '0;
      end
    end
    checks++;
    if (n_hit == 0 || n_miss == 0) failures++;
    $display("hits %0d misses %0d", n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
