// exp_lut -- the LUT of the Row PE: Gaussian value G = exp(-d2/2) from the
// squared distance d2 = |P''|^2 of a fragment in the transformed space.
//
// The Row PE block diagram shows a LUT between the threshold test and the
// colour datapath; its size and indexing are this design's choice.  The
// table covers d2 in [0, 16) in ENTRIES uniform bins (bin width 16/ENTRIES)
// and stores, for each bin, exp(-d2/2) at the bin centre as FP16.  Inputs of
// 16 and above read the last entry; the truncation threshold of a Gaussian
// (2 ln(255 o) <= 11.1) keeps real inputs below that range anyway.
//
// The table is computed at elaboration by a constant function, so no data
// file is needed: entry i = fp16(exp(-(i + 0.5) * (16/ENTRIES) / 2)).
//
// Interface: purely combinational, d2 (FP16, non-negative) in, g (FP16) out.
module exp_lut
  import gbu_pkg::*;
#(
  parameter int unsigned ENTRIES = 512  // power of two, 16..2048
) (
  input  fp16_t d2,
  output fp16_t g
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);
  // log2 of the number of bins per unit of d2
  localparam int          SCALE_LG = int'(IDX_W) - 4;

  // exp(-x) for x >= 0 by halving range reduction and a Taylor series.
  function automatic real exp_neg(input real x);
    real y, term, s;
    int  nh;
    y = x;
    nh = 0;
    while (y > 0.125) begin
      y = y / 2.0;
      nh++;
    end
    s    = 1.0;
    term = 1.0;
    for (int n = 1; n < 12; n++) begin
      term = -term * y / n;
      s    = s + term;
    end
    for (int i = 0; i < nh; i++) s = s * s;
    return s;
  endfunction

  // Real in (0, 1] to FP16 bits, rounded to nearest.
  function automatic logic [15:0] real_to_fp16(input real v);
    real m;
    int  e;
    int  f;
    m = v;
    e = 0;
    while (m < 1.0) begin
      m = m * 2.0;
      e--;
    end
    f = int'((m - 1.0) * 1024.0);   // int'() of a real rounds to nearest
    if (f == 1024) begin
      f = 0;
      e++;
    end
    if (e + 15 <= 0) return 16'h0000;
    return {1'b0, 5'(e + 15), 10'(f)};
  endfunction

  function automatic logic [15:0] entry(input int i);
    return real_to_fp16(exp_neg((real'(i) + 0.5) * 16.0 / real'(ENTRIES) / 2.0));
  endfunction

  fp16_t table_q [ENTRIES];

  for (genvar i = 0; i < int'(ENTRIES); i++) begin : g_tab
    localparam logic [15:0] VAL = entry(i);
    assign table_q[i] = VAL;
  end

  // Index = floor(d2 * 2^SCALE_LG), saturated to the last entry.
  logic [IDX_W-1:0] idx;
  always_comb begin
    int          e;      // unbiased exponent
    int          sh;
    logic [10:0] m;
    e   = int'({1'b0, d2[14:10]}) - 15;
    m   = {1'b1, d2[9:0]};
    sh  = 10 - SCALE_LG - e;         // right shift of the 1.10 mantissa
    if (d2[14:10] == 5'd0 || d2[15])
      idx = '0;
    else if (e >= 4)
      idx = '1;
    else if (sh >= 11)
      idx = '0;
    else
      idx = IDX_W'(m >> sh);
  end

  assign g = table_q[idx];

endmodule
