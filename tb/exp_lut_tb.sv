// exp_lut_tb -- checks the Gaussian lookup table against exp(-d2/2).
//
// Sweeps d2 from 0 to beyond the table's range (16) in small steps and at
// random points, and compares the FP16 output with the real function.  The
// allowed error is that of a table with 512 entries over [0, 16): half an
// entry's width of slope, plus FP16 rounding.  Beyond the range the output
// must be the last (smallest) entry.
module exp_lut_tb;
  import gbu_pkg::*;

  int checks = 0, failures = 0;
  fp16_t d2 = '0, g;

  exp_lut #(.ENTRIES(512)) dut (.d2(d2), .g(g));

  // FP16 <-> real conversions used by the reference model.
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

  task automatic check(input real x);
    real want, got, tol;
    d2 = r2h(x);
    #1;
    want = $exp(-h2r(d2) / 2.0);
    got  = h2r(g);
    tol  = want * (16.0 / 512.0) + 0.002;
    if (h2r(d2) >= 16.0) begin
      want = $exp(-8.0);
      tol  = 0.001;
    end
    checks++;
    if ((got - want) > tol || (want - got) > tol) begin
      failures++;
      if (failures < 10) $display("FAIL d2=%f g=%f want=%f", h2r(d2), got, want);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 900; i++) check(real'(i) * 0.02);
    for (int i = 0; i < 500; i++) check(real'($urandom % 100000) / 5000.0);
    check(0.0);
    check(100.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
