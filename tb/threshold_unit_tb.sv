// threshold_unit_tb -- checks the Threshold Computation Unit.
//
// For random row parameters (first x'', step dx'', y''^2, threshold) and
// every column offset k it recomputes x''_k = x''_0 + k*dx'' and
// d2 = x''_k^2 + y''^2 in real arithmetic and compares d2 (relative FP16
// tolerance) and the inside flag (exact, except within the tolerance band
// around the threshold, where either answer is accepted).
module threshold_unit_tb;
  import gbu_pkg::*;

  int checks = 0, failures = 0;
  fp16_t x_first = '0, dx = '0, y2 = '0, th = '0, d2;
  logic [3:0] k = '0;
  logic in_gauss;

  threshold_unit dut (.*);

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

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xf, ddx, yy, t, xk, want, tol;
    for (int n = 0; n < 400; n++) begin
      xf  = (real'($urandom % 2000) - 1000.0) / 250.0;
      ddx = (real'($urandom % 2000) - 1000.0) / 2000.0;
      yy  = real'($urandom % 1000) / 100.0;
      t   = real'($urandom % 1100) / 100.0 + 0.5;
      x_first = r2h(xf); dx = r2h(ddx); y2 = r2h(yy); th = r2h(t);
      for (int kk = 0; kk < 16; kk++) begin
        k = 4'(kk);
        #1;
        xk   = h2r(x_first) + real'(kk) * h2r(dx);
        want = xk * xk + h2r(y2);
        tol  = 0.01 * want + 0.03;
        checks++;
        if (h2r(d2) - want > tol || want - h2r(d2) > tol) begin
          failures++;
          if (failures < 10) $display("FAIL d2 %f want %f", h2r(d2), want);
        end
        checks++;
        if ((want < h2r(th) - tol && !in_gauss) || (want > h2r(th) + tol && in_gauss)) begin
          failures++;
          if (failures < 10) $display("FAIL in_gauss %b d2 %f th %f", in_gauss, want, h2r(th));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
