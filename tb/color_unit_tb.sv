// color_unit_tb -- checks the Color Computation Unit.
//
// For random Gaussian weights, opacities, colours and incoming pixel states
// it recomputes front-to-back blending in real arithmetic:
// alpha = min(o*g, 0.99), rgb += T*alpha*c, T *= 1 - alpha, and compares
// every output with an FP16 tolerance.  A chain of blends on one pixel
// checks that the error does not grow out of bounds, and a fully opaque
// fragment checks the alpha clamp.
module color_unit_tb;
  import gbu_pkg::*;

  int checks = 0, failures = 0;
  fp16_t g = '0, opacity = '0;
  fp16_t [2:0] color = '0;
  pixel_t pix_in = '0, pix_out;

  color_unit dut (.*);

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

  task automatic cmp(input real got, input real want, input real tol, input string what);
    checks++;
    if (got - want > tol || want - got > tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %f want %f", what, got, want);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, t, r[3];
    for (int n = 0; n < 2000; n++) begin
      g       = r2h(real'($urandom % 1000) / 999.0);
      opacity = r2h(real'($urandom % 1000) / 999.0);
      for (int i = 0; i < 3; i++) begin
        color[i]      = r2h(real'($urandom % 1000) / 999.0);
        pix_in.rgb[i] = r2h(real'($urandom % 1000) / 999.0);
      end
      pix_in.t = r2h(real'($urandom % 1000) / 999.0);
      #1;
      a = h2r(opacity) * h2r(g);
      if (a > 0.99) a = 0.99;
      t = h2r(pix_in.t);
      for (int i = 0; i < 3; i++)
        cmp(h2r(pix_out.rgb[i]), h2r(pix_in.rgb[i]) + t * a * h2r(color[i]), 0.004, "rgb");
      cmp(h2r(pix_out.t), t * (1.0 - a), 0.002, "T");
    end
    // a chain of 40 blends on one pixel
    pix_in = PIXEL_INIT;
    t = 1.0; r[0] = 0.0; r[1] = 0.0; r[2] = 0.0;
    for (int n = 0; n < 40; n++) begin
      g = r2h(0.9); opacity = r2h(0.3);
      for (int i = 0; i < 3; i++) color[i] = r2h(real'($urandom % 100) / 99.0);
      #1;
      a = h2r(g) * h2r(opacity);
      for (int i = 0; i < 3; i++) r[i] += t * a * h2r(color[i]);
      t = t * (1.0 - a);
      pix_in = pix_out;
    end
    for (int i = 0; i < 3; i++) cmp(h2r(pix_out.rgb[i]), r[i], 0.03, "chain rgb");
    cmp(h2r(pix_out.t), t, 0.002, "chain T");
    // alpha clamp
    g = FP16_ONE; opacity = FP16_ONE; pix_in = PIXEL_INIT;
    color = {FP16_ONE, FP16_ONE, FP16_ONE};
    #1;
    cmp(h2r(pix_out.t), 0.01, 0.001, "clamp T");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
