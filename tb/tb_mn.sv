// tb_mn: checks the mixed node against an independent formulation of the
// same updates: f(a,b) = sign(a)sign(b)min(|a|,|b|) + c(|a+b|) - c(|a-b|),
// with c(d) = 1 LSB for d <= 2 LSB, and g = b +/- a, both saturated to 8 bits.
// It also checks f against the exact real-valued box-plus within 1.5 LSB.
module tb_mn;
  localparam int Q = 8;
  logic signed [Q-1:0] a, b, y;
  logic sel_g, psum;
  int checks = 0, failures = 0;

  mn #(.Q(Q)) dut (.a(a), .b(b), .sel_g(sel_g), .psum(psum), .y(y));

  function automatic int sat(int v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return v;
  endfunction
  function automatic int c(int d);
    if (d < 0) d = -d;
    return (d <= 2) ? 1 : 0;
  endfunction
  function automatic int fref(int x, int z);
    int m, s;
    m = ((x < 0) ? -x : x) < ((z < 0) ? -z : z) ? ((x < 0) ? -x : x) : ((z < 0) ? -z : z);
    s = ((x < 0) != (z < 0)) ? -m : m;
    return sat(s + c(x + z) - c(x - z));
  endfunction

  initial begin : wd
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int ai, bi, exp;
      real fa, fb, fx, ry;
      ai = int'($urandom_range(255)) - 128;
      bi = int'($urandom_range(255)) - 128;
      if (t < 64) begin ai = (t % 8) - 4; bi = (t / 8) - 4; end
      a = ai[Q-1:0]; b = bi[Q-1:0];
      sel_g = t[0]; psum = t[1];
      #1;
      if (sel_g) exp = sat(psum ? bi - ai : bi + ai);
      else       exp = fref(ai, bi);
      checks++;
      if (int'(y) != exp) begin
        failures++;
        if (failures < 10) $display("mismatch a=%0d b=%0d g=%0d u=%0d y=%0d exp=%0d", ai, bi, sel_g, psum, y, exp);
      end
      if (!sel_g && ai > -100 && ai < 100 && bi > -100 && bi < 100) begin
        fa = ai; fb = bi; fa = fa / 2.0; fb = fb / 2.0;
        fx = $ln((1.0 + $exp(fa + fb)) / ($exp(fa) + $exp(fb)));
        ry = y;
        ry = ry / 2.0;
        checks++;
        if ((ry - fx) > 0.75 || (fx - ry) > 0.75) begin
          failures++;
          $display("box-plus error a=%0d b=%0d y=%0d exact=%f", ai, bi, y, fx);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
