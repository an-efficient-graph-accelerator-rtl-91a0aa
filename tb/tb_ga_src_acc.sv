// tb_ga_src_acc: checks the tag-segmented Ladner-Fischer prefix against the
// sequential recurrence f(i) = f(i-1) (+) a_i when tag_i = tag_(i-1), else a_i,
// for random contiguous tag runs, random values and all four algorithm modes
// (min for BFS/WCC, integer add for ALG_PR, float add for ALG_PRF). Float
// prefixes are compared with a relative tolerance of 1e-5, since the network
// adds in a different order than the sequential reference. The float adder
// itself (ga_pkg::fp_add) is first checked bit-exactly on random operands of
// both signs: the reference adds them exactly in double precision (exponents
// within 28 of each other, so the double sum is exact) and rounds the double
// to single precision, nearest even, from its bit pattern.
// Combinational block, so each vector is checked after a short settle delay.
module tb_ga_src_acc;
  import ga_pkg::*;
  localparam int N = 16, TAG_W = 3;
  alg_e alg;
  val_t in_val[N], out_val[N];
  logic [TAG_W-1:0] in_tag[N];
  int checks = 0, failures = 0;

  ga_src_acc #(.N(N), .TAG_W(TAG_W)) dut (.alg(alg), .in_val(in_val), .in_tag(in_tag), .out_val(out_val));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // single-precision bits -> real (normal numbers and zero)
  function automatic real f2r(val_t a);
    real m;
    if (a[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(a[22:0]) / 8388608.0;
    for (int k = 127; k < int'(a[30:23]); k++) m = m * 2.0;
    for (int k = int'(a[30:23]); k < 127; k++) m = m / 2.0;
    return a[31] ? -m : m;
  endfunction

  // real -> single-precision bits, round to nearest even (normal range only)
  function automatic val_t r2f(real x);
    logic [63:0] d;
    logic [23:0] m;
    int e;
    if (x == 0.0) return '0;
    d = $realtobits(x);
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:29]};
    if (d[28] && ((|d[27:0]) || d[29])) begin
      m = m + 24'd1;
      if (m == 24'd0) begin m = 24'h800000; e = e + 1; end
    end
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic val_t rnd_float(bit neg_ok);
    logic [7:0] ex;
    ex = 8'(115 + $urandom % 29);
    return {neg_ok ? 1'($urandom) : 1'b0, ex, 23'($urandom)};
  endfunction

  function automatic bit close(val_t a, real b);
    real x, tol;
    x = f2r(a);
    tol = 1e-5 * ((b < 0) ? -b : b) + 1e-30;
    return (x - b <= tol) && (b - x <= tol);
  endfunction

  initial begin
    val_t f;
    real fr;
    logic [TAG_W-1:0] t;
    // float adder against the simulator's single-precision arithmetic
    for (int k = 0; k < 20000; k++) begin
      val_t a, b, got, exp_v;
      a = rnd_float(1);
      b = (k % 5 == 0) ? {~a[31], a[30:0] ^ 31'($urandom % 4)} : rnd_float(1);
      exp_v = r2f(f2r(a) + f2r(b));
      got = fp_add(a, b);
      checks++;
      if (got !== exp_v && !(got[30:0] == 0 && exp_v[30:0] == 0)) begin
        failures++;
        if (failures < 5) $display("FAIL fp_add %h + %h = %h, expected %h", a, b, got, exp_v);
      end
    end
    for (int it = 0; it < 800; it++) begin
      alg = alg_e'(it % 4);
      t = '0;   // at most M runs per beat, so tags never wrap
      for (int i = 0; i < N; i++) begin
        if (i > 0 && ($urandom % 4) == 0 && t != '1) t = t + 1'b1;
        in_tag[i] = t;
        in_val[i] = (alg == ALG_PR) ? val_t'($urandom % 100000) :
                    (alg == ALG_PRF) ? rnd_float(0) : val_t'($urandom);
      end
      if (it < 3) for (int i = 0; i < N; i++) in_tag[i] = '0;   // one vertex over all lanes
      #1;
      for (int i = 0; i < N; i++) begin
        if (i == 0 || in_tag[i] != in_tag[i-1]) begin
          f = in_val[i];
          fr = f2r(in_val[i]);
        end else begin
          f = reduce(alg, f, in_val[i]);
          fr = fr + f2r(in_val[i]);
        end
        checks++;
        if ((alg == ALG_PRF) ? !close(out_val[i], fr) : (out_val[i] !== f)) begin
          failures++;
          if (failures < 5) $display("FAIL it=%0d lane=%0d got=%0d exp=%0d", it, i, out_val[i], f);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
