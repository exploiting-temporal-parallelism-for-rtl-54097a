// tb_lstm_ae_pkg -- self-checking test of the shared package.
//
// Arithmetic: fx_mul, pwl_sigmoid and pwl_tanh are compared with the
// independently written reference functions over many random and
// hand-picked arguments (segment edges, saturation, the most negative
// value). Sizing: for the four evaluated autoencoders (F32/F64, D2/D6,
// with the RH_m values of the paper's resource table) the layer sizes must
// halve and double as named, every layer's reuse factor must satisfy the
// balancing equation RH_i = (LH_m - LH_i)/LH_i + (LH_m/LH_i)*RH_m, the
// per-timestep latencies must all equal LH_m*(RH_m+1), and M*R must cover
// the 4*LH rows.
module tb_lstm_ae_pkg;
  import lstm_ae_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic model(int F, int D, int RHM);
    int lhm, lat, dims [8];
    lhm = 0;
    for (int k = 0; k <= D; k++)
      dims[k] = (k <= D / 2) ? F >> k : F >> (D - k);
    for (int i = 0; i < D; i++) if (dims[i+1] > lhm) lhm = dims[i+1];
    lat = lhm * RHM + lhm;
    check(lat_t_m(F, D, RHM) == lat, $sformatf("F%0d-D%0d Lat_t_m", F, D));
    for (int i = 0; i < D; i++) begin
      int lx, lh, rh, rx, mx, mh;
      lx = layer_lx(F, D, i); lh = layer_lh(F, D, i);
      rh = layer_rh(F, D, RHM, i); rx = layer_rx(F, D, RHM, i);
      mx = lanes(lh, rx); mh = lanes(lh, rh);
      check(lx == dims[i] && lh == dims[i+1], $sformatf("F%0d-D%0d layer %0d dims", F, D, i));
      check(rh == (lhm - lh) / lh + (lhm / lh) * RHM, $sformatf("F%0d-D%0d layer %0d RH", F, D, i));
      check(mvm_lat(lh, rh, lh) == lat, $sformatf("F%0d-D%0d layer %0d H_t", F, D, i));
      check(mvm_lat(lx, rx, lh) <= lat, $sformatf("F%0d-D%0d layer %0d X_t", F, D, i));
      check(mx * rx >= 4 * lh && (mx - 1) * rx < 4 * lh, $sformatf("MX layer %0d", i));
      check(mh * rh >= 4 * lh && (mh - 1) * rh < 4 * lh, $sformatf("MH layer %0d", i));
      $display("F%0d-D%0d L%0d: LX=%0d LH=%0d RX=%0d RH=%0d MX=%0d MH=%0d X_t=%0d H_t=%0d",
               F, D, i, lx, lh, rx, rh, mx, mh, mvm_lat(lx, rx, lh), mvm_lat(lh, rh, lh));
    end
  endtask

  initial begin
    static int pts [] = '{0, 1, -1, 16777216, -16777216, 16777215, 39845888, 39845887,
                   83886080, 83886079, -83886080, 67108864, -67108864, 33554432,
                   32'h7fffffff, 32'h80000000, 8388608, -8388608};
    foreach (pts[n]) begin
      check(pwl_sigmoid(pts[n]) == r_sig(pts[n]), $sformatf("sigmoid(%h)", pts[n]));
      check(pwl_tanh(pts[n])    == r_tanh(pts[n]), $sformatf("tanh(%h)", pts[n]));
    end
    check(pwl_sigmoid(0) == 32'sd8388608, "sigmoid(0) = 0.5");
    check(pwl_sigmoid(32'sd16777216) == 32'sd12582912, "sigmoid(1) = 0.75");
    check(pwl_tanh(0) == 0, "tanh(0) = 0");
    check(pwl_tanh(32'sd100000000) == 32'sd16777216, "tanh saturates at 1");
    for (int n = 0; n < 2000; n++) begin
      int a, b;
      a = $urandom(); b = r_rand(28);
      check(pwl_sigmoid(a) == r_sig(a), $sformatf("sigmoid(%h)", a));
      check(pwl_tanh(b) == r_tanh(b), $sformatf("tanh(%h)", b));
      check(fx_mul(a, b) == r_mul(a, b), $sformatf("mul(%h,%h)", a, b));
    end
    model(32, 2, 1);
    model(64, 2, 4);
    model(32, 6, 1);
    model(64, 6, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
