// tb_kf_state_updater: checks the Kalman update against a floating-point model.
//
// Random states (parameters and positive-definite covariances) and stubs are
// pushed into the updater back to back, one per cycle. For each, a model in
// `real` arithmetic computes the textbook Kalman update of both planes
// (residual, gain, new parameters, new covariance, chi2 increment) with the
// same hit variances; the updater's fixed-point results must agree within
// a small tolerance. The latency from in_valid to out_valid must be exactly
// 46 cycles and the pipeline must accept a new stub every cycle.
module tb_kf_state_updater;
  import kf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid, busy;
  state_t in_state = '0, out_state;
  stub_t  in_stub = '0;
  int checks = 0, failures = 0;

  localparam int N = 300;
  localparam int V_PHI_TB [NLAYER] = '{990, 505, 247, 126, 76, 51, 247, 247, 247, 247, 247};

  kf_state_updater dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    real a, b, caa, cab, cbb, chi2;
  } rplane_t;

  state_t exp_q [$];
  real    tol_q [$];
  rplane_t e_rphi [$], e_rz [$];
  int     t_in [$];
  int     cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic rplane_t kupd(real a, real b, real caa, real cab, real cbb,
                                   real h, real m, real v);
    rplane_t o;
    real res, hca, hcb, s, ka, kb;
    h   = h / 4096.0;
    res = m - (b + h * a);
    hca = h * caa + cab;
    hcb = h * cab + cbb;
    s   = v + h * hca + hcb;
    ka  = hca / s;
    kb  = hcb / s;
    o.a = a + ka * res;
    o.b = b + kb * res;
    o.caa = caa - ka * hca;
    o.cab = cab - ka * hcb;
    o.cbb = cbb - kb * hcb;
    o.chi2 = res * res / s;
    return o;
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % 32'(hi - lo + 1));
  endfunction

  function automatic real rabs(real x); return x < 0 ? -x : x; endfunction

  function automatic bit near(real got, real want, real rel, real absl);
    return rabs(got - want) <= absl + rel * rabs(want);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      state_t s;
      stub_t  u;
      real sa, sb, rho, ms, vphi, vz;
      rplane_t p1, p2;
      @(negedge clk);
      s = '0;
      s.slot  = CAND_W'($urandom);
      s.nused = 3'd2 + 3'(rnd(0, 3));
      s.lmask = 11'b11;
      s.inv2r = PAR_W'(rnd(0, 60000) - 30000);
      s.phi0  = PAR_W'(rnd(0, 160000) - 80000);
      s.tanl  = PAR_W'(rnd(0, 16000) - 8000);
      s.z0    = PAR_W'(rnd(0, 1200) - 600);
      sa = rnd(50, 1500); sb = rnd(20, 260);
      rho = (rnd(0, 160) - 80) / 100.0;
      s.c_rphi.aa = COV_W'(int'(sa * sa)); s.c_rphi.bb = COV_W'(int'(sb * sb));
      s.c_rphi.ab = COV_W'(int'(rho * sa * sb));
      sa = rnd(5, 41); sb = rnd(5, 50);
      rho = (rnd(0, 160) - 80) / 100.0;
      s.c_rz.aa = COV_W'(int'(sa * sa)); s.c_rz.bb = COV_W'(int'(sb * sb));
      s.c_rz.ab = COV_W'(int'(rho * sa * sb));
      s.chi2_rphi = CHI2_W'(rnd(0, 500));
      s.chi2_rz   = CHI2_W'(rnd(0, 500));
      u = '0;
      u.layer = 4'(rnd(2, 10));
      u.ps    = 1'($urandom);
      u.r     = R_W'(rnd(2300, 11500));
      u.phi   = PHI_W'(int'(s.phi0) - ((int'(u.r) * int'(s.inv2r)) >>> 12) + rnd(0, 200) - 100);
      u.z     = Z_W'(int'(s.z0) + ((int'(u.r) * int'(s.tanl)) >>> 12) + rnd(0, 200) - 100);
      in_state = s; in_stub = u; in_valid = 1'b1;
      // model
      ms   = $floor(((s.inv2r < 0 ? -real'(s.inv2r) : real'(s.inv2r)) * 421.0) / 131072.0);
      vphi = V_PHI_TB[u.layer] + ms * ms;
      vz   = u.ps ? 19.0 : 20736.0;
      p1 = kupd(s.inv2r, s.phi0, s.c_rphi.aa, s.c_rphi.ab, s.c_rphi.bb, -real'(u.r), u.phi, vphi);
      p2 = kupd(s.tanl, s.z0, s.c_rz.aa, s.c_rz.ab, s.c_rz.bb, real'(u.r), u.z, vz);
      p1.chi2 += s.chi2_rphi / 16.0; p2.chi2 += s.chi2_rz / 16.0;
      // chi2 saturates at its register width
      if (p1.chi2 > 65535.9375) p1.chi2 = 65535.9375;
      if (p2.chi2 > 65535.9375) p2.chi2 = 65535.9375;
      e_rphi.push_back(p1); e_rz.push_back(p2); exp_q.push_back(s); t_in.push_back(cyc);
    end
    @(negedge clk);
    in_valid = 1'b0;
  end

  // check
  initial begin
    int n = 0;
    while (n < N) begin
      @(negedge clk);
      if (out_valid) begin
        state_t s, o;
        rplane_t p1, p2;
        o = out_state; s = exp_q.pop_front(); p1 = e_rphi.pop_front(); p2 = e_rz.pop_front();
        check(cyc - t_in.pop_front() == 46, $sformatf("latency %0d", n));
        check(o.slot == s.slot && o.nused == s.nused + 1, "bookkeeping");
        check(o.lmask == (s.lmask | (11'd1 << in_stub_layer(n))), "layer mask");
        check(near(o.inv2r, p1.a, 1e-3, 3), $sformatf("inv2r %0d model %f", o.inv2r, p1.a));
        check(near(o.phi0,  p1.b, 1e-4, 3), $sformatf("phi0 %0d model %f", o.phi0, p1.b));
        check(near(o.tanl,  p2.a, 1e-3, 3), $sformatf("tanl %0d model %f", o.tanl, p2.a));
        check(near(o.z0,    p2.b, 1e-3, 3), $sformatf("z0 %0d model %f", o.z0, p2.b));
        check(near(o.c_rphi.aa, p1.caa, 1e-2, 4), $sformatf("caa %0d model %f", o.c_rphi.aa, p1.caa));
        check(near(o.c_rphi.ab, p1.cab, 1e-2, 4), $sformatf("cab %0d model %f", o.c_rphi.ab, p1.cab));
        check(near(o.c_rphi.bb, p1.cbb, 1e-2, 4), $sformatf("cbb %0d model %f", o.c_rphi.bb, p1.cbb));
        check(near(o.c_rz.aa, p2.caa, 1e-2, 4), "rz caa");
        check(near(o.c_rz.bb, p2.cbb, 1e-2, 4), "rz cbb");
        check(near(o.chi2_rphi / 16.0, p1.chi2, 1e-2, 0.2), $sformatf("chi2 rphi %f model %f", o.chi2_rphi/16.0, p1.chi2));
        check(near(o.chi2_rz / 16.0, p2.chi2, 1e-2, 0.2), "chi2 rz");
        n++;
      end
    end
    @(negedge clk);
    check(!busy, "pipeline empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // layers driven, kept in order for the mask check
  logic [3:0] layer_q [$];
  always @(posedge clk) if (in_valid) layer_q.push_back(in_stub.layer);
  function automatic logic [3:0] in_stub_layer(int unused);
    return layer_q.pop_front();
  endfunction
endmodule
