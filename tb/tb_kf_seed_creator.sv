// tb_kf_seed_creator: checks the seed state built from random tracklet seeds.
// For every seed type the layer mask must hold exactly the two seeding layers
// (L1L2, L3L4, L5L6, L1D1, L2D1, D1D2, D3D4); parameters are copied, the
// covariance is the diagonal default, chi2 is zero, two stubs count as used,
// and the state appears exactly one cycle after the seed.
module tb_kf_seed_creator;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, seed_valid = 1'b0, ev = 1'b0, state_valid;
  seed_t seed = '0;
  state_t state;
  int checks = 0, failures = 0;

  kf_seed_creator dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // expected masks, written out by layer number (L1..L6 = 0..5, D1..D5 = 6..10)
  function automatic logic [NLAYER-1:0] mask2(int a, int b);
    return (NLAYER'(1) << a) | (NLAYER'(1) << b);
  endfunction
  logic [NLAYER-1:0] want_mask [7];
  initial begin
    want_mask[0] = mask2(0, 1); want_mask[1] = mask2(2, 3); want_mask[2] = mask2(4, 5);
    want_mask[3] = mask2(0, 6); want_mask[4] = mask2(1, 6); want_mask[5] = mask2(6, 7);
    want_mask[6] = mask2(8, 9);
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 70; i++) begin
      seed_t s;
      @(negedge clk);
      s = seed_t'({$urandom, $urandom, $urandom, $urandom});
      s.stype = 3'(i % 7);
      seed = s; ev = 1'($urandom); seed_valid = 1'b1;
      @(negedge clk);
      seed_valid = 1'b0;
      check(state_valid, "valid one cycle later");
      check(state.slot == s.slot && state.nstubs == s.nstubs && state.ev == ev, "ids");
      check(state.lmask == want_mask[i % 7], $sformatf("mask of seed type %0d", i % 7));
      check(state.inv2r == s.inv2r && state.phi0 == s.phi0 &&
            state.tanl == s.tanl && state.z0 == s.z0, "parameters copied");
      check(state.nused == 3'd2 && state.nxt == 0, "two seed stubs, first stub next");
      check(state.c_rphi.aa == 2250000 && state.c_rphi.ab == 0 && state.c_rphi.bb == 68644 &&
            state.c_rz.aa == 1681 && state.c_rz.ab == 0 && state.c_rz.bb == 2500, "covariance");
      check(state.chi2_rphi == 0 && state.chi2_rz == 0, "chi2 zero");
      @(negedge clk);
      check(!state_valid, "single-cycle valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
