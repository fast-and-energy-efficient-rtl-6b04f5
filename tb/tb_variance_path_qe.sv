// tb_variance_path_qe: drives the QE variance stage with random Heston
// records and normal draws and compares every result with the real-valued
// reference (tb_ref_pkg::ref_variance).
// Phase 1: 400 independent first-timestep elements (variance seeded from
// the record's v0), each with a fresh random record, covering both the
// quadratic and the exponential branch (both must occur).
// Phase 2: a group of 16 paths over 12 timesteps with one record, checking
// that the per-path state memory carries each path's variance from one
// timestep to the next, under random input gaps and output back pressure.
// Phase 3: 64 back-to-back elements with no stalls must take 64 cycles.
module tb_variance_path_qe;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, in_ready, out_valid, out_ready = 1;
  elem_t       in_elem = '0;
  tag_t        in_tag = '0, out_tag;
  logic [15:0] cfg_asset;
  heston_cfg_t cfg = '0;
  fx_t         out_v_old, out_v_new, out_zx;
  int checks = 0, failures = 0;
  int n_quad = 0, n_exp = 0;

  variance_path_qe #(.MAX_GROUP(16)) dut (.*);

  always #5 clk = !clk;

  real exp_old [$], exp_new [$];
  fx_t exp_zx [$];
  int  n_out;

  // output monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    real wo, wn;
    fx_t wz;
    wo = exp_old.pop_front(); wn = exp_new.pop_front(); wz = exp_zx.pop_front();
    checks++;
    if (!close(fx2r(out_v_old), wo, 1e-8) || !close(fx2r(out_v_new), wn, 1e-8)
        || out_zx !== wz) begin
      failures++;
      if (failures < 10) $display("FAIL %0d: v_old %f/%f v_new %.9f/%.9f", n_out,
                                  fx2r(out_v_old), wo, fx2r(out_v_new), wn);
    end
    n_out++;
  end

  // drive one element; the reference value is computed from v (the true
  // state), then the element is held until accepted
  task automatic drive(real v, bit gaps);
    int br;
    real zv;
    zv = randn();
    in_elem.zv = r2fx(zv);
    in_elem.zx = r2fx(randn());
    exp_old.push_back(v);
    exp_new.push_back(ref_variance(v, fx2r(in_elem.zv), cfg, br));
    exp_zx.push_back(in_elem.zx);
    if (br == 0) n_quad++; else n_exp++;
    while (gaps && ($urandom % 3 == 0)) begin
      in_valid = 0; @(negedge clk);
    end
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    @(negedge clk);
    in_valid = 0;
  endtask

  real state [16];

  initial begin
    int t0, br;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1
    for (int i = 0; i < 400; i++) begin
      heston_t h;
      h = rand_heston();
      if (i % 2 == 1) h.v0 = 0.0005 + 0.002 * ($urandom % 1000) / 1000.0;
      cfg = make_cfg(h);
      in_tag = '0; in_tag.first_step = 1; in_tag.first_asset = 1;
      in_tag.path = 16'(i % 16);
      drive(fx2r(cfg.v0), 0);
    end
    // phase 2
    begin
      heston_t h;
      h = rand_heston();
      h.xi = 1.5;
      cfg = make_cfg(h);
    end
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 3 != 0); end
    join_none
    for (int t = 0; t < 12; t++)
      for (int p = 0; p < 16; p++) begin
        real v;
        in_tag = '0; in_tag.step = 16'(t); in_tag.path = 16'(p);
        in_tag.first_step = (t == 0);
        v = (t == 0) ? fx2r(cfg.v0) : state[p];
        drive(v, 1);
        state[p] = exp_new[$];
      end
    disable fork;
    out_ready = 1;
    repeat (3) @(negedge clk);
    // phase 3: throughput
    t0 = n_out;
    for (int i = 0; i < 64; i++) begin
      in_tag = '0; in_tag.first_step = 1; in_tag.path = 16'(i % 16);
      in_elem.zv = r2fx(randn()); in_elem.zx = r2fx(randn());
      exp_old.push_back(fx2r(cfg.v0));
      exp_new.push_back(ref_variance(fx2r(cfg.v0), fx2r(in_elem.zv), cfg, br));
      exp_zx.push_back(in_elem.zx);
      in_valid = 1;
      @(posedge clk);
      checks++;
      if (!in_ready) failures++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (n_out - t0 != 64) begin failures++; $display("FAIL throughput"); end
    checks++;
    if (n_quad == 0 || n_exp == 0) begin
      failures++; $display("FAIL branch coverage quad=%0d exp=%0d", n_quad, n_exp);
    end
    $display("branches: quadratic %0d exponential %0d", n_quad, n_exp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
