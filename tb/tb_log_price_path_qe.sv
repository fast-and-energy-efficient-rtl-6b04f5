// tb_log_price_path_qe: drives the QE log-price stage with random variance
// pairs and draws. Phase 1 seeds each element from the record's ln S0
// (timestep 0) with a fresh random record. Phase 2 runs 16 paths over 10
// timesteps with one record under random gaps and back pressure, checking
// that the per-path log-price state carries over. Every output is compared
// with tb_ref_pkg::ref_log_price; 64 back-to-back elements must take 64
// cycles.
module tb_log_price_path_qe;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, in_ready, out_valid, out_ready = 1;
  tag_t        in_tag = '0, out_tag;
  fx_t         in_v_old = '0, in_v_new = '0, in_zx = '0, out_lnx;
  logic [15:0] cfg_asset;
  heston_cfg_t cfg = '0;
  int checks = 0, failures = 0;

  log_price_path_qe #(.MAX_GROUP(16)) dut (.*);

  always #5 clk = !clk;

  real  exp_lnx [$];
  tag_t exp_tag [$];
  int   n_out = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    real w;
    tag_t e;
    w = exp_lnx.pop_front(); e = exp_tag.pop_front();
    checks++;
    if (!close(fx2r(out_lnx), w, 1e-9) || out_tag !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %0d: lnx %.9f/%.9f", n_out, fx2r(out_lnx), w);
    end
    n_out++;
  end

  task automatic drive(real lnx, bit gaps);
    in_v_old = r2fx(0.001 + 0.1 * ($urandom % 1000) / 1000.0);
    in_v_new = ($urandom % 4 == 0) ? '0 : r2fx(0.001 + 0.1 * ($urandom % 1000) / 1000.0);
    in_zx    = r2fx(randn());
    exp_lnx.push_back(ref_log_price(lnx, fx2r(in_v_old), fx2r(in_v_new), fx2r(in_zx), cfg));
    exp_tag.push_back(in_tag);
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
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      cfg = make_cfg(rand_heston());
      in_tag = '0; in_tag.first_step = 1; in_tag.path = 16'(i % 16);
      in_tag.asset = 16'($urandom % 50);
      drive(fx2r(cfg.lns0), 0);
    end
    cfg = make_cfg(rand_heston());
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 3 != 0); end
    join_none
    for (int t = 0; t < 10; t++)
      for (int p = 0; p < 16; p++) begin
        in_tag = '0; in_tag.step = 16'(t); in_tag.path = 16'(p);
        in_tag.first_step = (t == 0);
        drive((t == 0) ? fx2r(cfg.lns0) : state[p], 1);
        state[p] = exp_lnx[$];
      end
    disable fork;
    out_ready = 1;
    repeat (3) @(negedge clk);
    t0 = n_out;
    for (int i = 0; i < 64; i++) begin
      in_tag = '0; in_tag.first_step = 1; in_tag.path = 16'(i % 16);
      in_v_old = r2fx(0.04); in_v_new = r2fx(0.03); in_zx = r2fx(randn());
      exp_lnx.push_back(ref_log_price(fx2r(cfg.lns0), 0.04, fx2r(in_v_new), fx2r(in_zx), cfg));
      exp_tag.push_back(in_tag);
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
