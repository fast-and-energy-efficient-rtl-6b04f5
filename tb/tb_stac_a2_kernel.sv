// tb_stac_a2_kernel: one complete run of the benchmark kernel (4 assets,
// 6 timesteps, 11 paths in groups of 4, so three path groups with a short
// last one). The Heston records are loaded through the configuration port,
// the reordered element stream is driven with random gaps and the result
// stream is drained with random back pressure. Every result is compared
// with the whole-run reference (tb_ref_pkg::ref_run) to a relative 1e-8;
// ap_done must pulse exactly once, after the last result. A second run with
// no gaps and no back pressure checks that the kernel takes one element
// per cycle (the 4 x 6 x 11 = 264 elements enter in 264 cycles).
module tb_stac_a2_kernel;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  localparam int NA = 4, NT = 6, NP = 11, G = 4;
  logic             clk = 0, rst_n = 0;
  logic             cfg_we = 0;
  logic [15:0]      cfg_asset = '0;
  heston_cfg_t      cfg_data = '0;
  logic             ap_start = 0, ap_done, ap_idle;
  logic [15:0]      assets = NA, timesteps = NT, paths_per_group = G;
  logic [CNT_W-1:0] paths = NP;
  logic             in_valid = 0, in_ready, out_valid, out_ready = 0, fill_stall;
  elem_t            in_elem = '0;
  fx_t              out_data;
  int checks = 0, failures = 0, n_done = 0, n_stall = 0;
  bit stalls = 1;

  stac_a2_kernel #(.MAX_ASSETS(8), .MAX_STEPS(8), .MAX_GROUP(4)) dut (.*);

  always #5 clk = !clk;

  heston_cfg_t cfg [];
  elem_t       el [];
  elem_t       stream [$];
  real         res [$];
  int          n_exp, n_out, n_in;

  always @(posedge clk) if (rst_n) begin
    if (ap_done) n_done++;
    if (fill_stall) n_stall++;
    if (out_valid && out_ready) begin
      checks++;
      if (n_out >= res.size() || !close(fx2r(out_data), res[n_out], 1e-8)) begin
        failures++;
        if (failures < 10) $display("FAIL result %0d: %.9f / %.9f", n_out, fx2r(out_data), res[n_out]);
      end
      n_out++;
    end
    if (in_valid && in_ready) n_in++;
  end

  always @(negedge clk) out_ready = !stalls || ($urandom % 3 != 0);

  task automatic run(output int in_cycles);
    int c;
    n_out = 0; n_in = 0;
    @(negedge clk); ap_start = 1; @(negedge clk); ap_start = 0;
    c = 0;
    for (int i = 0; i < stream.size(); i++) begin
      while (stalls && ($urandom % 4 == 0)) begin @(negedge clk); c++; end
      in_elem = stream[i]; in_valid = 1;
      do begin @(posedge clk); c++; end while (!in_ready);
      @(negedge clk);
      in_valid = 0;
    end
    in_cycles = c;
    while (!ap_idle) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    int c, nd;
    cfg = new[NA];
    el  = new[NA * NT * NP];
    for (int a = 0; a < NA; a++) cfg[a] = make_cfg(rand_heston());
    for (int i = 0; i < NA * NT * NP; i++) begin
      el[i].zv = r2fx(randn()); el[i].zx = r2fx(randn());
    end
    ref_run(cfg, el, NA, NT, NP, G, stream, res, n_exp);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NA; a++) begin
      cfg_we = 1; cfg_asset = 16'(a); cfg_data = cfg[a];
      @(negedge clk);
    end
    cfg_we = 0;
    run(c);
    checks++;
    if (n_out != NP * NT || n_done != 1) begin
      failures++; $display("FAIL run 1: %0d results, %0d done pulses", n_out, n_done);
    end
    stalls = 0;
    run(c);
    checks++;
    if (n_out != NP * NT || n_done != 2) begin
      failures++; $display("FAIL run 2: %0d results, %0d done pulses", n_out, n_done);
    end
    checks++;
    if (c != NA * NT * NP) begin failures++; $display("FAIL rate: %0d cycles", c); end
    $display("exponential-branch elements %0d of %0d, fill stall cycles %0d, %0d elements in %0d cycles",
             n_exp, NA * NT * NP, n_stall, NA * NT * NP, c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
