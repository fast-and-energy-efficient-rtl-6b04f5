// tb_asset_path_exponential: 2000 random log prices over [-20, 12] (plus a
// few edge values) through the exponential stage under random gaps and back
// pressure; each output must match $exp to a relative 1e-9 and keep its
// tag. With no stalls, 100 elements must take 100 cycles.
module tb_asset_path_exponential;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  tag_t in_tag = '0, out_tag;
  fx_t  in_lnx = '0, out_price;
  int checks = 0, failures = 0;
  bit stalls = 1;

  asset_path_exponential dut (.*);

  always #5 clk = !clk;

  real  exp_p [$];
  tag_t exp_t [$];
  int   n_out = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    real w;
    tag_t e;
    w = exp_p.pop_front(); e = exp_t.pop_front();
    checks++;
    if (!close(fx2r(out_price), w, 1e-9) || out_tag !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %0d: %.12f / %.12f", n_out, fx2r(out_price), w);
    end
    n_out++;
  end

  always @(negedge clk) out_ready = !stalls || ($urandom % 3 != 0);

  task automatic drive(real x);
    in_lnx = r2fx(x);
    in_tag = '0; in_tag.path = 16'($urandom); in_tag.asset = 16'($urandom);
    exp_p.push_back($exp(fx2r(in_lnx)));
    exp_t.push_back(in_tag);
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    drive(0.0); drive(1.0); drive(-1.0); drive(4.605170185988091); drive(-20.0);
    for (int i = 0; i < 2000; i++) drive(-20.0 + 32.0 * ($urandom % 100000) / 100000.0);
    stalls = 0;
    repeat (3) @(negedge clk);
    t0 = n_out;
    for (int i = 0; i < 100; i++) begin
      in_lnx = r2fx(4.0 + 0.01 * i);
      exp_p.push_back($exp(fx2r(in_lnx)));
      exp_t.push_back(in_tag);
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (n_out - t0 != 99) begin failures++; $display("FAIL throughput %0d", n_out - t0); end
    repeat (3) @(negedge clk);
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
