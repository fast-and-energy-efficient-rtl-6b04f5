// tb_path_group_sequencer: runs two problems through the loop-nest
// sequencer (one where paths divide evenly into groups, one with a short
// last group), with random gaps on the input and random back pressure on
// the output. Every tag is compared with a software loop nest, the element
// payload must pass unchanged, busy must fall after the last element, and
// with no gaps and no back pressure the block must take one element per
// cycle.
module tb_path_group_sequencer;
  import stac_a2_pkg::*;

  logic             clk = 0, rst_n = 0, start = 0;
  logic [15:0]      assets, timesteps, paths_per_group;
  logic [CNT_W-1:0] paths;
  logic             busy;
  logic             in_valid = 0, in_ready, out_valid, out_ready = 0;
  elem_t            in_elem, out_elem;
  tag_t             out_tag;
  int checks = 0, failures = 0;
  bit  stall_en;

  path_group_sequencer dut (.*);

  always #5 clk = !clk;

  // expected tag queue filled by the software loop nest
  tag_t  exp_tag [$];
  elem_t exp_elem [$];
  int    n_out;

  task automatic run(int na, int nt, int np, int g, bit stalls, output int cycles);
    int ng, last, total, sent, t0;
    assets = 16'(na); timesteps = 16'(nt); paths = CNT_W'(np); paths_per_group = 16'(g);
    stall_en = stalls;
    ng = (np + g - 1) / g;
    last = np - (ng - 1) * g;
    exp_tag.delete();
    for (int gi = 0; gi < ng; gi++) begin
      int sz = (gi == ng - 1) ? last : g;
      for (int a = 0; a < na; a++)
        for (int t = 0; t < nt; t++)
          for (int p = 0; p < sz; p++) begin
            tag_t e;
            e.group = CNT_W'(gi); e.asset = 16'(a); e.step = 16'(t); e.path = 16'(p);
            e.group_paths = 16'(sz);
            e.first_asset = (a == 0); e.first_step = (t == 0);
            e.group_end = (a == na-1) && (t == nt-1) && (p == sz-1);
            e.run_end = e.group_end && (gi == ng-1);
            exp_tag.push_back(e);
          end
    end
    total = exp_tag.size();
    n_out = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not set"); end
    sent = 0; t0 = 0;
    while (n_out < total) begin
      in_valid = (sent < total) && (!stall_en || ($urandom % 4 != 0));
      if (in_valid) begin
        in_elem.zv = fx_t'({$urandom, $urandom}); in_elem.zx = fx_t'({$urandom, $urandom});
      end
      out_ready = !stall_en || ($urandom % 3 != 0);
      @(posedge clk);
      t0++;
      if (in_valid && in_ready) begin exp_elem.push_back(in_elem); sent++; end
      if (out_valid && out_ready) begin
        tag_t e = exp_tag.pop_front();
        elem_t d = exp_elem.pop_front();
        checks++;
        if (out_tag !== e || out_elem !== d) begin
          failures++;
          if (failures < 10)
            $display("FAIL elem %0d: got g%0d a%0d t%0d p%0d sz%0d f%b%b e%b%b", n_out,
                     out_tag.group, out_tag.asset, out_tag.step, out_tag.path,
                     out_tag.group_paths, out_tag.first_asset, out_tag.first_step,
                     out_tag.group_end, out_tag.run_end);
        end
        n_out++;
      end
      #1;
    end
    in_valid = 0; out_ready = 0;
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after run"); end
    cycles = t0;
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 4, 10, 4, 1, cyc);   // groups 4, 4, 2
    run(2, 3, 8, 4, 1, cyc);    // groups 4, 4
    run(2, 5, 7, 3, 0, cyc);    // groups 3, 3, 1, no stalls
    checks++;
    // 70 elements; the first output appears one cycle after the first input
    if (cyc != 2 * 5 * 7 + 1) begin
      failures++;
      $display("FAIL throughput: %0d cycles for 70 elements", cyc);
    end
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
