// tb_ls_path_reduction: feeds three path groups (sizes 6, 6, 3) of 3 assets
// x 4 timesteps of random prices into the double-buffered reduction and
// checks every served value against the maximum over assets computed in
// the testbench, in timestep-major, path-minor order, with out_last on the
// very last value only.
// Mechanisms that must be seen: the serve side emitting while the fill side
// accepts (overlap of the two banks), and the fill side stalling because
// both banks are full (the output is held back for a while to force it).
// With no back pressure a group must be served at one value per cycle.
module tb_ls_path_reduction;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  localparam int NA = 3, NT = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, fill_stall;
  tag_t in_tag = '0;
  fx_t  in_price = '0, out_data;
  int checks = 0, failures = 0;
  int n_overlap = 0, n_stall = 0;
  int hold_until = 0, cyc = 0;

  ls_path_reduction #(.MAX_STEPS(8), .MAX_GROUP(8)) dut (.*);

  always #5 clk = !clk;

  fx_t exp_v [$];
  bit  exp_l [$];
  int  n_out = 0, c_first = 0, c_last = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid && in_valid && in_ready) n_overlap++;
    if (fill_stall) n_stall++;
    if (out_valid && out_ready) begin
      fx_t w;
      bit  l;
      w = exp_v.pop_front(); l = exp_l.pop_front();
      checks++;
      if (out_data !== w || out_last !== l) begin
        failures++;
        if (failures < 10) $display("FAIL out %0d: %h/%h last %b/%b", n_out, out_data, w, out_last, l);
      end
      if (n_out == 2 * NT * 6) c_first = cyc;
      if (n_out == NT * 15 - 1) c_last = cyc;
      n_out++;
    end
  end

  always @(negedge clk) out_ready = (cyc >= hold_until);

  initial begin
    int sizes [3] = '{6, 6, 3};
    fx_t mx [NT][8];
    repeat (3) @(negedge clk);
    rst_n = 1;
    hold_until = 0;
    for (int g = 0; g < 3; g++) begin
      // hold the output back during group 1 so both banks fill up
      if (g == 1) hold_until = cyc + 200;
      for (int a = 0; a < NA; a++)
        for (int t = 0; t < NT; t++)
          for (int p = 0; p < sizes[g]; p++) begin
            fx_t price;
            price = r2fx(50.0 + 100.0 * ($urandom % 100000) / 100000.0);
            if (a == 0 || price > mx[t][p]) mx[t][p] = price;
            in_tag = '0;
            in_tag.group = CNT_W'(g); in_tag.asset = 16'(a); in_tag.step = 16'(t);
            in_tag.path = 16'(p); in_tag.group_paths = 16'(sizes[g]);
            in_tag.first_asset = (a == 0); in_tag.first_step = (t == 0);
            in_tag.group_end = (a == NA-1) && (t == NT-1) && (p == sizes[g]-1);
            in_tag.run_end = in_tag.group_end && (g == 2);
            in_price = price;
            if (in_tag.group_end)
              for (int tt = 0; tt < NT; tt++)
                for (int pp = 0; pp < sizes[g]; pp++) begin
                  exp_v.push_back(tt == t && pp == p ? mx[tt][pp] : mx[tt][pp]);
                  exp_l.push_back(g == 2 && tt == NT-1 && pp == sizes[g]-1);
                end
            in_valid = 1;
            do @(posedge clk); while (!in_ready);
            @(negedge clk);
            in_valid = 0;
          end
    end
    // serve rate: the last group (12 values) must leave on 12 consecutive cycles
    wait (n_out == NT * 15);
    checks++;
    if (c_last - c_first != NT * 3 - 1) begin
      failures++; $display("FAIL serve rate %0d", c_last - c_first);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != NT * 15) begin failures++; $display("FAIL count %0d", n_out); end
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL no fill/serve overlap"); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL fill side never stalled"); end
    $display("overlap cycles %0d, fill stall cycles %0d", n_overlap, n_stall);
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
