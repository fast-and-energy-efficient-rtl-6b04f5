// tb_stac_a2_top_full: the accelerator at its default sizes (six compute
// units, 50 assets, 1260 timesteps, path groups of up to 128 paths), each
// unit running one complete job through its own host model and HBM. The
// jobs are shaped to touch the limits: one uses all 50 asset slots, one
// runs all 1260 timesteps, one uses full 128-path groups (261 paths: two
// full groups and a short one); the other three repeat the reduced-size
// shapes. Results are checked against the reference and the same
// mechanisms as in tb_stac_a2_top must each occur at least once.
module tb_stac_a2_top_full;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  localparam int NCU = 6;
  logic             clk = 0, rst_n = 0;
  logic             cfg_we [NCU];
  logic [15:0]      cfg_asset [NCU];
  heston_cfg_t      cfg_data [NCU];
  logic             k_start [NCU], k_done [NCU], k_idle [NCU], k_fill_stall [NCU];
  logic [15:0]      k_assets [NCU], k_timesteps [NCU], k_paths_per_group [NCU];
  logic [CNT_W-1:0] k_paths [NCU];
  logic             is_start [NCU], is_ready [NCU], is_done [NCU], is_continue [NCU], is_idle [NCU];
  mem_addr_t        is_base [NCU];
  logic [CNT_W-1:0] is_n_elems [NCU];
  logic             rd_req_valid [NCU], rd_req_ready [NCU], rd_rsp_valid [NCU];
  mem_addr_t        rd_req_addr [NCU];
  mem_word_t        rd_rsp_data [NCU];
  logic             rs_start [NCU], rs_ready [NCU], rs_done [NCU], rs_continue [NCU], rs_idle [NCU];
  mem_addr_t        rs_base [NCU];
  logic [CNT_W-1:0] rs_n_vals [NCU];
  logic             wr_valid [NCU], wr_ready [NCU];
  mem_addr_t        wr_addr [NCU];
  mem_word_t        wr_data [NCU];

  int checks = 0, failures = 0;
  int cu_checks [NCU], cu_fail [NCU], cu_q [NCU], cu_bp [NCU], cu_fs [NCU];
  int cu_exp [NCU], cu_el [NCU], cu_g3 [NCU], cu_short [NCU], cu_part [NCU];
  bit cu_fin [NCU];

  stac_a2_top dut (.*);

  always #5 clk = !clk;

  for (genvar i = 0; i < NCU; i++) begin : g_host
    cu_host h (
      .clk,
      .cfg_we(cfg_we[i]), .cfg_asset(cfg_asset[i]), .cfg_data(cfg_data[i]),
      .k_start(k_start[i]), .k_done(k_done[i]), .k_idle(k_idle[i]),
      .k_assets(k_assets[i]), .k_timesteps(k_timesteps[i]), .k_paths(k_paths[i]),
      .k_paths_per_group(k_paths_per_group[i]), .k_fill_stall(k_fill_stall[i]),
      .is_start(is_start[i]), .is_ready(is_ready[i]), .is_done(is_done[i]),
      .is_continue(is_continue[i]), .is_idle(is_idle[i]), .is_base(is_base[i]),
      .is_n_elems(is_n_elems[i]),
      .rd_req_valid(rd_req_valid[i]), .rd_req_ready(rd_req_ready[i]),
      .rd_req_addr(rd_req_addr[i]), .rd_rsp_valid(rd_rsp_valid[i]),
      .rd_rsp_data(rd_rsp_data[i]),
      .rs_start(rs_start[i]), .rs_ready(rs_ready[i]), .rs_done(rs_done[i]),
      .rs_continue(rs_continue[i]), .rs_idle(rs_idle[i]), .rs_base(rs_base[i]),
      .rs_n_vals(rs_n_vals[i]),
      .wr_valid(wr_valid[i]), .wr_ready(wr_ready[i]), .wr_addr(wr_addr[i]),
      .wr_data(wr_data[i]));

    initial begin
      int na, nt, np, g, ch;
      heston_cfg_t cfg [];
      elem_t el [];
      heston_t hp;
      cu_fin[i] = 0;
      case (i)
        0: begin na = 50; nt = 2;    np = 3;   g = 3;   ch = 3;   end  // every asset slot
        1: begin na = 1;  nt = 1260; np = 2;   g = 2;   ch = 2;   end  // five-year run
        2: begin na = 2;  nt = 3;    np = 261; g = 128; ch = 128; end  // full-size groups
        3: begin na = 3;  nt = 6;    np = 14;  g = 4;   ch = 8;   end
        4: begin na = 1;  nt = 8;    np = 12;  g = 4;   ch = 4;   end  // serve-bound
        default: begin na = 8; nt = 2; np = 9; g = 3; ch = 6; end
      endcase
      // one unit starts its result chunks late, so its reduction runs out of banks
      if (i == 4) begin h.max_ack_delay = 80; h.rs_cmd_delay = 150; end
      cfg = new[na];
      el  = new[na * nt * np];
      for (int a = 0; a < na; a++) begin
        hp = rand_heston();
        if (a == 0) begin hp.xi = 2.0; hp.v0 = 0.004; end   // exponential branch
        cfg[a] = make_cfg(hp);
      end
      for (int k = 0; k < na * nt * np; k++) begin
        el[k].zv = r2fx(randn()); el[k].zx = r2fx(randn());
      end
      wait (rst_n);
      repeat (2 + 5 * i) @(negedge clk);
      h.run_job(cfg, el, na, nt, np, g, ch);
      cu_checks[i] = h.checks; cu_fail[i] = h.failures;
      cu_q[i]  = h.n_queued_in + h.n_queued_out;
      cu_bp[i] = h.n_backpressure; cu_fs[i] = h.n_fill_stall;
      cu_exp[i] = h.n_exp; cu_el[i] = na * nt * np;
      cu_g3[i] = (h.n_groups >= 3);
      cu_short[i] = (np % g != 0);
      cu_part[i] = h.n_partial;
      cu_fin[i] = 1;
    end
  end

  initial begin
    int q = 0, bp = 0, fs = 0, ex = 0, qd = 0, g3 = 0, sh = 0, pt = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NCU; i++) wait (cu_fin[i]);
    for (int i = 0; i < NCU; i++) begin
      checks += cu_checks[i]; failures += cu_fail[i];
      q += cu_q[i]; bp += cu_bp[i]; fs += cu_fs[i]; ex += cu_exp[i];
      qd += cu_el[i] - cu_exp[i]; g3 += cu_g3[i]; sh += cu_short[i]; pt += cu_part[i];
    end
    $display("mechanisms: queued commands %0d, ap_done back-pressure cycles %0d", q, bp);
    $display("            fill-side stall cycles %0d, QE quadratic %0d exponential %0d", fs, qd, ex);
    $display("            runs with >= 3 groups %0d, short last groups %0d, partial-word chunks %0d",
             g3, sh, pt);
    checks += 8;
    if (q == 0)  begin failures++; $display("FAIL no queued command"); end
    if (bp == 0) begin failures++; $display("FAIL no back pressure"); end
    if (fs == 0) begin failures++; $display("FAIL no fill stall"); end
    if (ex == 0) begin failures++; $display("FAIL no exponential branch"); end
    if (qd == 0) begin failures++; $display("FAIL no quadratic branch"); end
    if (g3 == 0) begin failures++; $display("FAIL no bank reuse"); end
    if (sh == 0) begin failures++; $display("FAIL no short group"); end
    if (pt == 0) begin failures++; $display("FAIL no partial word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
