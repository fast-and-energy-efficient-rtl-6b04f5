// tb_compute_unit: one compute unit (input streamer, kernel, result
// streamer) run end to end through HBM by the host model cu_host: a run of
// 3 assets, 5 timesteps and 20 paths in groups of 4, cut into chunks of 8
// paths (two path groups per chunk, three chunks), followed by a second run
// of 1 asset x 4 timesteps x 12 paths in groups of 4 with chunks of 4
// paths. Every result read back from HBM is compared with the reference;
// streamer command queueing and ap_done back pressure must both occur.
module tb_compute_unit;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  logic             clk = 0, rst_n = 0;
  logic             cfg_we;
  logic [15:0]      cfg_asset;
  heston_cfg_t      cfg_data;
  logic             k_start, k_done, k_idle, k_fill_stall;
  logic [15:0]      k_assets, k_timesteps, k_paths_per_group;
  logic [CNT_W-1:0] k_paths;
  logic             is_start, is_ready, is_done, is_continue, is_idle;
  mem_addr_t        is_base;
  logic [CNT_W-1:0] is_n_elems;
  logic             rd_req_valid, rd_req_ready, rd_rsp_valid;
  mem_addr_t        rd_req_addr;
  mem_word_t        rd_rsp_data;
  logic             rs_start, rs_ready, rs_done, rs_continue, rs_idle;
  mem_addr_t        rs_base;
  logic [CNT_W-1:0] rs_n_vals;
  logic             wr_valid, wr_ready;
  mem_addr_t        wr_addr;
  mem_word_t        wr_data;
  int checks = 0, failures = 0;

  compute_unit #(.MAX_ASSETS(4), .MAX_STEPS(8), .MAX_GROUP(4)) dut (.*);
  cu_host host (.*);

  always #5 clk = !clk;

  task automatic job(int na, int nt, int np, int g, int chunk);
    heston_cfg_t cfg [];
    elem_t el [];
    cfg = new[na];
    el  = new[na * nt * np];
    for (int a = 0; a < na; a++) cfg[a] = make_cfg(rand_heston());
    for (int i = 0; i < na * nt * np; i++) begin
      el[i].zv = r2fx(randn()); el[i].zx = r2fx(randn());
    end
    host.run_job(cfg, el, na, nt, np, g, chunk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    job(3, 5, 20, 4, 8);
    job(1, 4, 12, 4, 4);
    checks = host.checks + 2;
    failures = host.failures;
    if (host.n_queued_in == 0 || host.n_queued_out == 0) begin
      failures++; $display("FAIL no queued streamer command");
    end
    if (host.n_backpressure == 0) begin failures++; $display("FAIL no ap_done back pressure"); end
    $display("chunks %0d, queued in/out %0d/%0d, back-pressure cycles %0d, fill stalls %0d",
             host.n_chunks, host.n_queued_in, host.n_queued_out, host.n_backpressure,
             host.n_fill_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
