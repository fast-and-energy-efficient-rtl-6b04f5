// cu_host: testbench model of the host side of one compute unit, with the
// HBM behind the unit's memory ports (hbm_model). Not synthesizable.
//
// run_job() performs what the host program does for one unit: it loads the
// per-asset Heston records, starts the kernel once for the whole run, then
// cuts the reordered input into chunks of chunk_paths paths (whole path
// groups), copies each chunk into HBM and starts the input streamer on it,
// and starts the result streamer on the matching result chunk. Commands are
// issued as soon as the streamer's ap_ready allows, so the next chunk is
// queued while the current one runs; ap_done is acknowledged (ap_continue)
// after a random delay, which exercises the back pressure of ap_ctrl_chain.
// When a result chunk is done its words are read back from HBM and every
// value compared with the whole-run reference. Counters record the checks
// and how often each mechanism occurred.
module cu_host
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;
(
  input  logic             clk,
  output logic             cfg_we,
  output logic [15:0]      cfg_asset,
  output heston_cfg_t      cfg_data,
  output logic             k_start,
  input  logic             k_done,
  input  logic             k_idle,
  output logic [15:0]      k_assets,
  output logic [15:0]      k_timesteps,
  output logic [CNT_W-1:0] k_paths,
  output logic [15:0]      k_paths_per_group,
  input  logic             k_fill_stall,
  output logic             is_start,
  input  logic             is_ready,
  input  logic             is_done,
  output logic             is_continue,
  input  logic             is_idle,
  output mem_addr_t        is_base,
  output logic [CNT_W-1:0] is_n_elems,
  input  logic             rd_req_valid,
  output logic             rd_req_ready,
  input  mem_addr_t        rd_req_addr,
  output logic             rd_rsp_valid,
  output mem_word_t        rd_rsp_data,
  output logic             rs_start,
  input  logic             rs_ready,
  input  logic             rs_done,
  output logic             rs_continue,
  input  logic             rs_idle,
  output mem_addr_t        rs_base,
  output logic [CNT_W-1:0] rs_n_vals,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  mem_addr_t        wr_addr,
  input  mem_word_t        wr_data
);
  localparam mem_addr_t IN_REGION  = mem_addr_t'(28'h0010000);
  localparam mem_addr_t OUT_REGION = mem_addr_t'(28'h0800000);

  hbm_model #(.LATENCY(6), .STALLS(1)) u_hbm (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0;
  int n_queued_in = 0, n_queued_out = 0, n_backpressure = 0, n_fill_stall = 0;
  int n_exp = 0, n_groups = 0, n_chunks = 0, n_partial = 0, n_kdone = 0;
  int max_ack_delay = 8;
  int rs_cmd_delay  = 0;   // cycles to hold back each result command

  initial begin
    cfg_we = 0; cfg_asset = '0; cfg_data = '0;
    k_start = 0; k_assets = '0; k_timesteps = '0; k_paths = '0; k_paths_per_group = '0;
    is_start = 0; is_continue = 0; is_base = '0; is_n_elems = '0;
    rs_start = 0; rs_continue = 0; rs_base = '0; rs_n_vals = '0;
  end

  always @(posedge clk) begin
    if ((is_done && !is_continue) || (rs_done && !rs_continue)) n_backpressure++;
    if (k_fill_stall) n_fill_stall++;
    if (k_done) n_kdone++;
  end

  task automatic run_job(heston_cfg_t cfg[], elem_t el[], int na, int nt, int np,
                         int g, int chunk_paths);
    elem_t stream [$];
    real   res [$];
    int    ne, ng, nch, gpc, kdone0;
    int    ch_elems [$], ch_vals [$], ch_first_val [$];
    int    e_off, v_off;
    ref_run(cfg, el, na, nt, np, g, stream, res, ne);
    n_exp += ne;
    ng = (np + g - 1) / g;
    n_groups += ng;
    gpc = chunk_paths / g;
    nch = (ng + gpc - 1) / gpc;
    n_chunks += nch;
    v_off = 0;
    for (int c = 0; c < nch; c++) begin
      int pe = 0, pv = 0;
      for (int gi = c * gpc; gi < (c + 1) * gpc && gi < ng; gi++) begin
        int sz = (gi == ng - 1) ? np - gi * g : g;
        pe += sz * na * nt;
        pv += sz * nt;
      end
      ch_elems.push_back(pe); ch_vals.push_back(pv); ch_first_val.push_back(v_off);
      v_off += pv;
      if (pv % 8 != 0) n_partial++;
    end
    // Heston records and kernel start
    @(negedge clk);
    for (int a = 0; a < na; a++) begin
      cfg_we = 1; cfg_asset = 16'(a); cfg_data = cfg[a];
      @(negedge clk);
    end
    cfg_we = 0;
    k_assets = 16'(na); k_timesteps = 16'(nt); k_paths = CNT_W'(np);
    k_paths_per_group = 16'(g);
    kdone0 = n_kdone;
    k_start = 1; @(negedge clk); k_start = 0;
    fork
      // input chunks: copy into HBM, then queue on the input streamer
      begin
        int off = 0;
        for (int c = 0; c < nch; c++) begin
          mem_addr_t base = IN_REGION + mem_addr_t'(c * 4096);
          for (int w = 0; w < (ch_elems[c] + 3) / 4; w++) begin
            mem_word_t word = '0;
            for (int k = 0; k < 4 && 4*w + k < ch_elems[c]; k++)
              word[128*k +: 128] = stream[off + 4*w + k];
            u_hbm.host_write(base + mem_addr_t'(w), word);
          end
          off += ch_elems[c];
          is_base = base; is_n_elems = CNT_W'(ch_elems[c]);
          is_start = 1;
          do @(posedge clk); while (!is_ready);
          if (!is_idle) n_queued_in++;
          @(negedge clk);
          is_start = 0;
        end
      end
      begin
        for (int c = 0; c < nch; c++) begin
          while (!is_done) @(negedge clk);
          repeat ($urandom % max_ack_delay) @(negedge clk);
          is_continue = 1; @(negedge clk); is_continue = 0;
        end
      end
      // result chunks
      begin
        for (int c = 0; c < nch; c++) begin
          repeat (rs_cmd_delay) @(negedge clk);
          rs_base = OUT_REGION + mem_addr_t'(c * 4096); rs_n_vals = CNT_W'(ch_vals[c]);
          rs_start = 1;
          do @(posedge clk); while (!rs_ready);
          if (!rs_idle) n_queued_out++;
          @(negedge clk);
          rs_start = 0;
        end
      end
      begin
        for (int c = 0; c < nch; c++) begin
          while (!rs_done) @(negedge clk);
          repeat ($urandom % max_ack_delay) @(negedge clk);
          rs_continue = 1; @(negedge clk); rs_continue = 0;
          // copy the chunk back and check it
          for (int i = 0; i < ch_vals[c]; i++) begin
            mem_word_t word = u_hbm.host_read(OUT_REGION + mem_addr_t'(c * 4096 + i / 8));
            fx_t got = word[64*(i % 8) +: 64];
            real want = res[ch_first_val[c] + i];
            checks++;
            if (!close(fx2r(got), want, 1e-8)) begin
              failures++;
              if (failures < 10)
                $display("FAIL %m chunk %0d value %0d: %.9f / %.9f", c, i, fx2r(got), want);
            end
          end
        end
      end
    join
    while (n_kdone == kdone0) @(negedge clk);
    checks++;
    if (!k_idle) begin failures++; $display("FAIL %m kernel not idle after its run"); end
  endtask
endmodule
