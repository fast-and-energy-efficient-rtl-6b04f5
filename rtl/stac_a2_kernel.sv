// stac_a2_kernel: the streaming STAC-A2 benchmark kernel.
//
// A chain of concurrently running dataflow stages joined by valid/ready
// streams, each accepting one element per cycle:
//
//   element stream -> path_group_sequencer -> variance_path_qe
//     -> log_price_path_qe -> asset_path_exponential -> ls_path_reduction
//     -> result stream
//
// The input is the two normal draws of every (path, asset, timestep)
// element, already reordered by the host into group > asset > timestep >
// path order; the output is, for every path group, the timestep x path tile
// of the maximum price over all assets, timestep-major. The kernel is
// started once per run and loops over the whole domain; it does not know
// about the chunks in which the data reaches it.
//
// Interface: cfg_we/cfg_asset/cfg_data load the per-asset Heston records
// before ap_start. ap_start (with assets, timesteps, paths,
// paths_per_group) begins a run when ap_idle; ap_done pulses for one cycle
// when the last result has been accepted downstream. fill_stall is high in
// cycles where the reduction's fill side waits for its other buffer.
// Latency from an element to its effect on the reduction buffer: four
// register stages.
module stac_a2_kernel
  import stac_a2_pkg::*;
#(
  parameter int unsigned MAX_ASSETS = 50,
  parameter int unsigned MAX_STEPS  = 1260,
  parameter int unsigned MAX_GROUP  = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  // Heston parameter load
  input  logic             cfg_we,
  input  logic [15:0]      cfg_asset,
  input  heston_cfg_t      cfg_data,
  // run control
  input  logic             ap_start,
  output logic             ap_done,
  output logic             ap_idle,
  input  logic [15:0]      assets,
  input  logic [15:0]      timesteps,
  input  logic [CNT_W-1:0] paths,
  input  logic [15:0]      paths_per_group,
  // element stream in
  input  logic             in_valid,
  output logic             in_ready,
  input  elem_t            in_elem,
  // result stream out
  output logic             out_valid,
  input  logic             out_ready,
  output fx_t              out_data,
  output logic             fill_stall
);
  logic        running, seq_busy;

  logic        s_valid, s_ready;
  elem_t       s_elem;
  tag_t        s_tag;

  logic        v_valid, v_ready;
  tag_t        v_tag;
  fx_t         v_old, v_new, v_zx;

  logic        l_valid, l_ready;
  tag_t        l_tag;
  fx_t         l_lnx;

  logic        e_valid, e_ready;
  tag_t        e_tag;
  fx_t         e_price;

  logic        r_last;
  logic [15:0] rd_asset [2];
  heston_cfg_t rd_cfg   [2];

  assign ap_idle = !running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      ap_done <= 1'b0;
    end else begin
      ap_done <= 1'b0;
      if (ap_start && !running) running <= 1'b1;
      else if (running && out_valid && out_ready && r_last) begin
        running <= 1'b0;
        ap_done <= 1'b1;
      end
    end
  end

  heston_param_table #(.MAX_ASSETS(MAX_ASSETS), .N_RD(2)) u_params (
    .clk, .wr_en(cfg_we), .wr_asset(cfg_asset), .wr_cfg(cfg_data),
    .rd_asset, .rd_cfg
  );

  path_group_sequencer u_seq (
    .clk, .rst_n,
    .start(ap_start && !running), .assets, .timesteps, .paths, .paths_per_group,
    .busy(seq_busy),
    .in_valid, .in_ready, .in_elem,
    .out_valid(s_valid), .out_ready(s_ready), .out_elem(s_elem), .out_tag(s_tag)
  );

  variance_path_qe #(.MAX_GROUP(MAX_GROUP)) u_var (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_elem(s_elem), .in_tag(s_tag),
    .cfg_asset(rd_asset[0]), .cfg(rd_cfg[0]),
    .out_valid(v_valid), .out_ready(v_ready), .out_tag(v_tag),
    .out_v_old(v_old), .out_v_new(v_new), .out_zx(v_zx)
  );

  log_price_path_qe #(.MAX_GROUP(MAX_GROUP)) u_lnp (
    .clk, .rst_n,
    .in_valid(v_valid), .in_ready(v_ready), .in_tag(v_tag),
    .in_v_old(v_old), .in_v_new(v_new), .in_zx(v_zx),
    .cfg_asset(rd_asset[1]), .cfg(rd_cfg[1]),
    .out_valid(l_valid), .out_ready(l_ready), .out_tag(l_tag), .out_lnx(l_lnx)
  );

  asset_path_exponential u_exp (
    .clk, .rst_n,
    .in_valid(l_valid), .in_ready(l_ready), .in_tag(l_tag), .in_lnx(l_lnx),
    .out_valid(e_valid), .out_ready(e_ready), .out_tag(e_tag), .out_price(e_price)
  );

  ls_path_reduction #(.MAX_STEPS(MAX_STEPS), .MAX_GROUP(MAX_GROUP)) u_red (
    .clk, .rst_n,
    .in_valid(e_valid), .in_ready(e_ready), .in_tag(e_tag), .in_price(e_price),
    .out_valid, .out_ready, .out_data, .out_last(r_last), .fill_stall
  );

  // The loop nest can only be active inside a run.
  assert property (@(posedge clk) disable iff (!rst_n) seq_busy |-> running);

endmodule
