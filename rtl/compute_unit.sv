// compute_unit: one benchmark kernel with its two streaming adaptors.
//
//   HBM read port -> input_streamer -> stac_a2_kernel -> result_streamer
//     -> HBM write port
//
// The host moves data only by DMA into and out of HBM; the input streamer
// turns chunks placed there into the kernel's element stream and the result
// streamer turns the kernel's result stream back into chunks in HBM. The
// kernel is started once per run; the streamers are started once per chunk
// (ap_ctrl_chain, see input_streamer), so while the kernel computes one
// chunk the host reorders and transfers the next. Each unit has its own
// memory ports and is replicated by stac_a2_top. All signals of the three
// parts are brought out unchanged, prefixed k_ (kernel), is_ (input
// streamer) and rs_ (result streamer).
module compute_unit
  import stac_a2_pkg::*;
#(
  parameter int unsigned MAX_ASSETS = 50,
  parameter int unsigned MAX_STEPS  = 1260,
  parameter int unsigned MAX_GROUP  = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  // kernel
  input  logic             cfg_we,
  input  logic [15:0]      cfg_asset,
  input  heston_cfg_t      cfg_data,
  input  logic             k_start,
  output logic             k_done,
  output logic             k_idle,
  input  logic [15:0]      k_assets,
  input  logic [15:0]      k_timesteps,
  input  logic [CNT_W-1:0] k_paths,
  input  logic [15:0]      k_paths_per_group,
  output logic             k_fill_stall,
  // input streamer
  input  logic             is_start,
  output logic             is_ready,
  output logic             is_done,
  input  logic             is_continue,
  output logic             is_idle,
  input  mem_addr_t        is_base,
  input  logic [CNT_W-1:0] is_n_elems,
  output logic             rd_req_valid,
  input  logic             rd_req_ready,
  output mem_addr_t        rd_req_addr,
  input  logic             rd_rsp_valid,
  input  mem_word_t        rd_rsp_data,
  // result streamer
  input  logic             rs_start,
  output logic             rs_ready,
  output logic             rs_done,
  input  logic             rs_continue,
  output logic             rs_idle,
  input  mem_addr_t        rs_base,
  input  logic [CNT_W-1:0] rs_n_vals,
  output logic             wr_valid,
  input  logic             wr_ready,
  output mem_addr_t        wr_addr,
  output mem_word_t        wr_data
);
  logic  e_valid, e_ready, r_valid, r_ready;
  elem_t e_elem;
  fx_t   r_data;

  input_streamer u_in (
    .clk, .rst_n,
    .ap_start(is_start), .ap_ready(is_ready), .ap_done(is_done),
    .ap_continue(is_continue), .ap_idle(is_idle),
    .arg_base(is_base), .arg_n_elems(is_n_elems),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .out_valid(e_valid), .out_ready(e_ready), .out_elem(e_elem)
  );

  stac_a2_kernel #(.MAX_ASSETS(MAX_ASSETS), .MAX_STEPS(MAX_STEPS),
                   .MAX_GROUP(MAX_GROUP)) u_kernel (
    .clk, .rst_n,
    .cfg_we, .cfg_asset, .cfg_data,
    .ap_start(k_start), .ap_done(k_done), .ap_idle(k_idle),
    .assets(k_assets), .timesteps(k_timesteps), .paths(k_paths),
    .paths_per_group(k_paths_per_group),
    .in_valid(e_valid), .in_ready(e_ready), .in_elem(e_elem),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data),
    .fill_stall(k_fill_stall)
  );

  result_streamer u_out (
    .clk, .rst_n,
    .ap_start(rs_start), .ap_ready(rs_ready), .ap_done(rs_done),
    .ap_continue(rs_continue), .ap_idle(rs_idle),
    .arg_base(rs_base), .arg_n_vals(rs_n_vals),
    .in_valid(r_valid), .in_ready(r_ready), .in_data(r_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

endmodule
