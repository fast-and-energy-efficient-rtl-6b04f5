// stac_a2_top: multi-compute-unit STAC-A2 accelerator.
//
// NUM_CU identical compute units (kernel + input streamer + result
// streamer) side by side; the host splits the paths of a run into chunks
// and deals the chunks out across the units, so each unit runs an
// independent simulation over its own share of the paths. Six units is the
// number that fitted the larger of the two FPGAs the design was built for
// (four on the other). The units share only clock and reset; every other
// signal is an array indexed by unit, with each unit's own HBM read and
// write port, its own Heston parameter load port and its own kernel and
// streamer controls (see compute_unit for their meaning). HBM itself, the
// PCIe DMA and the host-side data reordering are outside this RTL.
module stac_a2_top
  import stac_a2_pkg::*;
#(
  parameter int unsigned NUM_CU     = 6,
  parameter int unsigned MAX_ASSETS = 50,
  parameter int unsigned MAX_STEPS  = 1260,
  parameter int unsigned MAX_GROUP  = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we            [NUM_CU],
  input  logic [15:0]      cfg_asset         [NUM_CU],
  input  heston_cfg_t      cfg_data          [NUM_CU],
  input  logic             k_start           [NUM_CU],
  output logic             k_done            [NUM_CU],
  output logic             k_idle            [NUM_CU],
  input  logic [15:0]      k_assets          [NUM_CU],
  input  logic [15:0]      k_timesteps       [NUM_CU],
  input  logic [CNT_W-1:0] k_paths           [NUM_CU],
  input  logic [15:0]      k_paths_per_group [NUM_CU],
  output logic             k_fill_stall      [NUM_CU],
  input  logic             is_start          [NUM_CU],
  output logic             is_ready          [NUM_CU],
  output logic             is_done           [NUM_CU],
  input  logic             is_continue       [NUM_CU],
  output logic             is_idle           [NUM_CU],
  input  mem_addr_t        is_base           [NUM_CU],
  input  logic [CNT_W-1:0] is_n_elems        [NUM_CU],
  output logic             rd_req_valid      [NUM_CU],
  input  logic             rd_req_ready      [NUM_CU],
  output mem_addr_t        rd_req_addr       [NUM_CU],
  input  logic             rd_rsp_valid      [NUM_CU],
  input  mem_word_t        rd_rsp_data       [NUM_CU],
  input  logic             rs_start          [NUM_CU],
  output logic             rs_ready          [NUM_CU],
  output logic             rs_done           [NUM_CU],
  input  logic             rs_continue       [NUM_CU],
  output logic             rs_idle           [NUM_CU],
  input  mem_addr_t        rs_base           [NUM_CU],
  input  logic [CNT_W-1:0] rs_n_vals         [NUM_CU],
  output logic             wr_valid          [NUM_CU],
  input  logic             wr_ready          [NUM_CU],
  output mem_addr_t        wr_addr           [NUM_CU],
  output mem_word_t        wr_data           [NUM_CU]
);
  for (genvar i = 0; i < int'(NUM_CU); i++) begin : g_cu
    compute_unit #(.MAX_ASSETS(MAX_ASSETS), .MAX_STEPS(MAX_STEPS),
                   .MAX_GROUP(MAX_GROUP)) u_cu (
      .clk, .rst_n,
      .cfg_we(cfg_we[i]), .cfg_asset(cfg_asset[i]), .cfg_data(cfg_data[i]),
      .k_start(k_start[i]), .k_done(k_done[i]), .k_idle(k_idle[i]),
      .k_assets(k_assets[i]), .k_timesteps(k_timesteps[i]), .k_paths(k_paths[i]),
      .k_paths_per_group(k_paths_per_group[i]), .k_fill_stall(k_fill_stall[i]),
      .is_start(is_start[i]), .is_ready(is_ready[i]), .is_done(is_done[i]),
      .is_continue(is_continue[i]), .is_idle(is_idle[i]),
      .is_base(is_base[i]), .is_n_elems(is_n_elems[i]),
      .rd_req_valid(rd_req_valid[i]), .rd_req_ready(rd_req_ready[i]),
      .rd_req_addr(rd_req_addr[i]), .rd_rsp_valid(rd_rsp_valid[i]),
      .rd_rsp_data(rd_rsp_data[i]),
      .rs_start(rs_start[i]), .rs_ready(rs_ready[i]), .rs_done(rs_done[i]),
      .rs_continue(rs_continue[i]), .rs_idle(rs_idle[i]),
      .rs_base(rs_base[i]), .rs_n_vals(rs_n_vals[i]),
      .wr_valid(wr_valid[i]), .wr_ready(wr_ready[i]), .wr_addr(wr_addr[i]),
      .wr_data(wr_data[i])
    );
  end

endmodule
