// heston_param_table: per-asset Heston model configuration store.
//
// Each asset of a run has its own Heston model set-up. The host writes one
// heston_cfg_t record per asset (pre-computed constants, see stac_a2_pkg)
// through the write port before starting the kernel; the QE stages then read
// the record of the asset their current element belongs to. The table is a
// small register file with N_RD independent combinational read ports, one
// per consuming stage, so stages working on different assets at the same
// time never contend.
//
// Interface: wr_en/wr_asset/wr_cfg written on the rising clock edge;
// rd_asset[i] -> rd_cfg[i] combinational (zero latency).
// MAX_ASSETS defaults to 50, the largest asset count of the evaluated
// problem sizes; the record layout and the port structure are this design's
// own choice.
module heston_param_table
  import stac_a2_pkg::*;
#(
  parameter int unsigned MAX_ASSETS = 50,
  parameter int unsigned N_RD       = 2
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic [15:0] wr_asset,
  input  heston_cfg_t wr_cfg,
  input  logic [15:0] rd_asset [N_RD],
  output heston_cfg_t rd_cfg   [N_RD]
);
  localparam int unsigned AW = (MAX_ASSETS > 1) ? $clog2(MAX_ASSETS) : 1;

  heston_cfg_t mem [MAX_ASSETS];

  always_ff @(posedge clk)
    if (wr_en && wr_asset < 16'(MAX_ASSETS))
      mem[AW'(wr_asset)] <= wr_cfg;

  always_comb
    for (int i = 0; i < int'(N_RD); i++)
      rd_cfg[i] = (rd_asset[i] < 16'(MAX_ASSETS)) ? mem[AW'(rd_asset[i])] : '0;

endmodule
