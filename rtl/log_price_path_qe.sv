// log_price_path_qe: Andersen QE log-price step.
//
// Advances the log price of a path by one timestep from the variance at the
// start and at the end of the step (both produced by variance_path_qe) and
// the log-price normal draw zx:
//   ln X' = ln X + k0 + k1 v + k2 v' + sqrt(k3 v + k4 v') zx
// with the per-asset constants k0..k4 of the Heston parameter table
// (qe_log_price() in stac_a2_pkg). Like the variance stage it keeps the
// current log price of every path of the group in a MAX_GROUP-entry state
// memory, seeded with the asset's ln S0 at timestep 0, so it accepts one
// element per cycle with no loop-carried dependency.
//
// Interface: valid/ready stream in (tag, v_old, v_new, zx), valid/ready
// stream out (tag, new log price). Latency one cycle.
module log_price_path_qe
  import stac_a2_pkg::*;
#(
  parameter int unsigned MAX_GROUP = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  tag_t        in_tag,
  input  fx_t         in_v_old,
  input  fx_t         in_v_new,
  input  fx_t         in_zx,
  output logic [15:0] cfg_asset,
  input  heston_cfg_t cfg,
  output logic        out_valid,
  input  logic        out_ready,
  output tag_t        out_tag,
  output fx_t         out_lnx
);
  localparam int unsigned PW = (MAX_GROUP > 1) ? $clog2(MAX_GROUP) : 1;

  fx_t  lnx_state [MAX_GROUP];
  fx_t  lnx_old, lnx_new;
  logic accept;

  assign cfg_asset = in_tag.asset;
  assign in_ready  = !out_valid || out_ready;
  assign accept    = in_valid && in_ready;

  always_comb begin
    lnx_old = in_tag.first_step ? cfg.lns0 : lnx_state[PW'(in_tag.path)];
    lnx_new = qe_log_price(lnx_old, in_v_old, in_v_new, in_zx, cfg);
  end

  always_ff @(posedge clk)
    if (accept) lnx_state[PW'(in_tag.path)] <= lnx_new;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_lnx   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (accept) begin
        out_tag <= in_tag;
        out_lnx <= lnx_new;
      end
    end
  end

endmodule
