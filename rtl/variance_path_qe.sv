// variance_path_qe: Andersen quadratic-exponential (QE) variance step.
//
// For every (group, asset, timestep, path) element it advances the Heston
// variance of that path by one timestep: from the current variance v it
// forms the conditional mean m and variance s^2 of the next variance and
// their ratio psi = s^2/m^2. For psi <= 1.5 the next variance is
// a (b + Zv)^2 (quadratic branch); otherwise it is drawn from a point mass
// at zero plus an exponential tail using U = Phi(Zv) (exponential branch).
// The arithmetic is qe_variance() in stac_a2_pkg.
//
// Because paths are the innermost loop, the variance of each path in the
// current group is kept in a MAX_GROUP-entry state memory indexed by the
// path number: it is read when the path's element for timestep t arrives
// and written back with the result, so there is never a dependency between
// consecutive elements and the stage accepts one element per cycle. At
// timestep 0 the state is replaced by the asset's initial variance v0.
//
// Interface: valid/ready stream in (element + tag), valid/ready stream out
// (tag, v_old, v_new and the untouched log-price draw zx for the next
// stage). cfg_asset/cfg is a read port of the Heston parameter table.
// Latency one cycle, throughput one element per cycle.
module variance_path_qe
  import stac_a2_pkg::*;
#(
  parameter int unsigned MAX_GROUP = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  elem_t       in_elem,
  input  tag_t        in_tag,
  output logic [15:0] cfg_asset,
  input  heston_cfg_t cfg,
  output logic        out_valid,
  input  logic        out_ready,
  output tag_t        out_tag,
  output fx_t         out_v_old,
  output fx_t         out_v_new,
  output fx_t         out_zx
);
  localparam int unsigned PW = (MAX_GROUP > 1) ? $clog2(MAX_GROUP) : 1;

  fx_t  v_state [MAX_GROUP];
  fx_t  v_old, v_new;
  logic accept;

  assign cfg_asset = in_tag.asset;
  assign in_ready  = !out_valid || out_ready;
  assign accept    = in_valid && in_ready;

  always_comb begin
    v_old = in_tag.first_step ? cfg.v0 : v_state[PW'(in_tag.path)];
    v_new = qe_variance(v_old, in_elem.zv, cfg);
  end

  always_ff @(posedge clk)
    if (accept) v_state[PW'(in_tag.path)] <= v_new;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_v_old <= '0;
      out_v_new <= '0;
      out_zx    <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (accept) begin
        out_tag   <= in_tag;
        out_v_old <= v_old;
        out_v_new <= v_new;
        out_zx    <= in_elem.zx;
      end
    end
  end

endmodule
