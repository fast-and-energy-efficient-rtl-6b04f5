// path_group_sequencer: loop nest of the benchmark kernel.
//
// The kernel consumes its input in the order group > asset > timestep >
// path-in-group: the paths of a run are split into groups (batches) of
// paths_per_group paths, the last group holding what is left, and within a
// group the path loop is innermost so that successive elements never depend
// on each other. This block counts through that nest and attaches a tag_t
// (position and first/last flags) to each element of the incoming stream.
// It is a pass-through register stage with a valid/ready handshake, one
// element per cycle.
//
// Run-time arguments (sampled on start): assets, timesteps, paths,
// paths_per_group. number_groups = ceil(paths / paths_per_group) and the
// last group's size follow the PathGroup record of the published kernel.
// busy is high from start until the last element of the run has been
// accepted. Elements arriving while not busy are held back (in_ready low).
module path_group_sequencer
  import stac_a2_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [15:0]      assets,
  input  logic [15:0]      timesteps,
  input  logic [CNT_W-1:0] paths,
  input  logic [15:0]      paths_per_group,
  output logic             busy,
  // element stream in
  input  logic             in_valid,
  output logic             in_ready,
  input  elem_t            in_elem,
  // tagged element stream out
  output logic             out_valid,
  input  logic             out_ready,
  output elem_t            out_elem,
  output tag_t             out_tag
);
  logic [15:0]      n_assets, n_steps, grp_sz;
  logic [CNT_W-1:0] n_groups, g;
  logic [15:0]      last_sz, a, t, p;
  logic [15:0]      cur_sz;
  logic             last_group, accept;
  tag_t             tag_now;

  assign cur_sz     = last_group ? last_sz : grp_sz;
  assign last_group = (g == n_groups - 1);
  assign in_ready   = busy && (!out_valid || out_ready);
  assign accept     = in_valid && in_ready;

  always_comb begin
    tag_now.group       = g;
    tag_now.asset       = a;
    tag_now.step        = t;
    tag_now.path        = p;
    tag_now.group_paths = cur_sz;
    tag_now.first_asset = (a == 0);
    tag_now.first_step  = (t == 0);
    tag_now.group_end   = (a == n_assets - 1) && (t == n_steps - 1) && (p == cur_sz - 1);
    tag_now.run_end     = tag_now.group_end && last_group;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      out_elem  <= '0;
      out_tag   <= '0;
      n_assets  <= '0; n_steps <= '0; grp_sz <= '0; n_groups <= '0; last_sz <= '0;
      g <= '0; a <= '0; t <= '0; p <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        n_assets <= assets;
        n_steps  <= timesteps;
        grp_sz   <= paths_per_group;
        n_groups <= (paths + CNT_W'(paths_per_group) - 1) / CNT_W'(paths_per_group);
        last_sz  <= 16'(paths - ((paths + CNT_W'(paths_per_group) - 1)
                               / CNT_W'(paths_per_group) - 1) * CNT_W'(paths_per_group));
        g <= '0; a <= '0; t <= '0; p <= '0;
      end else if (accept) begin
        out_valid <= 1'b1;
        out_elem  <= in_elem;
        out_tag   <= tag_now;
        if (tag_now.run_end) busy <= 1'b0;
        if (p != cur_sz - 1) p <= p + 1;
        else begin
          p <= '0;
          if (t != n_steps - 1) t <= t + 1;
          else begin
            t <= '0;
            if (a != n_assets - 1) a <= a + 1;
            else begin
              a <= '0;
              g <= g + 1;
            end
          end
        end
      end
    end
  end

endmodule
