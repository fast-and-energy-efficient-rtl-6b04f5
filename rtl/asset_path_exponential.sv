// asset_path_exponential: turns each simulated log price into a price.
//
// One element per cycle: out_price = exp(in_lnx), computed by fx_exp() in
// stac_a2_pkg (range reduction to 2^n e^r and a 14-term Horner series).
// The tag travels with the value so the reduction stage knows the path,
// timestep and asset. Valid/ready in and out, latency one cycle.
module asset_path_exponential
  import stac_a2_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  tag_t in_tag,
  input  fx_t  in_lnx,
  output logic out_valid,
  input  logic out_ready,
  output tag_t out_tag,
  output fx_t  out_price
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_price <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag   <= in_tag;
        out_price <= fx_exp(in_lnx);
      end
    end
  end

endmodule
