// ls_path_reduction: Longstaff-Schwartz path reduction with a ping-pong
// buffer.
//
// For every path and timestep the reduction keeps the largest price held by
// any asset. Prices arrive asset-major (group > asset > timestep > path),
// which is the wrong orientation for a reduction across assets, so the
// block caches a timestep x path tile of the current group on chip: the
// first asset's price is written, each later asset's price is compared with
// the stored value and the larger one written back (read-modify-write, one
// element per cycle; the path loop is innermost, so the same entry is never
// touched by two consecutive elements).
//
// The tile memory exists twice. While the "fill" side reduces group g into
// one bank, the "serve" side streams the finished result of group g-1 out
// of the other bank, timestep-major and path-minor, one value per cycle.
// When the fill side finishes a group (tag.group_end) the bank is marked
// full and the fill side moves to the other bank; if that bank is still
// being served the fill side stalls (in_ready low) until it is free. So
// reduction and output overlap from the second group on.
//
// Sizes: a bank holds MAX_STEPS x MAX_GROUP values (entry step*MAX_GROUP +
// path); the two banks are the two halves of one memory array, so that a
// synthesis tool sees a single RAM with one read-modify-write port and one
// read port. MAX_STEPS = 1260 is the longest run evaluated (five years of
// trading days); MAX_GROUP, the largest path group, is this design's
// choice. Interface: valid/ready in (tag, price), valid/ready out (value,
// last-of-run flag). The output register is loaded from an asynchronous
// memory read.
module ls_path_reduction
  import stac_a2_pkg::*;
#(
  parameter int unsigned MAX_STEPS = 1260,
  parameter int unsigned MAX_GROUP = 128
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  tag_t in_tag,
  input  fx_t  in_price,
  output logic out_valid,
  input  logic out_ready,
  output fx_t  out_data,
  output logic out_last,
  output logic fill_stall      // fill side waiting for the serve side
);
  localparam int unsigned DEPTH = MAX_STEPS * MAX_GROUP;
  localparam int unsigned IW    = $clog2(DEPTH);

  fx_t         bank [2*DEPTH];   // bank b, entry i at b*DEPTH + i
  logic        fill_bank, serve_bank;
  logic [1:0]  full;
  logic [15:0] bank_paths [2];
  logic [15:0] bank_steps [2];
  logic [1:0]  bank_run_end;
  logic [15:0] s_step, s_path;
  logic [IW-1:0] fill_idx, serve_idx;
  logic [IW:0]   fill_addr, serve_addr;
  fx_t         old_v, new_v;
  logic        accept, serving, emit, serve_last;

  // ---------------------------------------------------------------- fill
  assign in_ready   = !full[fill_bank];
  assign fill_stall = in_valid && !in_ready;
  assign accept     = in_valid && in_ready;
  assign fill_idx   = IW'(in_tag.step) * IW'(MAX_GROUP) + IW'(in_tag.path);

  assign fill_addr  = fill_bank  ? (IW+1)'(DEPTH) + (IW+1)'(fill_idx)  : (IW+1)'(fill_idx);
  assign serve_addr = serve_bank ? (IW+1)'(DEPTH) + (IW+1)'(serve_idx) : (IW+1)'(serve_idx);

  always_comb begin
    old_v = bank[fill_addr];
    new_v = (in_tag.first_asset || in_price > old_v) ? in_price : old_v;
  end

  always_ff @(posedge clk)
    if (accept) bank[fill_addr] <= new_v;

  // --------------------------------------------------------------- serve
  assign serving    = full[serve_bank];
  assign emit       = serving && (!out_valid || out_ready);
  assign serve_idx  = IW'(s_step) * IW'(MAX_GROUP) + IW'(s_path);
  assign serve_last = (s_step == bank_steps[serve_bank] - 1) &&
                      (s_path == bank_paths[serve_bank] - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_bank    <= 1'b0;
      serve_bank   <= 1'b0;
      full         <= '0;
      bank_paths   <= '{default: '0};
      bank_steps   <= '{default: '0};
      bank_run_end <= '0;
      s_step       <= '0;
      s_path       <= '0;
      out_valid    <= 1'b0;
      out_data     <= '0;
      out_last     <= 1'b0;
    end else begin
      // fill side closes a group
      if (accept && in_tag.group_end) begin
        full[fill_bank]         <= 1'b1;
        bank_paths[fill_bank]   <= in_tag.group_paths;
        bank_steps[fill_bank]   <= in_tag.step + 16'd1;
        bank_run_end[fill_bank] <= in_tag.run_end;
        fill_bank               <= !fill_bank;
      end
      // serve side
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (emit) begin
        out_valid <= 1'b1;
        out_data  <= bank[serve_addr];
        out_last  <= serve_last && bank_run_end[serve_bank];
        if (serve_last) begin
          s_step            <= '0;
          s_path            <= '0;
          full[serve_bank]  <= 1'b0;
          serve_bank        <= !serve_bank;
        end else if (s_path == bank_paths[serve_bank] - 1) begin
          s_path <= '0;
          s_step <= s_step + 16'd1;
        end else begin
          s_path <= s_path + 16'd1;
        end
      end
    end
  end

  // A stalled output must hold its value.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
