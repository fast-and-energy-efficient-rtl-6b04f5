// result_streamer: stream-to-memory adaptor draining one benchmark kernel.
//
// Receives the kernel's reduced results (one 64-bit value per cycle), packs
// eight of them into each 512-bit word (value i of a word in bits
// [64i +: 64]) and writes the words to consecutive HBM addresses from
// arg_base. One command covers one chunk of arg_n_vals results; a final
// partial word is written with its unused lanes zero. After the chunk's
// last write the host copies the chunk back over PCIe.
//
// Control is ap_ctrl_chain exactly as in input_streamer: one-deep command
// queue (ap_ready), ap_done held until ap_continue, and a chunk cannot
// complete while the previous ap_done is still unacknowledged.
// Memory side: wr_valid/wr_ready with word address and data.
module result_streamer
  import stac_a2_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // ap_ctrl_chain
  input  logic             ap_start,
  output logic             ap_ready,
  output logic             ap_done,
  input  logic             ap_continue,
  output logic             ap_idle,
  input  mem_addr_t        arg_base,
  input  logic [CNT_W-1:0] arg_n_vals,
  // result stream from the kernel
  input  logic             in_valid,
  output logic             in_ready,
  input  fx_t              in_data,
  // memory write port
  output logic             wr_valid,
  input  logic             wr_ready,
  output mem_addr_t        wr_addr,
  output mem_word_t        wr_data
);
  logic             q_valid;
  mem_addr_t        q_base;
  logic [CNT_W-1:0] q_n;
  logic             busy, done_flag;
  logic [CNT_W-1:0] vals_left;
  localparam int unsigned LW = $clog2(PTS_PER_WORD);
  logic [LW-1:0]    lane;
  mem_word_t        word;
  logic             accept, finish;

  assign ap_ready = !q_valid;
  assign ap_idle  = !q_valid && !busy;
  assign ap_done  = done_flag;
  assign in_ready = busy && !wr_valid && vals_left != 0;
  assign accept   = in_valid && in_ready;
  assign finish   = busy && vals_left == 0 && !wr_valid && !done_flag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid <= 1'b0; q_base <= '0; q_n <= '0;
      busy <= 1'b0; done_flag <= 1'b0; vals_left <= '0; lane <= '0;
      word <= '0; wr_valid <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      if (ap_start && ap_ready) begin
        q_valid <= 1'b1;
        q_base  <= arg_base;
        q_n     <= arg_n_vals;
      end
      if (ap_continue) done_flag <= 1'b0;
      if (finish) begin
        busy      <= 1'b0;
        done_flag <= 1'b1;
      end
      if (!busy && q_valid) begin
        busy      <= 1'b1;
        q_valid   <= 1'b0;
        wr_addr   <= q_base;
        vals_left <= q_n;
        lane      <= '0;
        word      <= '0;
      end
      if (wr_valid && wr_ready) begin
        wr_valid <= 1'b0;
        wr_addr  <= wr_addr + 1'b1;
      end
      if (accept) begin
        vals_left <= vals_left - 1'b1;
        if (lane == LW'(PTS_PER_WORD - 1) || vals_left == 1) begin
          wr_valid <= 1'b1;
          wr_data  <= word | (mem_word_t'($unsigned(in_data)) << (FX_W * lane));
          word     <= '0;
          lane     <= '0;
        end else begin
          word <= word | (mem_word_t'($unsigned(in_data)) << (FX_W * lane));
          lane <= lane + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_valid && !wr_ready |=> wr_valid && $stable(wr_data) && $stable(wr_addr));

endmodule
