// input_streamer: memory-to-stream adaptor feeding one benchmark kernel.
//
// The accelerator card offers only DMA into its HBM, not a host-to-device
// stream, so the host copies each reordered chunk of random numbers into HBM
// and then starts this block once per chunk. It reads the chunk in 512-bit
// words (four elements of two 64-bit data points each, element k of a word
// in bits [128k +: 128] as {zx, zv}) and streams the elements to the kernel
// one per cycle, so the kernel sees one continuous stream across chunks.
//
// Control follows the ap_ctrl_chain convention: a command (arg_base word
// address, arg_n_elems) is taken when ap_start and ap_ready are both high;
// ap_ready is high whenever the one-deep command register is empty, so the
// next chunk can be queued while the current one is still streaming.
// ap_done rises when a chunk's last element has left and stays high until
// ap_continue; while it is high, the next chunk can run but cannot finish
// (back pressure). ap_idle: nothing queued or running.
//
// Memory side: a read request (rd_req_valid/ready, word address) returns
// one word on rd_rsp_valid some cycles later, in order, with no back
// pressure; requests are only issued while the FIFO_DEPTH-word buffer has
// room for the reply. The buffer depth and this read port are this design's
// choice; the 512-bit width is the published one.
module input_streamer
  import stac_a2_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // ap_ctrl_chain
  input  logic             ap_start,
  output logic             ap_ready,
  output logic             ap_done,
  input  logic             ap_continue,
  output logic             ap_idle,
  input  mem_addr_t        arg_base,
  input  logic [CNT_W-1:0] arg_n_elems,
  // memory read port
  output logic             rd_req_valid,
  input  logic             rd_req_ready,
  output mem_addr_t        rd_req_addr,
  input  logic             rd_rsp_valid,
  input  mem_word_t        rd_rsp_data,
  // element stream to the kernel
  output logic             out_valid,
  input  logic             out_ready,
  output elem_t            out_elem
);
  localparam int unsigned FW = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  // queued command
  logic             q_valid;
  mem_addr_t        q_base;
  logic [CNT_W-1:0] q_n;
  // running command
  logic             busy;
  mem_addr_t        req_addr;
  logic [CNT_W-1:0] words_to_req, elems_left;
  localparam int unsigned LW = $clog2(ELEMS_PER_WORD);
  logic [LW-1:0]    lane;
  // word buffer
  mem_word_t        fifo [FIFO_DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;
  logic [FW-1:0]    count, in_flight;
  logic             req_fire, pop, emit, finish, done_flag;

  assign ap_ready     = !q_valid;
  assign ap_idle      = !q_valid && !busy;
  assign ap_done      = done_flag;

  assign rd_req_valid = busy && words_to_req != 0 &&
                        (32'(count) + 32'(in_flight) < FIFO_DEPTH);
  assign rd_req_addr  = req_addr;
  assign req_fire     = rd_req_valid && rd_req_ready;

  assign out_valid    = busy && elems_left != 0 && count != 0;
  assign out_elem     = fifo[rd_ptr][$bits(elem_t)*lane +: $bits(elem_t)];
  assign emit         = out_valid && out_ready;
  assign pop          = emit && (lane == LW'(ELEMS_PER_WORD - 1) || elems_left == 1);
  assign finish       = busy && elems_left == 0 && !done_flag;

  always_ff @(posedge clk)
    if (rd_rsp_valid) fifo[wr_ptr] <= rd_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid <= 1'b0; q_base <= '0; q_n <= '0;
      busy <= 1'b0; req_addr <= '0; words_to_req <= '0; elems_left <= '0;
      lane <= '0; wr_ptr <= '0; rd_ptr <= '0; count <= '0; in_flight <= '0;
      done_flag <= 1'b0;
    end else begin
      if (ap_start && ap_ready) begin
        q_valid <= 1'b1;
        q_base  <= arg_base;
        q_n     <= arg_n_elems;
      end
      if (ap_continue) done_flag <= 1'b0;
      if (finish) begin
        busy      <= 1'b0;
        done_flag <= 1'b1;
      end
      if (!busy && q_valid) begin
        busy         <= 1'b1;
        q_valid      <= 1'b0;
        req_addr     <= q_base;
        words_to_req <= (q_n + 3) >> 2;
        elems_left   <= q_n;
        lane         <= '0;
      end
      if (req_fire) begin
        req_addr     <= req_addr + 1'b1;
        words_to_req <= words_to_req - 1'b1;
      end
      if (rd_rsp_valid) wr_ptr <= (32'(wr_ptr) == FIFO_DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      in_flight <= in_flight + FW'(req_fire) - FW'(rd_rsp_valid);
      count     <= count + FW'(rd_rsp_valid) - FW'(pop);
      if (pop) rd_ptr <= (32'(rd_ptr) == FIFO_DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      if (emit) begin
        elems_left <= elems_left - 1'b1;
        lane       <= pop ? '0 : lane + 1'b1;
      end
    end
  end

  // The stream must not change while it is stalled.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_elem));

endmodule
