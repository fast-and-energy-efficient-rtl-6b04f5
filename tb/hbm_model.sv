// hbm_model: behavioural model of one HBM pseudo-channel as seen through a
// 512-bit word-addressed port (not synthesizable; testbench use only).
// Reads: a request accepted on rd_req_valid && rd_req_ready returns its word
// LATENCY cycles later on rd_rsp_valid/rd_rsp_data, in order. Writes:
// accepted on wr_valid && wr_ready. When STALLS is set, both ready signals
// drop at random (one cycle in four), as a busy memory controller would.
// Unwritten words read as zero. The host's DMA side is modelled by the
// host_write/host_read functions, called hierarchically by the testbench.
module hbm_model
  import stac_a2_pkg::*;
#(
  parameter int LATENCY = 4,
  parameter bit STALLS  = 1
) (
  input  logic      clk,
  input  logic      rd_req_valid,
  output logic      rd_req_ready,
  input  mem_addr_t rd_req_addr,
  output logic      rd_rsp_valid,
  output mem_word_t rd_rsp_data,
  input  logic      wr_valid,
  output logic      wr_ready,
  input  mem_addr_t wr_addr,
  input  mem_word_t wr_data
);
  mem_word_t mem [mem_addr_t];
  logic      pipe_v [LATENCY];
  mem_word_t pipe_d [LATENCY];
  int        n_reads = 0, n_writes = 0;

  function automatic void host_write(mem_addr_t a, mem_word_t d);
    mem[a] = d;
  endfunction

  function automatic mem_word_t host_read(mem_addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  initial begin
    rd_req_ready = 1'b0;
    wr_ready     = 1'b0;
    for (int i = 0; i < LATENCY; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  assign rd_rsp_valid = pipe_v[LATENCY-1];
  assign rd_rsp_data  = pipe_d[LATENCY-1];

  always @(posedge clk) begin
    for (int i = LATENCY - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= rd_req_valid && rd_req_ready;
    pipe_d[0] <= host_read(rd_req_addr);
    if (rd_req_valid && rd_req_ready) n_reads++;
    if (wr_valid && wr_ready) begin
      mem[wr_addr] = wr_data;
      n_writes++;
    end
  end

  always @(negedge clk) begin
    rd_req_ready <= !STALLS || ($urandom % 4 != 0);
    wr_ready     <= !STALLS || ($urandom % 4 != 0);
  end
endmodule
