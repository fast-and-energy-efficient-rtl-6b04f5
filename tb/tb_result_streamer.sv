// tb_result_streamer: three chunks of results (20, 16 and 5 values; two end
// in a partial word) are streamed in with random gaps into a memory model
// whose write port stalls at random. The second command is queued while
// the first chunk runs, and the first ap_done is acknowledged late so the
// second chunk must wait to complete. The words in memory must hold the
// values packed eight per word, low lane first, unused lanes zero, and no
// word may be written outside the chunks.
module tb_result_streamer;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  logic             clk = 0, rst_n = 0;
  logic             ap_start = 0, ap_ready, ap_done, ap_continue = 0, ap_idle;
  mem_addr_t        arg_base = '0;
  logic [CNT_W-1:0] arg_n_vals = '0;
  logic             in_valid = 0, in_ready;
  fx_t              in_data = '0;
  logic             wr_valid, wr_ready;
  mem_addr_t        wr_addr;
  mem_word_t        wr_data;
  logic             rd_req_ready, rd_rsp_valid;
  mem_word_t        rd_rsp_data;
  int checks = 0, failures = 0;
  int n_queued = 0, n_backpressure = 0, n_done = 0;

  result_streamer dut (.*);
  hbm_model #(.LATENCY(2), .STALLS(1)) u_mem (
    .clk, .rd_req_valid(1'b0), .rd_req_ready, .rd_req_addr('0), .rd_rsp_valid,
    .rd_rsp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  always #5 clk = !clk;

  fx_t vals [$];

  always @(posedge clk) if (rst_n && ap_done && !ap_continue) n_backpressure++;

  // producer: streams all values of all chunks in order, with random gaps;
  // in_valid, once raised, stays up until the value is taken
  int n_sent = 0;
  bit fired = 0;
  always @(posedge clk) begin
    fired <= in_valid && in_ready;
    if (in_valid && in_ready) n_sent <= n_sent + 1;
  end
  always @(negedge clk) if (rst_n) begin
    if (fired) in_valid = 0;
    if (!in_valid && n_sent < vals.size() && ($urandom % 4 != 0)) begin
      in_data  = vals[n_sent];
      in_valid = 1;
    end
  end

  task automatic start(mem_addr_t base, int n);
    arg_base = base; arg_n_vals = CNT_W'(n);
    ap_start = 1;
    do @(posedge clk); while (!ap_ready);
    if (!ap_idle) n_queued++;
    @(negedge clk);
    ap_start = 0;
  endtask

  task automatic wait_done_and_ack(int hold);
    while (!ap_done) @(negedge clk);
    n_done++;
    repeat (hold) @(negedge clk);
    ap_continue = 1; @(negedge clk); ap_continue = 0;
  endtask

  task automatic check_chunk(mem_addr_t base, int first, int n);
    for (int i = 0; i < (n + 7) / 8; i++) begin
      mem_word_t w = u_mem.host_read(base + mem_addr_t'(i));
      for (int k = 0; k < 8; k++) begin
        fx_t want;
        want = (8*i + k < n) ? vals[first + 8*i + k] : '0;
        checks++;
        if (w[64*k +: 64] !== want) begin
          failures++;
          if (failures < 10) $display("FAIL base %0d word %0d lane %0d", base, i, k);
        end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 41; i++) vals.push_back(r2fx(100.0 * randn()));
    repeat (3) @(negedge clk);
    rst_n = 1;
    start(10, 20);
    repeat (2) @(negedge clk);
    start(50, 16);
    wait_done_and_ack(25);
    start(90, 5);
    wait_done_and_ack(0);
    wait_done_and_ack(0);
    check_chunk(10, 0, 20);
    check_chunk(50, 20, 16);
    check_chunk(90, 36, 5);
    checks++;
    if (u_mem.n_writes != 3 + 2 + 1) begin failures++; $display("FAIL writes %0d", u_mem.n_writes); end
    checks++;
    if (n_queued == 0 || n_backpressure == 0 || n_done != 3) begin
      failures++; $display("FAIL control queued=%0d bp=%0d done=%0d", n_queued, n_backpressure, n_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
