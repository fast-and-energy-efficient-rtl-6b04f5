// tb_input_streamer: three chunks (41, 16 and 7 elements, so two of them
// end in a partial word) are placed in the memory model and started through
// the ap_ctrl_chain handshake. The second command is issued while the first
// chunk is still streaming (it must be queued: ap_ready high while busy),
// and ap_continue for the first chunk is withheld for a while so the second
// chunk must wait to complete (back pressure). Every streamed element is
// checked against the data written, ap_done must rise once per chunk, and
// with a stall-free memory and sink a chunk must stream at one element
// per cycle after the first word arrives.
module tb_input_streamer;
  import stac_a2_pkg::*;
  import tb_ref_pkg::*;

  logic             clk = 0, rst_n = 0;
  logic             ap_start = 0, ap_ready, ap_done, ap_continue = 0, ap_idle;
  mem_addr_t        arg_base = '0;
  logic [CNT_W-1:0] arg_n_elems = '0;
  logic             rd_req_valid, rd_req_ready, rd_rsp_valid;
  mem_addr_t        rd_req_addr;
  mem_word_t        rd_rsp_data;
  logic             out_valid, out_ready = 0;
  elem_t            out_elem;
  logic             wr_ready;
  int checks = 0, failures = 0;
  int n_queued = 0, n_backpressure = 0, n_done = 0, cyc = 0;
  bit sink_stalls = 1;

  input_streamer dut (.*);
  hbm_model #(.LATENCY(4), .STALLS(1)) u_mem (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  always #5 clk = !clk;

  elem_t exp_e [$];
  int    n_out = 0, first_c = 0, last_c = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ap_done && !ap_continue) n_backpressure++;
    if (out_valid && out_ready) begin
      elem_t w;
      w = exp_e.pop_front();
      checks++;
      if (out_elem !== w) begin
        failures++;
        if (failures < 10) $display("FAIL elem %0d: %h / %h", n_out, out_elem, w);
      end
      n_out++;
      last_c = cyc;
    end
  end

  always @(negedge clk) out_ready = !sink_stalls || ($urandom % 3 != 0);

  // put a chunk of n elements at word address base
  task automatic load(mem_addr_t base, int n);
    mem_word_t w;
    for (int i = 0; i < (n + 3) / 4; i++) begin
      w = '0;
      for (int k = 0; k < 4 && 4*i + k < n; k++) begin
        elem_t e;
        e.zv = r2fx(randn()); e.zx = r2fx(randn());
        w[128*k +: 128] = e;
        exp_e.push_back(e);
      end
      u_mem.host_write(base + mem_addr_t'(i), w);
    end
  endtask

  task automatic start(mem_addr_t base, int n);
    arg_base = base; arg_n_elems = CNT_W'(n);
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

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(100, 41); load(200, 16); load(300, 7);
    start(100, 41);
    repeat (3) @(negedge clk);
    start(200, 16);                      // queued behind the running chunk
    wait_done_and_ack(30);               // second chunk waits for this ack
    start(300, 7);
    wait_done_and_ack(0);
    wait_done_and_ack(0);
    checks++;
    if (n_out != 64 || exp_e.size() != 0) begin failures++; $display("FAIL count %0d", n_out); end
    checks++;
    if (n_queued == 0) begin failures++; $display("FAIL no command was queued"); end
    checks++;
    if (n_backpressure == 0) begin failures++; $display("FAIL no back pressure"); end
    checks++;
    if (n_done != 3) begin failures++; $display("FAIL done count %0d", n_done); end
    // rate: 32 elements, no sink stalls
    sink_stalls = 0;
    load(400, 32);
    start(400, 32);
    @(posedge clk);
    while (!out_valid) @(posedge clk);
    first_c = cyc;
    wait_done_and_ack(0);
    checks++;
    // at most one bubble per memory stall cycle; expect close to 32 cycles
    if (last_c - first_c > 48) begin failures++; $display("FAIL rate %0d", last_c - first_c); end
    $display("queued %0d, back-pressure cycles %0d, 32 elements in %0d cycles",
             n_queued, n_backpressure, last_c - first_c + 1);
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
