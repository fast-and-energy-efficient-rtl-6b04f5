// tb_heston_param_table: writes a random record to every asset slot, then
// reads them back through both read ports in random order and checks the
// records; also checks that an asset number beyond the table reads as zero.
module tb_heston_param_table;
  import stac_a2_pkg::*;

  localparam int unsigned MAX_ASSETS = 50;
  logic        clk = 0;
  logic        wr_en = 0;
  logic [15:0] wr_asset = '0;
  heston_cfg_t wr_cfg = '0;
  logic [15:0] rd_asset [2];
  heston_cfg_t rd_cfg   [2];
  heston_cfg_t model    [MAX_ASSETS];
  int checks = 0, failures = 0;

  heston_param_table #(.MAX_ASSETS(MAX_ASSETS), .N_RD(2)) dut (.*);

  always #5 clk = !clk;

  function automatic heston_cfg_t rand_cfg();
    heston_cfg_t c;
    for (int i = 0; i < $bits(heston_cfg_t) / 32; i++)
      c[32*i +: 32] = $urandom;
    return c;
  endfunction

  initial begin
    rd_asset = '{default: '0};
    for (int a = 0; a < int'(MAX_ASSETS); a++) begin
      @(negedge clk);
      wr_en    = 1;
      wr_asset = 16'(a);
      wr_cfg   = rand_cfg();
      model[a] = wr_cfg;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      rd_asset[0] = 16'($urandom % MAX_ASSETS);
      rd_asset[1] = 16'($urandom % MAX_ASSETS);
      #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rd_cfg[p] !== model[rd_asset[p]]) begin
          failures++;
          $display("FAIL port %0d asset %0d", p, rd_asset[p]);
        end
      end
      @(negedge clk);
    end
    // overwrite one entry and read it back
    wr_en = 1; wr_asset = 16'd7; wr_cfg = rand_cfg(); model[7] = wr_cfg;
    @(negedge clk); wr_en = 0;
    rd_asset[1] = 16'd7; #1;
    checks++;
    if (rd_cfg[1] !== model[7]) begin failures++; $display("FAIL overwrite"); end
    rd_asset[0] = 16'(MAX_ASSETS); #1;
    checks++;
    if (rd_cfg[0] !== '0) begin failures++; $display("FAIL out of range"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
