// tb_reg_file: random-access writes and reads, masked neuron write-back
// and clear_all, compared with a software copy of the register words.
module tb_reg_file;
  import neurram_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 0, clear_all = 0, ra_we = 0, nw_en = 0;
  logic [7:0] ra_addr = 0;
  logic [REG_W-1:0] ra_wdata = 0, ra_rdata;
  logic [N-1:0] nw_mask = '0;
  logic [N-1:0][REG_W-1:0] nw_data = '0, q;
  logic [REG_W-1:0] model [N];
  int checks = 0, failures = 0;

  reg_file #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic compare_all();
    for (int k = 0; k < N; k++) begin
      checks++;
      if (q[k] !== model[k]) begin
        failures++;
        if (failures < 10) $display("line %0d q=%h exp=%h", k, q[k], model[k]);
      end
    end
  endtask

  initial begin
    foreach (model[k]) model[k] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); compare_all();
    // random access writes
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      ra_we = 1; ra_addr = 8'($urandom); ra_wdata = 8'($urandom);
      model[ra_addr] = ra_wdata;
    end
    @(negedge clk); ra_we = 0;
    compare_all();
    // read port
    for (int k = 0; k < N; k += 7) begin
      ra_addr = 8'(k); #1; checks++;
      if (ra_rdata !== model[k]) failures++;
    end
    // neuron write-back with mask
    for (int n = 0; n < 4; n++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        nw_mask[k] = $urandom_range(0, 1);
        nw_data[k] = 8'($urandom);
        if (nw_mask[k]) model[k] = nw_data[k];
      end
      nw_en = 1;
      @(negedge clk); nw_en = 0;
      compare_all();
    end
    // clear_all
    @(negedge clk); clear_all = 1; @(negedge clk); clear_all = 0;
    foreach (model[k]) model[k] = 0;
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
