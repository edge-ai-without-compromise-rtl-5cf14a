// tb_spi_slave: random 32-bit SPI frames (mode 0, SCLK a quarter of the
// system clock or slower) into the serial interface. Every frame must
// produce exactly one request with the fields of the frame; frames cut
// short must produce none. For read frames the register word (here a
// function of the requested address) must come back on MISO in the first
// 8 bits of the next frame.
module tb_spi_slave;
  import neurram_pkg::*;
  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0, miso;
  logic req_valid; logic [5:0] req_core; bus_req_t req; logic [7:0] rdata;
  int checks = 0, failures = 0, nreq = 0;

  spi_slave dut (.*);
  always #10 clk = ~clk;
  assign rdata = req.addr ^ 8'h5A;   // stands in for the register files
  always @(posedge clk) if (req_valid) nreq++;

  initial begin
    #50ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic frame(logic [31:0] f, int nb, int half, output logic [31:0] back);
    cs_n = 0; repeat (half) @(negedge clk);
    back = '0;
    for (int i = 31; i >= 32 - nb; i--) begin
      mosi = f[i];
      repeat (half) @(negedge clk); sclk = 1; back[i] = miso;
      repeat (half) @(negedge clk); sclk = 0;
    end
    repeat (half) @(negedge clk); cs_n = 1; repeat (6) @(negedge clk);
  endtask

  initial begin
    logic [31:0] f, back; logic [7:0] expect_rd; bit have_rd; int n0;
    repeat (3) @(negedge clk); rst_n = 1; repeat (3) @(negedge clk);
    have_rd = 0;
    for (int it = 0; it < 300; it++) begin
      int half; half = $urandom_range(3, 6);
      f = $urandom; f[6:0] = '0;
      if (it % 3 == 0) begin f[31] = 0; f[30] = 0; end   // read
      n0 = nreq;
      if (it % 17 == 5) begin
        frame(f, $urandom_range(1, 31), half, back);
        chk(nreq == n0, "short frame gave a request");
        have_rd = 0;
        continue;
      end
      frame(f, 32, half, back);
      chk(nreq == n0 + 1, "one request per frame");
      chk(req.we == f[31] && req.clr == f[30] && req.side == side_e'(f[29]) &&
          req_core == f[28:23] && req.addr == f[22:15] && req.wdata == f[14:7],
          $sformatf("fields of frame %h", f));
      if (have_rd) chk(back[31:24] == expect_rd, $sformatf("read back %h expected %h", back[31:24], expect_rd));
      have_rd = !f[31] && !f[30];
      expect_rd = f[22:15] ^ 8'h5A;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
