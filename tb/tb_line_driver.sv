// tb_line_driver: drives random register words through both a row-side
// and a column-side driver and compares the selected supplies and WL
// enables with the rules worked out here independently: pulse encoding
// per magnitude bit and sign, precharge, noise levels from the PRN bits,
// WL range for BL-to-SL MVM, programming select/inhibit.
module tb_line_driver;
  import neurram_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  cmd_t cmd; ctrl_t ctrl;
  logic [N-1:0][REG_W-1:0] regs;
  logic [N-1:0] prn;
  drive_e [N-1:0] drv_bl, drv_sl;
  logic [N-1:0] wl_bl, wl_sl;
  int checks = 0, failures = 0;

  line_driver #(.N(N), .SIDE(SIDE_BL)) u_bl (.clk, .rst_n, .cmd, .ctrl, .regs, .prn, .drv(drv_bl), .wl_en(wl_bl));
  line_driver #(.N(N), .SIDE(SIDE_SL)) u_sl (.clk, .rst_n, .cmd, .ctrl, .regs, .prn, .drv(drv_sl), .wl_en(wl_sl));
  always #5 clk = ~clk;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    cmd = '0; ctrl = '0; regs = '0; prn = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int b;
      @(negedge clk);
      for (int k = 0; k < N; k++) begin regs[k] = 8'($urandom); prn[k] = 1'($urandom); end
      cmd = '0;
      cmd.mode = MODE_MVM;
      cmd.in_side = side_e'(it % 2);
      cmd.in_len = 8'($urandom);
      b = $urandom_range(0, 6);
      ctrl = '0; ctrl.load_pulse = 1; ctrl.bit_idx = 3'(b);
      @(negedge clk);
      ctrl = '0; ctrl.drive_in = 1;
      #1;
      for (int k = 0; k < N; k++) begin
        drive_e e;
        e = !regs[k][b] ? DRV_VREF : (regs[k][7] ? DRV_VPLUS : DRV_VMINUS);
        if (cmd.in_side == SIDE_BL) begin
          chk(drv_bl[k] == e && drv_sl[k] == DRV_FLOAT, "input on BL");
          chk(wl_bl[k] == (k <= cmd.in_len), "WL range");
        end else begin
          chk(drv_sl[k] == e && drv_bl[k] == DRV_FLOAT, "input on SL");
          chk(wl_bl[k] == 1'b1, "all WLs");
        end
        chk(wl_sl[k] == 1'b0, "SL side has no WL");
      end
      // noise phase
      ctrl = '0; ctrl.noise = 1; #1;
      for (int k = 0; k < N; k++)
        chk(drv_sl[k] == (prn[k] ? DRV_LFSR_P : DRV_LFSR_M), "noise level");
      // precharge
      ctrl = '0; ctrl.precharge = 1; #1;
      for (int k = 0; k < N; k++) chk(drv_bl[k] == DRV_VREF && drv_sl[k] == DRV_VREF, "precharge");
      @(negedge clk); ctrl = '0;
    end
    // neuron test: WLs stay at GND
    cmd.mode = MODE_NTEST; cmd.in_side = SIDE_BL; #1;
    for (int k = 0; k < N; k++) chk(wl_bl[k] == 1'b0, "ntest WL off");
    // programming: select row 5 and (same regs on SL side) column 5
    regs = '0; regs[5] = 8'h01;
    cmd.mode = MODE_PROG; ctrl = '0; ctrl.prog_pulse = 1; #1;
    for (int k = 0; k < N; k++) begin
      chk(drv_bl[k] == ((k == 5) ? DRV_WR_SEL : DRV_WR_UNS), "prog BL");
      chk(wl_bl[k] == (k == 5), "prog WL");
    end
    ctrl = '0; #1;
    chk(drv_bl[5] == DRV_FLOAT && wl_bl[5] == 1'b0, "prog idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
