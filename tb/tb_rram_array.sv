// tb_rram_array: the array model at N = 8. The testbench programs every
// cell with SET/RESET pulses of random amplitude and checks the device
// law and the clamping, checks READ, then drives random +1/0/-1 levels on
// the BL side (forward) or the SL side (backward) with random WL
// enables, fires a WL pulse, and compares each floating line with the
// conductance-weighted average, and the settle time with 2N cycles.
module tb_rram_array;
  import neurram_pkg::*;
  localparam int N = 8;
  logic clk = 0;
  mode_e mode; prog_op_e prog_op; logic prog_pulse = 0;
  logic [7:0] v_prog = 0, v_read = 8'd100, v_lfsr = 8'd30;
  drive_e [N-1:0] drv_bl, drv_sl;
  logic [N-1:0] wl_en;
  logic wl_pulse = 0;
  logic signed [N-1:0][V_W-1:0] v_bl, v_sl;
  logic settling; logic [G_W-1:0] read_g;
  int checks = 0, failures = 0;
  int g[N][N];

  rram_array #(.N(N), .G_INIT(3)) dut (.*);
  always #10 clk = ~clk;

  initial begin
    #5ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic int lvl(drive_e d);
    case (d)
      DRV_VPLUS: return int'(v_read);  DRV_VMINUS: return -int'(v_read);
      DRV_LFSR_P: return int'(v_lfsr); DRV_LFSR_M: return -int'(v_lfsr);
      default: return 0;
    endcase
  endfunction

  task automatic prog(int r, int c, prog_op_e op, int amp);
    @(negedge clk);
    mode = MODE_PROG; prog_op = op; v_prog = 8'(amp);
    drv_bl = {N{DRV_WR_UNS}}; drv_sl = {N{DRV_WR_UNS}}; wl_en = '0;
    drv_bl[r] = DRV_WR_SEL; drv_sl[c] = DRV_WR_SEL; wl_en[r] = 1'b1;
    prog_pulse = 1;
    @(negedge clk); prog_pulse = 0;
  endtask

  initial begin
    mode = MODE_MVM; prog_op = PROG_READ;
    drv_bl = {N{DRV_VREF}}; drv_sl = {N{DRV_VREF}}; wl_en = '0;
    foreach (g[r, c]) g[r][c] = 3;
    repeat (3) @(negedge clk);
    // programming
    for (int it = 0; it < 400; it++) begin
      int r, c, amp; bit set;
      r = $urandom_range(0, N - 1); c = $urandom_range(0, N - 1);
      set = $urandom_range(0, 2) != 0; amp = $urandom_range(8, 30);
      prog(r, c, set ? PROG_SET : PROG_RESET, amp);
      if (set) g[r][c] += (amp > 11) ? amp - 11 : 0;
      else     g[r][c] -= (amp > 14) ? amp - 14 : 0;
      if (g[r][c] < 0) g[r][c] = 0;
      if (g[r][c] > 63) g[r][c] = 63;
      prog(r, c, PROG_READ, 0);
      @(negedge clk);
      chk(int'(read_g) == g[r][c], $sformatf("cell %0d,%0d: %0d expected %0d", r, c, read_g, g[r][c]));
    end
    // MVM settling
    for (int it = 0; it < 200; it++) begin
      bit fwd; int cyc;
      fwd = $urandom_range(0, 1);
      @(negedge clk);
      mode = MODE_MVM;
      wl_en = fwd ? N'($urandom) : '1;
      for (int k = 0; k < N; k++) begin
        drive_e d;
        case ($urandom_range(0, 3))
          0: d = DRV_VPLUS; 1: d = DRV_VMINUS; 2: d = DRV_VREF; default: d = DRV_LFSR_P;
        endcase
        if (fwd) begin drv_bl[k] = d; drv_sl[k] = DRV_FLOAT; end
        else     begin drv_sl[k] = d; drv_bl[k] = DRV_FLOAT; end
      end
      v_read = 8'($urandom_range(20, 200));
      @(posedge clk); #1 wl_pulse = 1; #4 wl_pulse = 0;
      cyc = 0;
      @(posedge clk); #1;
      chk(settling, "settling after WL pulse");
      while (settling) begin @(posedge clk); #1; cyc++; end
      chk(cyc == 2 * N, $sformatf("settle took %0d cycles", cyc));
      for (int j = 0; j < N; j++) begin
        int num, den, expv;
        num = 0; den = 0;
        for (int i = 0; i < N; i++)
          if (fwd ? wl_en[i] : wl_en[j]) begin
            num += fwd ? lvl(drv_bl[i]) * g[i][j] : lvl(drv_sl[i]) * g[j][i];
            den += fwd ? g[i][j] : g[j][i];
          end
        if (den != 0) begin
          expv = num / den;
          if (fwd) chk(int'($signed(v_sl[j])) == expv, $sformatf("SL %0d: %0d expected %0d", j, $signed(v_sl[j]), expv));
          else     chk(int'($signed(v_bl[j])) == expv, $sformatf("BL %0d: %0d expected %0d", j, $signed(v_bl[j]), expv));
        end
      end
      // driven lines take their driver level
      for (int k = 0; k < N; k++)
        if (fwd) chk(int'($signed(v_bl[k])) == lvl(drv_bl[k]), "driven BL level");
        else     chk(int'($signed(v_sl[k])) == lvl(drv_sl[k]), "driven SL level");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
