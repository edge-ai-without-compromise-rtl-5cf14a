// tb_cim_core: one core, reduced to 4x4 corelets (16x16 cells) so that
// every cell can be programmed. The testbench acts as the host: it
// programs every cell to a random target conductance with a
// write-verify loop (SET/RESET pulses and READs through the select
// registers), then runs forward, backward and recurrent MVMs and
// neuron-test commands with random precision, activation and decrement
// settings, reads the output registers and compares every word and the
// cycle count with the reference model of neurram_tb_pkg. It also
// checks noise injection changes results, and that power gating clears
// the registers but keeps the weights. Through the core it is also the
// test of the transposable array wiring (tnsa) and of the controller's
// phase sequence, whose every cycle shows in the checked cycle count.
module tb_cim_core;
  import neurram_pkg::*;
  import neurram_tb_pkg::*;
  localparam int D = 4, N = D * D, WL_WAIT = 2;

  logic clk = 0, rst_n = 0, pwr_en = 0, cmd_valid = 0;
  cmd_t cmd_in;
  logic cmd_ready, done, busy, clk_en;
  bus_req_t bus;
  logic [REG_W-1:0] rdata;
  logic [7:0] v_read = 8'd100, v_decr = 8'd4, v_lfsr = 8'd0, v_prog = 8'd12;
  logic [3:0] wl_width_ns = 4'd5;
  logic [G_W-1:0] read_g;
  int checks = 0, failures = 0;
  int g[][];
  int n_fwd = 0, n_bwd = 0, n_rec = 0, n_ntest = 0, n_early = 0;

  cim_core #(.D(D), .WL_WAIT(WL_WAIT)) dut (.*);
  always #10 clk = ~clk;

  initial begin
    #200ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic bus_write(side_e s, int addr, logic [7:0] d);
    @(negedge clk); bus = '0; bus.we = 1; bus.side = s; bus.addr = 8'(addr); bus.wdata = d;
    @(negedge clk); bus = '0;
  endtask
  task automatic bus_clear(side_e s);
    @(negedge clk); bus = '0; bus.clr = 1; bus.side = s;
    @(negedge clk); bus = '0;
  endtask
  task automatic bus_read(side_e s, int addr, output logic [7:0] d);
    @(negedge clk); bus = '0; bus.side = s; bus.addr = 8'(addr); #1; d = rdata;
  endtask

  // issue a command, return cycles from the accepting edge to done
  task automatic run(cmd_t c, output int cycles);
    @(negedge clk); cmd_in = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    cycles = 0;
    do begin @(posedge clk); cycles++; end while (!done);
  endtask

  task automatic prog_cell(int r, int col, int target);
    cmd_t c; int cyc, tries;
    bus_clear(SIDE_BL); bus_clear(SIDE_SL);
    bus_write(SIDE_BL, r, 8'h01); bus_write(SIDE_SL, col, 8'h01);
    c = '0; c.mode = MODE_PROG;
    tries = 0;
    forever begin
      c.prog_op = PROG_READ; run(c, cyc);
      if (int'(read_g) == target || tries > 20) break;
      if (int'(read_g) < target) begin c.prog_op = PROG_SET;   v_prog = 8'(11 + target - int'(read_g)); end
      else                       begin c.prog_op = PROG_RESET; v_prog = 8'(14 + int'(read_g) - target); end
      run(c, cyc); tries++;
    end
    chk(int'(read_g) == target, $sformatf("program cell %0d,%0d to %0d got %0d", r, col, target, read_g));
  endtask

  task automatic do_mvm(cmd_t c, bit check_words);
    logic [7:0] in_w[]; logic [7:0] exp_w[]; logic [7:0] d;
    int smax, cyc;
    in_w = new[N];
    for (int i = 0; i < N; i++) begin
      in_w[i] = {1'($urandom), 7'($urandom)};
      bus_write(c.in_side, i, in_w[i]);
    end
    ref_mvm(D, c, in_w, g, int'(v_read), int'(v_decr), exp_w, smax);
    run(c, cyc);
    if (smax < int'(c.n_max)) n_early++;
    if (c.noise_cyc == 0)
      chk(cyc == mvm_cycles(int'(c.in_mag_bits), 0, smax, WL_WAIT, (c.mode == MODE_MVM) ? N : 0),
          $sformatf("cycles %0d expected %0d", cyc, mvm_cycles(int'(c.in_mag_bits), 0, smax, WL_WAIT, (c.mode == MODE_MVM) ? N : 0)));
    if (check_words)
      for (int i = 0; i < N; i++) begin
        bus_read(c.out_side, i, d);
        chk(d == exp_w[i], $sformatf("mode %0d in %0d out %0d act %0d line %0d: %h expected %h in %h bits %0d vr %0d vd %0d nmax %0d",
                                      c.mode, c.in_side, c.out_side, c.act, i, d, exp_w[i], in_w[i], c.in_mag_bits, v_read, v_decr, c.n_max));
      end
  endtask

  initial begin
    cmd_t c; logic [7:0] d;
    bus = '0; cmd_in = '0;
    g = new[N]; foreach (g[r]) g[r] = new[N];
    repeat (3) @(posedge clk); rst_n = 1; pwr_en = 1;
    repeat (3) @(posedge clk);
    // program every cell (write-verify by the host)
    for (int r = 0; r < N; r++)
      for (int col = 0; col < N; col++) begin
        g[r][col] = $urandom_range(1, 40);
        prog_cell(r, col, g[r][col]);
      end
    // MVMs
    for (int it = 0; it < 60; it++) begin
      c = '0;
      c.mode = (it % 6 == 5) ? MODE_NTEST : MODE_MVM;
      unique case (it % 3)
        0: begin c.in_side = SIDE_BL; c.out_side = SIDE_SL; end  // forward
        1: begin c.in_side = SIDE_SL; c.out_side = SIDE_BL; end  // backward
        default: begin c.in_side = SIDE_BL; c.out_side = SIDE_BL; end // recurrent
      endcase
      c.in_mag_bits = 3'($urandom_range(1, 5));
      c.in_len = 8'($urandom_range(0, N - 1));
      c.n_max = (it % 4 == 0) ? 8'd128 : 8'($urandom_range(0, 60));
      c.act = act_e'($urandom_range(0, 3));
      v_decr = 8'($urandom_range(2, 20));
      v_read = 8'($urandom_range(40, 200));
      do_mvm(c, 1);
      if (c.mode == MODE_NTEST) n_ntest++;
      else if (it % 3 == 0) n_fwd++;
      else if (it % 3 == 1) n_bwd++;
      else n_rec++;
    end
    chk(n_fwd > 0 && n_bwd > 0 && n_rec > 0 && n_ntest > 0 && n_early > 0, "all mechanisms exercised");
    // noise injection changes some outputs of a sign-only (stochastic) MVM
    begin
      logic [7:0] a[N]; int diff;
      c = '0; c.mode = MODE_MVM; c.in_side = SIDE_BL; c.out_side = SIDE_SL;
      c.in_mag_bits = 3'd1; c.in_len = 8'(N - 1); c.n_max = 0; c.act = ACT_LINEAR;
      for (int i = 0; i < N; i++) bus_write(SIDE_BL, i, 8'h00);  // zero input
      v_lfsr = 8'd50; c.noise_cyc = 4'd3;
      do_mvm(c, 0);
      for (int i = 0; i < N; i++) begin bus_read(SIDE_SL, i, d); a[i] = d; end
      diff = 0;
      for (int i = 0; i < N; i++) diff += a[i][7];
      // with three +/-50 noise samples the sign is random: some of each
      chk(diff > 0 && diff < N, $sformatf("noise gave %0d positive of %0d", diff, N));
    end
    // power gating: registers cleared, weights kept
    bus_write(SIDE_BL, 3, 8'h5A);
    @(negedge clk); pwr_en = 0; repeat (3) @(negedge clk); pwr_en = 1; repeat (2) @(negedge clk);
    bus_read(SIDE_BL, 3, d);
    chk(d == 8'h00, "registers cleared by power gating");
    chk(!busy, "idle after power-up");
    begin
      cmd_t pc; int cyc;
      bus_clear(SIDE_BL); bus_clear(SIDE_SL);
      bus_write(SIDE_BL, 2, 8'h01); bus_write(SIDE_SL, 7, 8'h01);
      pc = '0; pc.mode = MODE_PROG; pc.prog_op = PROG_READ; run(pc, cyc);
      chk(int'(read_g) == g[2][7], "weights kept through power gating");
    end
    $display("forward %0d backward %0d recurrent %0d neuron-test %0d early-stop %0d",
             n_fwd, n_bwd, n_rec, n_ntest, n_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
