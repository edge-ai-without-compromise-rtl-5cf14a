// tb_neurram_top: end-to-end test of the whole 48-core chip with every
// parameter at its default (256x256 cells and 256 neurons per core).
//
// The testbench plays the host and test board: it powers the cores,
// programs a block of weights into three cores with a write-verify loop
// (select registers written over the random-access port, some over SPI),
// loads input vectors, broadcasts MVM commands to several cores at once
// and reads the output registers back, comparing every word and the
// cycle count with the reference model of neurram_tb_pkg. Each mechanism
// of the design is counted and must occur at least once: forward,
// backward and recurrent MVM, neuron test, multi-core parallel MVM,
// multi-bit inputs, early stop, n_max saturation, ReLU/tanh/sigmoid,
// LFSR noise injection, power gating, SPI writes and reads, and
// SET, RESET and READ pulses.
module tb_neurram_top;
  import neurram_pkg::*;
  import neurram_tb_pkg::*;
  localparam int NCORE = 48, D = 16, N = 256, WL_WAIT = 2;
  localparam int WR = 12, WC = 8;   // programmed weight block per core

  logic clk = 0, rst_n = 0;
  logic [NCORE-1:0] core_pwr_en = '0, cmd_core_mask = '0;
  logic cmd_valid = 0, cmd_ready;
  cmd_t cmd;
  logic [NCORE-1:0] core_done, core_busy, core_clk_en;
  logic ra_valid = 0; logic [5:0] ra_core = 0; bus_req_t ra_req;
  logic [REG_W-1:0] rdata;
  logic spi_sclk = 0, spi_cs_n = 1, spi_mosi = 0, spi_miso;
  logic [7:0] v_read = 8'd120, v_decr = 8'd6, v_lfsr = 8'd0, v_prog = 8'd12;
  logic [3:0] wl_width_ns = 4'd4;
  logic [G_W-1:0] read_g;

  neurram_top dut (.*);
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  int g[NCORE][][];
  typedef enum int {
    M_FWD, M_BWD, M_REC, M_NTEST, M_PARALLEL, M_MULTIBIT, M_EARLY, M_SAT,
    M_RELU, M_TANH, M_SIGM, M_NOISE, M_PGATE, M_SPI_WR, M_SPI_RD,
    M_SET, M_RESET, M_READ, M_NUM
  } mech_e;
  int mech[M_NUM];

  initial begin
    #4ms; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // ---------------- register access ----------------
  task automatic ra_write(int core, side_e s, int addr, logic [7:0] d);
    @(negedge clk);
    ra_valid = 1; ra_core = 6'(core); ra_req = '0;
    ra_req.we = 1; ra_req.side = s; ra_req.addr = 8'(addr); ra_req.wdata = d;
    @(negedge clk); ra_valid = 0; ra_req = '0;
  endtask
  task automatic ra_clear(int core, side_e s);
    @(negedge clk);
    ra_valid = 1; ra_core = 6'(core); ra_req = '0; ra_req.clr = 1; ra_req.side = s;
    @(negedge clk); ra_valid = 0; ra_req = '0;
  endtask
  task automatic ra_read(int core, side_e s, int addr, output logic [7:0] d);
    @(negedge clk);
    ra_valid = 1; ra_core = 6'(core); ra_req = '0; ra_req.side = s; ra_req.addr = 8'(addr);
    #1 d = rdata;
    @(negedge clk); ra_valid = 0;
  endtask

  // one 32-bit SPI frame, mode 0, SCLK = clk/8; returns what came back
  task automatic spi_frame(logic [31:0] f, output logic [31:0] back);
    spi_cs_n = 0; repeat (4) @(negedge clk);
    for (int i = 31; i >= 0; i--) begin
      spi_mosi = f[i];
      repeat (4) @(negedge clk); spi_sclk = 1; back[i] = spi_miso;
      repeat (4) @(negedge clk); spi_sclk = 0;
    end
    repeat (4) @(negedge clk); spi_cs_n = 1; repeat (8) @(negedge clk);
  endtask
  function automatic logic [31:0] spi_word(bit we, bit clr, side_e s, int core, int addr, logic [7:0] d);
    return {we, clr, 1'(s), 6'(core), 8'(addr), d, 7'h0};
  endfunction

  // ---------------- commands ----------------
  task automatic run(logic [NCORE-1:0] mask, cmd_t c, output int cycles);
    logic [NCORE-1:0] pending;
    @(negedge clk); cmd = c; cmd_core_mask = mask; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    // cycles counts to the last core that finishes
    cycles = 0; pending = mask;
    do begin
      @(posedge clk); cycles++;
      pending &= ~core_done;
    end while (pending != '0 && cycles < 6000);
    chk(pending == '0, "command finished on every selected core");
  endtask

  task automatic prog_cell(int core, int r, int col, int target);
    cmd_t c; int cyc, tries;
    logic [31:0] back;
    if ((r + col) % 5 == 0) begin   // some selections go over SPI
      spi_frame(spi_word(0, 1, SIDE_BL, core, 0, 0), back);
      spi_frame(spi_word(0, 1, SIDE_SL, core, 0, 0), back);
      spi_frame(spi_word(1, 0, SIDE_BL, core, r, 8'h01), back);
      spi_frame(spi_word(1, 0, SIDE_SL, core, col, 8'h01), back);
      mech[M_SPI_WR]++;
    end else begin
      ra_clear(core, SIDE_BL); ra_clear(core, SIDE_SL);
      ra_write(core, SIDE_BL, r, 8'h01); ra_write(core, SIDE_SL, col, 8'h01);
    end
    c = '0; c.mode = MODE_PROG;
    tries = 0;
    forever begin
      c.prog_op = PROG_READ; run(48'(1) << core, c, cyc); mech[M_READ]++;
      @(negedge clk); ra_core = 6'(core);   // read_g follows the addressed core
      #1;
      if (int'(read_g) == target || tries > 20) break;
      if (int'(read_g) < target) begin
        c.prog_op = PROG_SET; v_prog = 8'(11 + target - int'(read_g) + $urandom_range(0, 2)); mech[M_SET]++;
      end else begin
        c.prog_op = PROG_RESET; v_prog = 8'(14 + int'(read_g) - target); mech[M_RESET]++;
      end
      run(48'(1) << core, c, cyc); tries++;
    end
    chk(int'(read_g) == target, $sformatf("core %0d cell %0d,%0d: %0d expected %0d", core, r, col, read_g, target));
  endtask

  // load the same input vector into several cores, run, check all of them
  task automatic mvm(logic [NCORE-1:0] mask, cmd_t c, logic [7:0] in_w[], bit check_words, bit check_cycles);
    logic [7:0] exp_w[]; logic [7:0] d; int smax, smax_all, cyc, ncores;
    ncores = 0; smax_all = 0;
    for (int k = 0; k < NCORE; k++) if (mask[k]) begin
      ncores++;
      for (int i = 0; i < N; i++)
        if (in_w[i] != 0 || k == 0) ra_write(k, c.in_side, i, in_w[i]);
    end
    for (int k = 0; k < NCORE; k++) if (mask[k]) begin
      ref_mvm(D, c, in_w, g[k], int'(v_read), int'(v_decr), exp_w, smax);
      if (smax > smax_all) smax_all = smax;
    end
    run(mask, c, cyc);
    if (ncores > 1) mech[M_PARALLEL]++;
    if (c.in_mag_bits > 1) mech[M_MULTIBIT]++;
    if (smax_all < int'(c.n_max)) mech[M_EARLY]++;
    if (smax_all == int'(c.n_max) && c.n_max != 0) mech[M_SAT]++;
    if (c.noise_cyc != 0) mech[M_NOISE]++;
    if (c.act == ACT_RELU) mech[M_RELU]++;
    if (c.act == ACT_TANH) mech[M_TANH]++;
    if (c.act == ACT_SIGMOID) mech[M_SIGM]++;
    if (check_cycles)
      chk(cyc == mvm_cycles(int'(c.in_mag_bits), int'(c.noise_cyc), smax_all, WL_WAIT, (c.mode == MODE_MVM) ? N : 0),
          $sformatf("cycles %0d expected %0d", cyc, mvm_cycles(int'(c.in_mag_bits), int'(c.noise_cyc), smax_all, WL_WAIT, (c.mode == MODE_MVM) ? N : 0)));
    if (check_words)
      for (int k = 0; k < NCORE; k++) if (mask[k]) begin
        ref_mvm(D, c, in_w, g[k], int'(v_read), int'(v_decr), exp_w, smax);
        for (int i = 0; i < N; i++) begin
          ra_read(k, c.out_side, i, d);
          chk(d == exp_w[i], $sformatf("core %0d mode %0d in %0d out %0d act %0d line %0d: %h expected %h",
                                        k, c.mode, c.in_side, c.out_side, c.act, i, d, exp_w[i]));
        end
      end
  endtask

  // clear the input side of the cores in mask so stale words do not count
  task automatic clear_side(logic [NCORE-1:0] mask, side_e s);
    for (int k = 0; k < NCORE; k++) if (mask[k]) ra_clear(k, s);
  endtask

  initial begin
    cmd_t c; logic [7:0] in_w[]; logic [7:0] d; logic [31:0] back;
    logic [NCORE-1:0] mask;
    int progcores[3] = '{0, 23, 47};
    ra_req = '0; cmd = '0;
    for (int k = 0; k < NCORE; k++) begin
      g[k] = new[N];
      foreach (g[k][r]) begin
        g[k][r] = new[N];
        foreach (g[k][r][col]) g[k][r][col] = 1;   // G_INIT
      end
    end
    in_w = new[N];
    repeat (3) @(posedge clk); rst_n = 1;
    core_pwr_en = '1;
    repeat (3) @(posedge clk);

    // program a WR x WC weight block into three cores
    foreach (progcores[p])
      for (int r = 0; r < WR; r++)
        for (int col = 0; col < WC; col++) begin
          int t; t = $urandom_range(1, 40);
          prog_cell(progcores[p], r, col, t);
          g[progcores[p]][r][col] = t;
        end
    mask = '0; foreach (progcores[p]) mask[progcores[p]] = 1'b1;
    foreach (progcores[p]) begin clear_side(mask, SIDE_BL); clear_side(mask, SIDE_SL); end

    // forward MVM, 4-bit signed inputs, linear output, three cores in parallel
    foreach (in_w[i]) in_w[i] = (i < WR) ? {1'($urandom), 7'($urandom_range(0, 7))} : 8'h00;
    c = '0; c.mode = MODE_MVM; c.in_side = SIDE_BL; c.out_side = SIDE_SL;
    c.in_mag_bits = 3'd3; c.in_len = 8'(WR - 1); c.n_max = 8'd128; c.act = ACT_LINEAR;
    mvm(mask, c, in_w, 1, 1); mech[M_FWD]++;

    // forward, 3-bit unsigned inputs with ReLU (CNN layers)
    foreach (in_w[i]) in_w[i] = (i < WR) ? {1'b1, 7'($urandom_range(0, 7))} : 8'h00;
    c.act = ACT_RELU; c.in_mag_bits = 3'd3; c.n_max = 8'd128;
    mvm(mask, c, in_w, 1, 1); mech[M_FWD]++;

    // recurrent MVM (BL to BL) with tanh, output lands on the transposed row
    clear_side(mask, SIDE_BL);
    foreach (in_w[i]) in_w[i] = (i < WR) ? {1'($urandom), 7'($urandom_range(0, 7))} : 8'h00;
    c.out_side = SIDE_BL; c.act = ACT_TANH; v_decr = 8'd2;
    mvm(mask, c, in_w, 1, 1); mech[M_REC]++;

    // backward MVM (SL to BL), sigmoid, 2-bit (ternary) inputs
    clear_side(mask, SIDE_SL); clear_side(mask, SIDE_BL);
    foreach (in_w[i]) in_w[i] = (i < WC) ? {1'($urandom), 7'($urandom_range(0, 1))} : 8'h00;
    c = '0; c.mode = MODE_MVM; c.in_side = SIDE_SL; c.out_side = SIDE_BL;
    c.in_mag_bits = 3'd1; c.in_len = 8'd255; c.n_max = 8'd20; c.act = ACT_SIGMOID; v_decr = 8'd1;
    mvm(mask, c, in_w, 1, 1); mech[M_BWD]++;

    // neuron test: drivers straight into the neurons
    clear_side(mask, SIDE_BL);
    foreach (in_w[i]) in_w[i] = {1'($urandom), 7'($urandom_range(0, 3))};
    c = '0; c.mode = MODE_NTEST; c.in_side = SIDE_BL; c.out_side = SIDE_SL;
    c.in_mag_bits = 3'd2; c.n_max = 8'd128; c.act = ACT_LINEAR; v_decr = 8'd20;
    mvm(48'(1), c, in_w, 1, 1); mech[M_NTEST]++;

    // stochastic binary sampling (RBM): sign only, with LFSR noise
    clear_side(mask, SIDE_BL);
    foreach (in_w[i]) in_w[i] = 8'h00;
    c = '0; c.mode = MODE_MVM; c.in_side = SIDE_BL; c.out_side = SIDE_SL;
    c.in_mag_bits = 3'd1; c.in_len = 8'd255; c.n_max = 8'd0; c.noise_cyc = 4'd2;
    v_lfsr = 8'd40;
    mvm(48'(1), c, in_w, 0, 1);
    begin
      int pos; pos = 0;
      for (int i = 0; i < N; i++) begin ra_read(0, SIDE_SL, i, d); pos += d[7]; end
      chk(pos > N / 8 && pos < N - N / 8, $sformatf("noise: %0d of %0d positive", pos, N));
    end
    v_lfsr = 8'd0;

    // SPI read-back of a register
    spi_frame(spi_word(1, 0, SIDE_BL, 5, 77, 8'hC3), back); mech[M_SPI_WR]++;
    spi_frame(spi_word(0, 0, SIDE_BL, 5, 77, 8'h00), back);
    spi_frame(spi_word(0, 0, SIDE_BL, 5, 0, 8'h00), back);
    chk(back[31:24] == 8'hC3, $sformatf("SPI read %h", back[31:24])); mech[M_SPI_RD]++;

    // power gating: core 23 off keeps weights, loses registers, ignores commands
    ra_write(23, SIDE_BL, 9, 8'h77);
    @(negedge clk); core_pwr_en[23] = 1'b0; repeat (4) @(negedge clk);
    chk(!core_busy[23] && !core_clk_en[23], "gated core idle");
    core_pwr_en[23] = 1'b1; repeat (3) @(negedge clk); mech[M_PGATE]++;
    ra_read(23, SIDE_BL, 9, d);
    chk(d == 8'h00, "registers lost in power gating");
    begin
      cmd_t pc; int cyc;
      ra_clear(23, SIDE_BL); ra_clear(23, SIDE_SL);
      ra_write(23, SIDE_BL, 4, 8'h01); ra_write(23, SIDE_SL, 6, 8'h01);
      pc = '0; pc.mode = MODE_PROG; pc.prog_op = PROG_READ;
      run(48'(1) << 23, pc, cyc);
      @(negedge clk); ra_core = 6'd23; #1;
      chk(int'(read_g) == g[23][4][6], "weights kept through power gating");
    end

    // a full-size forward MVM on every core at once (all weights at G_INIT
    // except the programmed blocks), 1-bit inputs
    clear_side('1, SIDE_BL);
    foreach (in_w[i]) in_w[i] = {1'($urandom), 7'(1)};
    c = '0; c.mode = MODE_MVM; c.in_side = SIDE_BL; c.out_side = SIDE_SL;
    c.in_mag_bits = 3'd1; c.in_len = 8'd255; c.n_max = 8'd16; c.act = ACT_LINEAR; v_decr = 8'd3;
    mvm('1, c, in_w, 0, 1);
    begin
      logic [7:0] exp_w[]; int smax;
      foreach (progcores[p]) begin
        ref_mvm(D, c, in_w, g[progcores[p]], int'(v_read), int'(v_decr), exp_w, smax);
        for (int i = 0; i < N; i += 5) begin
          ra_read(progcores[p], SIDE_SL, i, d);
          chk(d == exp_w[i], $sformatf("all-core MVM core %0d line %0d: %h expected %h", progcores[p], i, d, exp_w[i]));
        end
      end
    end

    for (int m = 0; m < M_NUM; m++) begin
      chk(mech[m] > 0, $sformatf("mechanism %s never happened", mech_e'(m)));
      $display("%-12s %0d", mech_e'(m), mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
